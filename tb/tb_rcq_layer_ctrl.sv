// tb_rcq_layer_ctrl: cycle-by-cycle check of the layer sequencer.
// A small configuration (4 layers of degree 3..8, 5 iterations) is used.
// The testbench builds the expected schedule itself, one entry per clock:
// LOAD, deg READ issues, drain, deg WRITE issues, drain per layer, then the
// syndrome pass (clear, deg issues, drain, check) whose outcome per
// (iteration, layer) comes from a random pass/fail table fed back on
// syn_ok. Issue signals, parameter loads, check-node and syndrome clears,
// the one-cycle-late data-stage copies, done, success and the iteration
// count are compared every cycle, for decodes with and without early
// termination.
module tb_rcq_layer_ctrl;
  import rcq_pkg::*;
  localparam int S = 16, M = 4, NCOL = 16, DC = 8, IT = 5;
  logic clk = 0, rst_n = 0, start = 0, early_term_en = 0;
  logic [1:0] tbl_layer;
  logic [2:0] tbl_slot;
  logic [3:0] tbl_col, tbl_shift;
  logic [3:0] tbl_deg;
  logic a_valid, b_valid, prm_load, no_old, cnu_clear, syn_clear, syn_ok;
  phase_e a_phase, b_phase;
  logic [2:0] a_slot, b_slot;
  logic [3:0] a_col, b_col, b_shift;
  logic [1:0] a_layer, b_layer, prm_layer;
  logic [2:0] prm_iter;
  logic busy, done, success;
  logic [2:0] iters;
  int checks = 0, failures = 0, n_synfail = 0, n_early = 0, n_limit = 0;

  rcq_layer_ctrl #(.S(S), .M(M), .NCOL(NCOL), .DC_MAX(DC), .IT_MAX(IT)) dut (.*);

  always #5 clk = ~clk;

  int deg [M] = '{3, 8, 5, 4};
  bit pass_tbl [IT][M];

  // table lookup model
  always_comb begin
    tbl_deg   = 4'(deg[tbl_layer]);
    tbl_col   = 4'((tbl_layer * 5 + tbl_slot * 3) % NCOL);
    tbl_shift = 4'((tbl_layer + tbl_slot * 7) % S);
    syn_ok    = pass_tbl[prm_iter][a_layer];
  end

  typedef struct {
    bit valid; phase_e ph; int layer; int slot; bit load; int iter;
    bit cclr; bit sclr; bit fin; bit ok; int its;
  } ev_t;
  ev_t q [$];

  function automatic ev_t ev(bit v, phase_e p, int l, int s, int it);
    ev_t e;
    e.valid = v; e.ph = p; e.layer = l; e.slot = s; e.load = 0; e.iter = it;
    e.cclr = 0; e.sclr = 0; e.fin = 0; e.ok = 0; e.its = 0;
    return e;
  endfunction

  task automatic build(input bit et);
    ev_t e;
    q.delete();
    for (int t = 0; t < IT; t++) begin
      for (int r = 0; r < M; r++) begin
        e = ev(0, PH_READ, r, 0, t); e.load = 1; e.cclr = 1; q.push_back(e);
        for (int k = 0; k < deg[r]; k++) q.push_back(ev(1, PH_READ, r, k, t));
        q.push_back(ev(0, PH_READ, r, 0, t));
        for (int k = 0; k < deg[r]; k++) q.push_back(ev(1, PH_WRITE, r, k, t));
        q.push_back(ev(0, PH_READ, r, 0, t));
      end
      if (et || t == IT - 1) begin
        bit all_ok = 1;
        for (int r = 0; r < M && all_ok; r++) begin
          e = ev(0, PH_READ, r, 0, t); e.sclr = 1; q.push_back(e);
          for (int k = 0; k < deg[r]; k++) q.push_back(ev(1, PH_SYN, r, k, t));
          q.push_back(ev(0, PH_READ, r, 0, t));
          q.push_back(ev(0, PH_READ, r, 0, t));   // check cycle
          if (!pass_tbl[t][r]) begin all_ok = 0; if (r > 0) n_synfail++; end
        end
        if (all_ok || t == IT - 1) begin
          e = ev(0, PH_READ, 0, 0, 0); e.fin = 1; e.ok = all_ok; e.its = t + 1;
          q.push_back(e);
          if (all_ok && t < IT - 1) n_early++;
          if (!all_ok) n_limit++;
          return;
        end
      end
    end
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 60; run++) begin
      bit et;
      et = (run % 4 != 3);
      for (int t = 0; t < IT; t++)
        for (int r = 0; r < M; r++)
          pass_tbl[t][r] = (run % 5 == 0) ? 1'b1 : ($urandom_range(0, 99) < 35 + 15 * t);
      build(et);
      early_term_en = et;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      // the state entered on the start edge is LOAD of layer 0
      while (q.size() > 1) begin
        ev_t e, p;
        e = q.pop_front();
        chk(a_valid == e.valid, $sformatf("run %0d a_valid", run));
        if (e.valid) begin
          chk(a_phase == e.ph, $sformatf("run %0d phase", run));
          chk(int'(a_slot) == e.slot, $sformatf("run %0d slot", run));
          chk(int'(a_col) == (e.layer * 5 + e.slot * 3) % NCOL, $sformatf("run %0d col", run));
        end
        chk(int'(a_layer) == e.layer, $sformatf("run %0d layer %0d exp %0d", run, a_layer, e.layer));
        chk(prm_load == e.load, $sformatf("run %0d load", run));
        if (e.load) chk(int'(prm_iter) == e.iter && int'(prm_layer) == e.layer, "load address");
        chk(no_old == (e.iter == 0), "no_old");
        chk(cnu_clear == e.cclr, "cnu_clear");
        chk(syn_clear == e.sclr, "syn_clear");
        chk(busy && !done, "busy during decode");
        @(negedge clk);
        // data stage is the issue stage one cycle later
        chk(b_valid == e.valid, "b_valid");
        if (e.valid) begin
          chk(b_phase == e.ph && int'(b_slot) == e.slot && int'(b_layer) == e.layer, "b stage");
          chk(int'(b_shift) == (e.layer + e.slot * 7) % S, "b_shift");
          chk(int'(b_col) == (e.layer * 5 + e.slot * 3) % NCOL, "b_col");
        end
      end
      begin
        ev_t e;
        e = q.pop_front();
        chk(done && !busy, $sformatf("run %0d done at the expected cycle", run));
        chk(success == e.ok, "success");
        chk(int'(iters) == e.its, $sformatf("run %0d iterations %0d exp %0d", run, iters, e.its));
      end
      @(negedge clk);
      chk(!done, "done is a pulse");
    end
    $display("early_stops=%0d iteration_limits=%0d syndrome_cut_short=%0d", n_early, n_limit, n_synfail);
    checks++;
    if (n_early == 0 || n_limit == 0 || n_synfail == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
