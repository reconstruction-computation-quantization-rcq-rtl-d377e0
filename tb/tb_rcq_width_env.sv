// tb_rcq_width_env: end-to-end test environment for one message-width
// configuration of the decoder, msRCQ(BE, BV). It is the full-size test of
// tb_ldpc_rcq_decoder with the widths as parameters: the same
// (9472, 8192)-profile base matrix, AWGN frames for the all-zero codeword,
// and a bit-exact reference model that predicts every posterior LLR, hard
// decision, the success flag, the iteration count and the cycle count.
// With LAYER_SPECIFIC = 0 every layer of an iteration gets the same
// thresholds and reconstruction values, which is the plain (not
// layer-specific) RCQ decoder run on the same hardware. Frames and
// parameter values are scaled with the internal range 2^(BV-1)-1.
// It has no clock of its own to stop: tb_rcq_widths owns the watchdog.
module tb_rcq_width_env #(
  parameter int BE = 3,
  parameter int BV = 8,
  parameter bit LAYER_SPECIFIC = 1,
  parameter string NAME = "msRCQ"
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int S = 128, M = 10, NCOL = 74, DC = 30, IT = 10;
  localparam int NR = 1 << (BE - 1), NT = NR - 1, N = S * NCOL;
  localparam int LIM = (1 << (BV - 1)) - 1;
  localparam real SCALE = real'(LIM) / 127.0;

  logic clk = 0, rst_n = 0;
  logic hp_we = 0, hp_last = 0;
  logic [3:0] hp_layer = '0;
  logic [4:0] hp_slot = '0;
  logic [6:0] hp_col = '0, hp_shift = '0;
  logic prm_we = 0;
  logic [3:0] prm_iter = '0, prm_layer = '0;
  logic [NT-1:0][BV-2:0] prm_tau = '0;
  logic [NR-1:0][BV-2:0] prm_rstar = '0;
  logic llr_we = 0;
  logic [6:0] llr_col = '0;
  logic [S-1:0][BV-1:0] llr_data = '0;
  logic start = 0, early_term_en = 1, busy, done, success;
  logic [3:0] iters;
  logic hd_re = 0;
  logic [6:0] hd_col = '0;
  logic [S-1:0] hd_data;
  logic [S-1:0][BV-1:0] post_data;

  ldpc_rcq_decoder #(.BE(BE), .BV(BV)) dut (.*);

  always #1 clk = ~clk;

  initial begin checks = 0; failures = 0; finished = 0; end
  // mechanism counters
  int n_early = 0, n_limit = 0, n_sat = 0, n_min2 = 0, n_synfail = 0, n_clip = 0;

  // ------------------------------------------------------------- the code
  int deg [M];
  int tcol [M][DC], tsh [M][DC];
  int tau_v [IT][M][NT], rst_v [IT][M][NR];

  // ------------------------------------------------------- reference model
  int post [N];
  int c2v [M][DC][S];
  int chan [N];
  int m_iters, m_cycles;
  bit m_success;

  function automatic int sat(input int x);
    return (x > LIM) ? LIM : (x < -LIM) ? -LIM : x;
  endfunction
  function automatic int rec(input int d, input int t, input int r);
    int m = rst_v[t][r][d % NR];
    return (d >= NR) ? -m : m;
  endfunction
  function automatic int quant(input int h, input int t, input int r);
    int m = (h < 0) ? -h : h;
    int q = 0;
    for (int j = 0; j < NT; j++) if (m > tau_v[t][r][j]) q = j + 1;
    return ((h < 0) ? NR : 0) + q;
  endfunction

  // true when layer r's checks hold for the current hard decisions
  function automatic bit layer_ok(input int r);
    for (int j = 0; j < S; j++) begin
      int p = 0;
      for (int k = 0; k < deg[r]; k++)
        if (post[tcol[r][k] * S + (j + tsh[r][k]) % S] < 0) p ^= 1;
      if (p != 0) return 0;
    end
    return 1;
  endfunction

  task automatic model_decode(input bit et);
    int v2c [DC];
    int ext [DC];
    m_cycles = 0;
    m_success = 0;
    for (int i = 0; i < N; i++) post[i] = chan[i];
    for (int t = 0; t < IT; t++) begin
      for (int r = 0; r < M; r++) begin
        m_cycles += 2 * deg[r] + 3;
        for (int j = 0; j < S; j++) begin
          int min1 = NR - 1, min2 = NR - 1, idx = 0, sg = 0;
          for (int k = 0; k < deg[r]; k++) begin
            int a = tcol[r][k] * S + (j + tsh[r][k]) % S;
            int d = post[a] - ((t == 0) ? 0 : rec(c2v[r][k][j], t - 1, r));
            v2c[k] = sat(d);
            ext[k] = quant(v2c[k], t, r);
            sg ^= ext[k] / NR;
            if (ext[k] % NR < min1) begin min2 = min1; min1 = ext[k] % NR; idx = k; end
            else if (ext[k] % NR < min2) min2 = ext[k] % NR;
          end
          for (int k = 0; k < deg[r]; k++) begin
            int a = tcol[r][k] * S + (j + tsh[r][k]) % S;
            int sgn = sg ^ ((v2c[k] < 0) ? 1 : 0);
            int mg = (k == idx) ? min2 : min1;
            int u = sgn * NR + mg, s;
            if (k == idx && min2 != min1) n_min2++;
            c2v[r][k][j] = u;
            s = v2c[k] + rec(u, t, r);
            if (s > LIM || s < -LIM) n_sat++;
            post[a] = sat(s);
          end
        end
      end
      m_iters = t + 1;
      if (et || t == IT - 1) begin
        bit all_ok = 1;
        for (int r = 0; r < M && all_ok; r++) begin
          m_cycles += deg[r] + 3;
          if (!layer_ok(r)) begin all_ok = 0; if (r > 0) n_synfail++; end
        end
        if (all_ok) begin m_success = 1; return; end
      end
    end
  endtask

  // ------------------------------------------------------------ utilities
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic real gauss();
    real s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom_range(0, 1000000)) / 1000000.0;
    return s - 6.0;
  endfunction

  task automatic load_code();
    for (int r = 0; r < M; r++) deg[r] = 0;
    for (int c = 0; c < NCOL; c++)
      for (int k = 0; k < 4; k++) begin
        int r = (4 * c + k) % M;
        tcol[r][deg[r]] = c;
        tsh[r][deg[r]]  = $urandom_range(0, S - 1);
        deg[r]++;
      end
    for (int r = 0; r < M; r++)
      for (int k = 0; k < deg[r]; k++) begin
        @(negedge clk);
        hp_we = 1; hp_layer = 4'(r); hp_slot = 5'(k);
        hp_col = 7'(tcol[r][k]); hp_shift = 7'(tsh[r][k]); hp_last = (k == deg[r] - 1);
      end
    @(negedge clk); hp_we = 0; hp_last = 0;
  endtask

  // Reconstruction magnitudes grow with the iteration (messages become
  // more reliable) and differ per layer; thresholds sit between them.
  task automatic load_params();
    for (int t = 0; t < IT; t++)
      for (int r = 0; r < M; r++) begin
        int step = (LIM / 2) / (2 * NR - 1) + (t / 3) * (1 + LIM / 127) + (LAYER_SPECIFIC ? (r % 2) * (1 + LIM / 127) : 0);
        for (int i = 0; i < NR; i++) rst_v[t][r][i] = (step * (2 * i + 1) > LIM) ? LIM : step * (2 * i + 1);
        for (int j = 0; j < NT; j++) tau_v[t][r][j] = (rst_v[t][r][j] + rst_v[t][r][j + 1]) / 2;
        @(negedge clk);
        prm_we = 1; prm_iter = 4'(t); prm_layer = 4'(r);
        for (int j = 0; j < NT; j++) prm_tau[j] = (BV-1)'(tau_v[t][r][j]);
        for (int i = 0; i < NR; i++) prm_rstar[i] = (BV-1)'(rst_v[t][r][i]);
      end
    @(negedge clk); prm_we = 0;
  endtask

  task automatic make_frame(input real mean, input real sigma, input bit clip);
    for (int i = 0; i < N; i++) begin
      int v = $rtoi(SCALE * (mean + sigma * gauss()) + 100000.5) - 100000;
      if (v > LIM) v = LIM;
      if (v < -LIM - 1) v = -LIM - 1;
      chan[i] = v;
    end
    if (clip) for (int i = 0; i < 4; i++) chan[i * 997] = -LIM - 1;
  endtask

  task automatic run_frame(input string name, input bit et);
    int cyc = 0, nclip = 0;
    for (int c = 0; c < NCOL; c++) begin
      @(negedge clk);
      llr_we = 1; llr_col = 7'(c);
      for (int j = 0; j < S; j++) llr_data[j] = BV'(chan[c * S + j]);
    end
    @(negedge clk); llr_we = 0;
    for (int i = 0; i < N; i++) if (chan[i] == -LIM - 1) begin chan[i] = -LIM; nclip++; end
    if (nclip > 0) n_clip++;
    model_decode(et);
    early_term_en = et;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    chk(success == m_success, $sformatf("%s: success %0d, model %0d", name, success, m_success));
    chk(int'(iters) == m_iters, $sformatf("%s: iterations %0d, model %0d", name, iters, m_iters));
    chk(cyc == m_cycles, $sformatf("%s: %0d cycles, model %0d", name, cyc, m_cycles));
    $display("%s %s: success=%0d iterations=%0d cycles=%0d (model %0d/%0d/%0d)",
             NAME, name, success, iters, cyc, m_success, m_iters, m_cycles);
    if (m_success && m_iters < IT) n_early++;
    if (m_iters == IT && !m_success) n_limit++;
    // every posterior LLR and hard decision, through the read-out port
    begin
      int bad = 0;
      for (int c = 0; c < NCOL; c++) begin
        logic [S-1:0] e;
        @(negedge clk); hd_re = 1; hd_col = 7'(c);
        @(negedge clk); hd_re = 0;
        for (int j = 0; j < S; j++) begin
          e[j] = (post[c * S + j] < 0);
          if (int'($signed(post_data[j])) != post[c * S + j]) bad++;
        end
        chk(hd_data == e, $sformatf("%s: hard decisions of column %0d", name, c));
      end
      chk(bad == 0, $sformatf("%s: %0d posterior LLRs differ from the model", name, bad));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_code();
    load_params();
    make_frame(34.0, 10.0, 0);  run_frame("clean", 1);
    make_frame(4.0, 24.0, 0);   run_frame("noisy", 1);
    for (int f = 0; f < 6; f++) begin
      make_frame(22.0 + 2.0 * f, 10.0, 0);
      run_frame($sformatf("medium-%0d", f), 1);
    end
    make_frame(32.0, 10.0, 1);  run_frame("clipped-input", 0);
    $display("%s mechanisms: early_stop=%0d iteration_limit=%0d posterior_saturation=%0d second_min=%0d syndrome_cut_short=%0d input_clip=%0d",
             NAME, n_early, n_limit, n_sat, n_min2, n_synfail, n_clip);
    chk(n_early > 0, "early stop never happened");
    chk(n_limit > 0, "iteration limit never reached");
    chk(n_min2 > 0, "second minimum never used");
    chk(n_clip > 0, "input clipping never happened");
    finished = 1;
  end
endmodule
