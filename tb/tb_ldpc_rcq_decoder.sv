// tb_ldpc_rcq_decoder: end-to-end test of the layered msRCQ decoder at its
// full size (3-bit messages, 8-bit internal LLRs, 128x128 circulants,
// 10 layers x 74 block columns, 10 iterations).
//
// The base matrix has the degree profile of the (9472, 8192) code: every
// block column has 4 circulants, layers 0-5 have 30 and layers 6-9 have 29.
// Column c sits in layers (4c + k) mod 10, k = 0..3; shifts are random.
// The RCQ parameters are monotonic and differ per (iteration, layer).
// Channel LLRs are BPSK over AWGN for the all-zero codeword (noise from a
// sum of uniform variables), quantized to 8 bits.
//
// A bit-exact reference model of the layered RCQ algorithm runs alongside:
// it predicts every final posterior LLR, the hard decisions, success, the
// iteration count and the exact number of clock cycles of each decode.
// Frames: a clean one that stops early on the syndrome, a very noisy one
// that runs all 10 iterations, one with early termination disabled, and
// one containing the most negative 8-bit LLR code. Each mechanism (early
// stop, iteration limit, posterior saturation, the extrinsic second
// minimum, a syndrome pass cut short by a failing layer, input clipping)
// is counted and must occur at least once.
module tb_ldpc_rcq_decoder;
  localparam int BE = 3, BV = 8, S = 128, M = 10, NCOL = 74, DC = 30, IT = 10;
  localparam int NR = 4, NT = 3, N = S * NCOL;
  localparam int LIM = 127;

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

  ldpc_rcq_decoder dut (.*);

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
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
          int min1 = 3, min2 = 3, idx = 0, sg = 0;
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
        int step = 5 + t / 3 + (r % 2);
        for (int i = 0; i < NR; i++) rst_v[t][r][i] = (step * (2 * i + 1) > LIM) ? LIM : step * (2 * i + 1);
        for (int j = 0; j < NT; j++) tau_v[t][r][j] = (rst_v[t][r][j] + rst_v[t][r][j + 1]) / 2;
        @(negedge clk);
        prm_we = 1; prm_iter = 4'(t); prm_layer = 4'(r);
        for (int j = 0; j < NT; j++) prm_tau[j] = 7'(tau_v[t][r][j]);
        for (int i = 0; i < NR; i++) prm_rstar[i] = 7'(rst_v[t][r][i]);
      end
    @(negedge clk); prm_we = 0;
  endtask

  task automatic make_frame(input real mean, input real sigma, input bit clip);
    for (int i = 0; i < N; i++) begin
      int v = $rtoi(mean + sigma * gauss() + 1000.5) - 1000;
      if (v > LIM) v = LIM;
      if (v < -128) v = -128;
      chan[i] = v;
    end
    if (clip) for (int i = 0; i < 4; i++) chan[i * 997] = -128;
  endtask

  task automatic run_frame(input string name, input bit et);
    int cyc = 0, nclip = 0;
    for (int c = 0; c < NCOL; c++) begin
      @(negedge clk);
      llr_we = 1; llr_col = 7'(c);
      for (int j = 0; j < S; j++) llr_data[j] = BV'(chan[c * S + j]);
    end
    @(negedge clk); llr_we = 0;
    for (int i = 0; i < N; i++) if (chan[i] == -128) begin chan[i] = -LIM; nclip++; end
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
    $display("%s: success=%0d iterations=%0d cycles=%0d (model %0d/%0d/%0d)",
             name, success, iters, cyc, m_success, m_iters, m_cycles);
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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_code();
    load_params();
    make_frame(30.0, 10.0, 0);  run_frame("clean", 1);
    make_frame(4.0, 24.0, 0);   run_frame("noisy", 1);
    for (int f = 0; f < 16; f++) begin
      make_frame(21.0 + 0.5 * f, 10.0, 0);
      run_frame($sformatf("medium-%0d", f), 1);
    end
    make_frame(30.0, 10.0, 0);  run_frame("no-early-stop", 0);
    make_frame(32.0, 10.0, 1);  run_frame("clipped-input", 1);
    $display("mechanisms: early_stop=%0d iteration_limit=%0d posterior_saturation=%0d second_min=%0d syndrome_cut_short=%0d input_clip=%0d",
             n_early, n_limit, n_sat, n_min2, n_synfail, n_clip);
    chk(n_early > 0, "early stop never happened");
    chk(n_limit > 0, "iteration limit never reached");
    chk(n_sat > 0, "posterior saturation never happened");
    chk(n_min2 > 0, "second minimum never used");
    chk(n_synfail > 0, "syndrome pass never cut short after a passing layer");
    chk(n_clip > 0, "input clipping never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
