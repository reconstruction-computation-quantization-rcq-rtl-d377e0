// tb_rcq_param_mem: loads distinct thresholds and reconstruction values
// for every (iteration, layer) and checks that a load broadcasts tau^(t,r),
// R*^(t,r) and R*^(t-1,r) (zero in the first iteration) one cycle later and
// that the outputs hold between loads.
module tb_rcq_param_mem;
  localparam int BE = 3, BV = 8, M = 10, IT = 10, NR = 4, NT = 3;
  logic clk = 0, rst_n = 0, wr_en = 0, load = 0;
  logic [3:0] wr_iter = '0, iter = '0;
  logic [3:0] wr_layer = '0, layer = '0;
  logic [NT-1:0][BV-2:0] wr_tau = '0, tau;
  logic [NR-1:0][BV-2:0] wr_rstar = '0, r_cur, r_prev;
  int checks = 0, failures = 0;

  rcq_param_mem #(.BE(BE), .BV(BV), .M(M), .IT_MAX(IT)) dut (.*);

  always #5 clk = ~clk;

  // independent pattern: value of field k of entry (t, r)
  function automatic logic [BV-2:0] pat(input int t, input int r, input int k, input int which);
    return 7'((t * 37 + r * 11 + k * 5 + which * 61) % 128);
  endfunction

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("mismatch: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < IT; t++)
      for (int r = 0; r < M; r++) begin
        @(negedge clk);
        wr_en = 1; wr_iter = 4'(t); wr_layer = 4'(r);
        for (int k = 0; k < NT; k++) wr_tau[k] = pat(t, r, k, 0);
        for (int k = 0; k < NR; k++) wr_rstar[k] = pat(t, r, k, 1);
      end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      int t, r;
      t = $urandom_range(0, IT - 1); r = $urandom_range(0, M - 1);
      @(negedge clk); load = 1; iter = 4'(t); layer = 4'(r);
      @(negedge clk); load = 0; iter = 4'($urandom); layer = 4'($urandom);
      repeat (2) begin
        for (int k = 0; k < NT; k++) chk(tau[k] == pat(t, r, k, 0), "tau");
        for (int k = 0; k < NR; k++) chk(r_cur[k] == pat(t, r, k, 1), "r_cur");
        for (int k = 0; k < NR; k++)
          chk(r_prev[k] == ((t == 0) ? 7'd0 : pat(t - 1, r, k, 1)), "r_prev");
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
