// tb_qc_syndrome: feeds random hard-decision vectors and checks the lane
// parities through ok: a layer whose vectors XOR to zero must give ok = 1,
// one with any odd lane ok = 0; clear must restart the accumulation.
module tb_qc_syndrome;
  localparam int S = 128;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic [S-1:0] hd = '0;
  logic ok;
  int checks = 0, failures = 0, n_ok = 0, n_bad = 0;

  qc_syndrome #(.S(S)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [S-1:0] rnd();
    logic [S-1:0] v;
    for (int i = 0; i < S / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      logic [S-1:0] acc;
      int deg;
      logic want_ok;
      deg = $urandom_range(2, 30);
      want_ok = $urandom_range(0, 1);
      acc = '0;
      clear = 1; @(negedge clk); clear = 0;
      for (int k = 0; k < deg; k++) begin
        hd = rnd();
        if (k == deg - 1 && want_ok) hd = acc;   // make the total parity zero
        if (k == deg - 1 && !want_ok && (acc ^ hd) == '0) hd[0] = ~hd[0];
        acc ^= hd;
        in_valid = 1; @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      checks++;
      if (ok != (acc == '0)) failures++;
      if (ok) n_ok++; else n_bad++;
    end
    checks++;
    if (n_ok == 0 || n_bad == 0) failures++;
    $display("satisfied=%0d unsatisfied=%0d", n_ok, n_bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
