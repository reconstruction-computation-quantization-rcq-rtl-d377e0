// tb_rcq_recon: self-checking test of the RCQ reconstruction multiplexer.
// For random sets of broadcast magnitudes R*(0..3) it applies every 3-bit
// external message and checks the 8-bit output against +/-R*(index).
module tb_rcq_recon;
  localparam int BE = 3, BV = 8, NR = 4;
  logic [BE-1:0]         d;
  logic [NR-1:0][BV-2:0] rstar;
  logic signed [BV-1:0]  llr;
  int checks = 0, failures = 0;

  rcq_recon #(.BE(BE), .BV(BV)) dut (.d, .rstar, .llr);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 200; trial++) begin
      for (int i = 0; i < NR; i++) rstar[i] = 7'($urandom_range(0, 127));
      for (int v = 0; v < (1 << BE); v++) begin
        int exp_v;
        d = BE'(v);
        #1;
        exp_v = int'(rstar[v % NR]);
        if (v >= NR) exp_v = -exp_v;
        checks++;
        if (int'(llr) != exp_v) begin
          failures++;
          if (failures < 10) $display("mismatch d=%0d got %0d exp %0d", v, llr, exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
