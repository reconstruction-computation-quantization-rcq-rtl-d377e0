// tb_rcq_quant: self-checking test of the RCQ quantizer Q(.).
// Random increasing thresholds; every internal value in [-127, 127] is
// quantized and compared with the piecewise definition
// Q*(h) = 0 if |h| <= tau0, j if tau(j-1) < |h| <= tau(j), 3 above tau2.
module tb_rcq_quant;
  localparam int BE = 3, BV = 8, NT = 3;
  logic signed [BV-1:0]  h;
  logic [NT-1:0][BV-2:0] tau;
  logic [BE-1:0]         d;
  int checks = 0, failures = 0;

  rcq_quant #(.BE(BE), .BV(BV)) dut (.h, .tau, .d);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 40; trial++) begin
      int t0, t1, t2;
      t0 = $urandom_range(0, 40);
      t1 = t0 + $urandom_range(1, 40);
      t2 = t1 + $urandom_range(1, 40);
      tau[0] = 7'(t0); tau[1] = 7'(t1); tau[2] = 7'(t2);
      for (int v = -127; v <= 127; v++) begin
        int m, q, exp_d;
        h = BV'(v);
        #1;
        m = (v < 0) ? -v : v;
        if (m <= t0)      q = 0;
        else if (m <= t1) q = 1;
        else if (m <= t2) q = 2;
        else              q = 3;
        exp_d = ((v < 0) ? 4 : 0) + q;
        checks++;
        if (int'(d) != exp_d) begin
          failures++;
          if (failures < 10) $display("mismatch h=%0d got %0d exp %0d", v, d, exp_d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
