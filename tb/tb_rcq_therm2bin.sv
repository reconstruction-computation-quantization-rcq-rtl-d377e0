// tb_rcq_therm2bin: checks the thermometer-to-binary mapping table
// (000->00, 001->01, 011->10, 111->11) and the ones count for other inputs,
// for 3 thresholds and for 7 thresholds (4-bit external messages).
module tb_rcq_therm2bin;
  logic [2:0] t3;  logic [1:0] b3;
  logic [6:0] t7;  logic [2:0] b7;
  int checks = 0, failures = 0;

  rcq_therm2bin #(.NT(3)) dut3 (.therm(t3), .bin(b3));
  rcq_therm2bin #(.NT(7)) dut7 (.therm(t7), .bin(b7));

  task automatic chk(input int got, input int exp_v, input string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("mismatch %s: got %0d exp %0d", what, got, exp_v);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // the printed mapping table
    t3 = 3'b000; #1 chk(b3, 0, "000");
    t3 = 3'b001; #1 chk(b3, 1, "001");
    t3 = 3'b011; #1 chk(b3, 2, "011");
    t3 = 3'b111; #1 chk(b3, 3, "111");
    for (int v = 0; v < 8; v++) begin
      t3 = 3'(v); #1 chk(b3, $countones(3'(v)), "t3 count");
    end
    for (int k = 0; k <= 7; k++) begin
      t7 = 7'((1 << k) - 1); #1 chk(b7, k, "t7 thermometer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
