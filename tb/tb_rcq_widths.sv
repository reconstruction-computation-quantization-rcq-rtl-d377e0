// tb_rcq_widths: runs the decoder end to end in the other message-width
// configurations evaluated for the (9472, 8192) code: layer-specific
// msRCQ(4,8), layer-specific msRCQ(2,8) and msRCQ(4,10) with one parameter
// set per iteration (the same for all layers). Each configuration is a
// tb_rcq_width_env instance with its own decoder; all three must match
// their bit-exact reference models.
module tb_rcq_widths;
  logic f0, f1, f2;
  int c0, c1, c2, e0, e1, e2;
  int checks, failures;
  logic clk = 0;

  tb_rcq_width_env #(.BE(4), .BV(8),  .LAYER_SPECIFIC(1), .NAME("L-msRCQ(4,8)")) u_48  (.finished(f0), .checks(c0), .failures(e0));
  tb_rcq_width_env #(.BE(2), .BV(8),  .LAYER_SPECIFIC(1), .NAME("L-msRCQ(2,8)")) u_28  (.finished(f1), .checks(c1), .failures(e1));
  tb_rcq_width_env #(.BE(4), .BV(10), .LAYER_SPECIFIC(0), .NAME("msRCQ(4,10)"))  u_410 (.finished(f2), .checks(c2), .failures(e2));

  always #1 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2 + 1);
    $finish;
  end

  initial begin
    wait (f0 && f1 && f2);
    checks = c0 + c1 + c2;
    failures = e0 + e1 + e2;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
