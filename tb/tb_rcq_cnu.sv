// tb_rcq_cnu: self-checking test of one check-node lane.
// Rows of random degree (2..30) with random 3-bit messages are fed one per
// clock; then every slot's extrinsic output is compared with a direct
// evaluation: sign = XOR of the other signs, magnitude = minimum of the
// other magnitude indices.
module tb_rcq_cnu;
  localparam int BE = 3, DC = 30, SW = 5;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, out_sign_in = 0;
  logic [SW-1:0] in_slot = '0, out_slot = '0;
  logic [BE-1:0] in_ext = '0, out_msg;
  int checks = 0, failures = 0, n_tie = 0;
  logic [BE-1:0] msgs [DC];

  rcq_cnu #(.BE(BE), .DC_MAX(DC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int row = 0; row < 2000; row++) begin
      automatic int deg = $urandom_range(2, DC);
      automatic int mins = 0;
      for (int k = 0; k < deg; k++) begin
        msgs[k] = BE'($urandom);
        if (row % 4 == 0) msgs[k][BE-2:0] = 2'($urandom_range(1, 2)); // force ties
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int k = 0; k < deg; k++) begin
        in_valid = 1; in_slot = SW'(k); in_ext = msgs[k];
        @(negedge clk);
      end
      in_valid = 0;
      for (int k = 0; k < deg; k++) begin
        automatic int em = 3, es = 0;
        for (int o = 0; o < deg; o++) if (o != k) begin
          es ^= int'(msgs[o][BE-1]);
          if (int'(msgs[o][BE-2:0]) < em) em = int'(msgs[o][BE-2:0]);
        end
        out_slot = SW'(k); out_sign_in = msgs[k][BE-1];
        #1;
        checks++;
        if (int'(out_msg) != es * 4 + em) begin
          failures++;
          if (failures < 10) $display("row %0d slot %0d got %0d exp %0d", row, k, out_msg, es*4+em);
        end
      end
      for (int k = 0; k < deg; k++) if (int'(msgs[k][BE-2:0]) == 1) mins++;
      if (mins > 1) n_tie++;
    end
    checks++;
    if (n_tie == 0) failures++;
    $display("rows_with_tied_minimum=%0d", n_tie);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
