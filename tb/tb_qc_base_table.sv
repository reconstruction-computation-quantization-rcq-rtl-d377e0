// tb_qc_base_table: writes a base matrix with varying layer degrees and
// checks every (layer, slot) entry and every layer degree on read-back.
module tb_qc_base_table;
  localparam int S = 128, M = 10, NCOL = 74, DC = 30;
  logic clk = 0, rst_n = 0, wr_en = 0, wr_last = 0;
  logic [3:0] wr_layer = '0, rd_layer = '0;
  logic [4:0] wr_slot = '0, rd_slot = '0;
  logic [6:0] wr_col = '0, rd_col;
  logic [6:0] wr_shift = '0, rd_shift;
  logic [4:0] rd_deg;
  int checks = 0, failures = 0;
  int cols [M][DC], shs [M][DC], degs [M];

  qc_base_table #(.S(S), .M(M), .NCOL(NCOL), .DC_MAX(DC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < M; r++) begin
      degs[r] = (r < 6) ? 30 : (r < 9) ? 29 : 7;
      for (int k = 0; k < degs[r]; k++) begin
        cols[r][k] = $urandom_range(0, NCOL - 1);
        shs[r][k]  = $urandom_range(0, S - 1);
        @(negedge clk);
        wr_en = 1; wr_layer = 4'(r); wr_slot = 5'(k);
        wr_col = 7'(cols[r][k]); wr_shift = 7'(shs[r][k]);
        wr_last = (k == degs[r] - 1);
      end
    end
    @(negedge clk); wr_en = 0; wr_last = 0;
    for (int r = 0; r < M; r++)
      for (int k = 0; k < degs[r]; k++) begin
        rd_layer = 4'(r); rd_slot = 5'(k);
        #1;
        checks += 3;
        if (int'(rd_col) != cols[r][k]) failures++;
        if (int'(rd_shift) != shs[r][k]) failures++;
        if (int'(rd_deg) != degs[r]) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
