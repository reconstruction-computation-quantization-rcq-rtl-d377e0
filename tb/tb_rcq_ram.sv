// tb_rcq_ram: checks the message RAM against a shadow array: random writes
// and reads (including a read of the address being written, which must
// return the old word) and that rd_data holds while re is low.
module tb_rcq_ram;
  localparam int DEPTH = 74, WIDTH = 1024, AW = 7;
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic [WIDTH-1:0] shadow [DEPTH];
  logic [WIDTH-1:0] expect_q;
  logic             pend = 0;
  int checks = 0, failures = 0, n_collide = 0;

  rcq_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [WIDTH-1:0] rnd();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; wr_addr = AW'(a); wr_data = rnd(); shadow[a] = wr_data;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rd_data !== expect_q) begin failures++; if (failures < 10) $display("read mismatch at step %0d", n); end
      end
      re = ($urandom_range(0, 3) != 0);
      rd_addr = AW'($urandom_range(0, DEPTH - 1));
      we = ($urandom_range(0, 1) == 1);
      wr_addr = (re && $urandom_range(0, 4) == 0) ? rd_addr : AW'($urandom_range(0, DEPTH - 1));
      wr_data = rnd();
      if (re) begin expect_q = shadow[rd_addr]; pend = 1; end
      if (we && re && wr_addr == rd_addr) n_collide++;
      @(posedge clk);
      if (we) shadow[wr_addr] = wr_data;
    end
    checks++;
    if (n_collide == 0) failures++;
    $display("read_during_write=%0d", n_collide);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
