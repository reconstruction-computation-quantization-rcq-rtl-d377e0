// rcq_ram: simple dual-port RAM with one write port and one synchronous
// read port, the storage used for the decoder's message memories:
//   * posterior memory: one word per block column, S LLRs of b^v bits;
//   * check-to-variable memory: one word per (layer, circulant slot),
//     S external messages of b^e bits;
//   * variable-to-check buffer: one word per slot of the current layer,
//     S internal messages of b^v bits.
// The paper names these messages; organising them as wide words, one per
// circulant, is this design's choice. Timing: a write happens on the rising
// edge when we = 1; rd_data shows mem[rd_addr] one cycle after re = 1 and
// holds otherwise. A read of the address being written returns the old
// word. Contents are not reset; the decoder writes every word before it
// reads it, except the c2v memory, whose first-iteration reads are ignored.
module rcq_ram #(
  parameter int unsigned DEPTH = 74,
  parameter int unsigned WIDTH = 1024,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             re,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    if (re) rd_data <= mem[rd_addr];
  end
endmodule
