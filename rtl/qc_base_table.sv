// qc_base_table: the nonzero circulants of the quasi-cyclic base matrix H_p,
// listed layer by layer.
//
// Entry (r, k) holds the block column and the shift i of the k-th nonzero
// circulant sigma^i of block row (layer) r; deg[r] is the number of entries
// of layer r. Writing an entry with last = 1 sets the layer's degree to
// k + 1. The code itself is not fixed in hardware: the host loads the table
// before decoding, so any QC code with at most M layers, NCOL block columns
// and DC_MAX circulants per layer can be decoded. Reads are combinational
// (a small distributed memory), writes take effect on the rising edge.
// The base-matrix description follows the paper; holding it in a writable
// table is this design's choice.
module qc_base_table #(
  parameter int unsigned S      = rcq_pkg::S_DEF,
  parameter int unsigned M      = rcq_pkg::M_DEF,
  parameter int unsigned NCOL   = rcq_pkg::NCOL_DEF,
  parameter int unsigned DC_MAX = rcq_pkg::DC_MAX_DEF,
  localparam int unsigned LW  = $clog2(M),
  localparam int unsigned SW  = $clog2(DC_MAX),
  localparam int unsigned DW  = $clog2(DC_MAX + 1),
  localparam int unsigned CW  = $clog2(NCOL),
  localparam int unsigned SHW = $clog2(S)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wr_en,
  input  logic [LW-1:0]  wr_layer,
  input  logic [SW-1:0]  wr_slot,
  input  logic [CW-1:0]  wr_col,
  input  logic [SHW-1:0] wr_shift,
  input  logic           wr_last,
  input  logic [LW-1:0]  rd_layer,
  input  logic [SW-1:0]  rd_slot,
  output logic [CW-1:0]  rd_col,
  output logic [SHW-1:0] rd_shift,
  output logic [DW-1:0]  rd_deg
);
  typedef struct packed {
    logic [CW-1:0]  col;
    logic [SHW-1:0] shift;
  } circ_t;

  circ_t         tbl [M * DC_MAX];
  logic [DW-1:0] deg [M];

  always_ff @(posedge clk) begin
    if (wr_en) tbl[32'(wr_layer) * DC_MAX + 32'(wr_slot)] <= '{col: wr_col, shift: wr_shift};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < M; r++) deg[r] <= '0;
    end else if (wr_en && wr_last) begin
      deg[wr_layer] <= DW'(wr_slot) + DW'(1);
    end
  end

  circ_t e;
  always_comb begin
    e        = tbl[32'(rd_layer) * DC_MAX + 32'(rd_slot)];
    rd_col   = e.col;
    rd_shift = e.shift;
    rd_deg   = deg[rd_layer];
  end
endmodule
