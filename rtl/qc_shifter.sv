// qc_shifter: cyclic rotation of an S-lane vector for a circulant sigma^i.
//
// Row j of the circulant sigma^i has its one in column (j + i) mod S, so
// lane j of the check-node side must see variable node (j + i) mod S of the
// block column. Forward (inv = 0): out[j] = in[(j + shift) mod S].
// Inverse (inv = 1): out[(j + shift) mod S] = in[j], which puts updated
// values back in variable-node order. The shift convention follows the
// paper's definition of sigma^i; the log-depth barrel structure (one 2:1
// multiplexer stage per shift bit) is this design's choice.
// Purely combinational.
module qc_shifter #(
  parameter int unsigned S  = rcq_pkg::S_DEF,
  parameter int unsigned W  = rcq_pkg::BV_DEF,   // bits per lane
  localparam int unsigned SHW = $clog2(S)
) (
  input  logic [S-1:0][W-1:0] din,
  input  logic [SHW-1:0]      shift,   // 0 .. S-1
  input  logic                inv,
  output logic [S-1:0][W-1:0] dout
);
  // An inverse rotation by i is a forward rotation by S - i.
  logic [SHW:0]          amt;
  logic [S-1:0][W-1:0]   stage [SHW+1];

  always_comb begin
    amt = inv ? ((shift == '0) ? '0 : (SHW+1)'(S) - (SHW+1)'(shift))
              : (SHW+1)'(shift);
    stage[0] = din;
    for (int b = 0; b < SHW; b++) begin
      for (int j = 0; j < S; j++) begin
        if (amt[b]) stage[b+1][j] = stage[b][(j + (1 << b)) % S];
        else        stage[b+1][j] = stage[b][j];
      end
    end
    dout = stage[SHW];
  end
endmodule
