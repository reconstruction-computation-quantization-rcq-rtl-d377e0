// rcq_recon: RCQ reconstruction R(.) of one external message.
//
// The b^e-bit external message d = [sign, magnitude index] is turned into a
// b^v-bit two's complement internal LLR. The magnitude goes through a
// 2^(b^e-1)-to-1 multiplexer whose data inputs are the reconstruction values
// R*(0..2^(b^e-1)-1) broadcast by the control unit for the current
// iteration and layer; the index selects one. The sign bit then negates the
// result, which gives R([0 d~]) = -R([1 d~]) for a symmetric channel.
// The multiplexer structure follows the paper's FPGA figure; the two's
// complement output format is this design's choice. Purely combinational.
module rcq_recon #(
  parameter int unsigned BE = rcq_pkg::BE_DEF,
  parameter int unsigned BV = rcq_pkg::BV_DEF,
  localparam int unsigned NR = 1 << (BE - 1)
) (
  input  logic [BE-1:0]           d,      // external message, MSB = sign
  input  logic [NR-1:0][BV-2:0]   rstar,  // broadcast magnitudes R*(i)
  output logic signed [BV-1:0]    llr     // internal message
);
  logic [BV-2:0] mag;

  always_comb begin
    mag = rstar[d[BE-2:0]];
    if (d[BE-1]) llr = -$signed({1'b0, mag});
    else         llr =  $signed({1'b0, mag});
  end
endmodule
