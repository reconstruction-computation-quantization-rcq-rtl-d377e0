// rcq_quant: RCQ quantizer Q(.) of one internal message.
//
// A b^v-bit two's complement internal LLR h is split into its sign and
// magnitude |h|. The magnitude is compared against the 2^(b^e-1)-1
// thresholds tau_j broadcast by the control unit (one ">" comparator per
// threshold), giving a thermometer code that rcq_therm2bin turns into the
// magnitude index Q*(|h|): 0 for |h| <= tau_0, j for tau_(j-1) < |h| <=
// tau_j, and the largest index above tau_max. The output external message
// is [sign, Q*(|h|)]. This follows the paper's comparator/thermometer
// structure; h = 0 is given sign 0 (positive), which is this design's
// choice. The input must lie in the symmetric range (see rcq_pkg).
// Purely combinational. The sign bit of d is the sign bit of h wired
// straight through.
module rcq_quant #(
  parameter int unsigned BE = rcq_pkg::BE_DEF,
  parameter int unsigned BV = rcq_pkg::BV_DEF,
  localparam int unsigned NT = (1 << (BE - 1)) - 1
) (
  input  logic signed [BV-1:0]  h,     // internal message
  input  logic [NT-1:0][BV-2:0] tau,   // broadcast thresholds
  output logic [BE-1:0]         d      // external message, MSB = sign
);
  logic [BV-2:0] mag;
  logic [NT-1:0] therm;
  logic [BE-2:0] idx;

  always_comb begin
    mag = h[BV-1] ? (BV-1)'(-h) : h[BV-2:0];
    for (int j = 0; j < NT; j++)
      therm[j] = (mag > tau[j]);
  end

  rcq_therm2bin #(.NT(NT)) u_t2b (.therm(therm), .bin(idx));

  assign d = {h[BV-1], idx};
endmodule
