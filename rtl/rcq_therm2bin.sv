// rcq_therm2bin: thermometer-to-binary decoder of the RCQ magnitude quantizer.
//
// Input bit j is the comparator result (|h| > tau_j). With increasing
// thresholds the input is a thermometer code (ones from bit 0 upward), and
// the output is the number of ones: 000->00, 001->01, 011->10, 111->11 for
// 3 thresholds, as in the paper's mapping table. The decoder counts the
// ones, so an input that is not a thermometer code (thresholds written out
// of order) still gives a defined output. Purely combinational.
module rcq_therm2bin #(
  parameter int unsigned NT = 3,               // number of thresholds
  localparam int unsigned OW = $clog2(NT + 1)  // output width
) (
  input  logic [NT-1:0] therm,
  output logic [OW-1:0] bin
);
  always_comb begin
    bin = '0;
    for (int j = 0; j < NT; j++)
      bin = bin + OW'(therm[j]);
  end
endmodule
