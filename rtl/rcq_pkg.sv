// rcq_pkg: constants and helper functions shared by the layer-specific
// min-sum RCQ (reconstruction-computation-quantization) LDPC decoder.
//
// Message formats used throughout the design:
//   * external message (b^e bits): sign-magnitude, MSB = sign (1 = negative
//     LLR, i.e. bit 1 more likely), the b^e-1 low bits are a magnitude index.
//   * internal message (b^v bits): two's complement LLR, always kept inside
//     the symmetric range [-(2^(b^v-1)-1), 2^(b^v-1)-1] so that its magnitude
//     fits in b^v-1 bits.
// The default sizes are those of the FPGA decoder: 3-bit external and
// 8-bit internal messages, a (9472,8192) quasi-cyclic code with 128x128
// circulants, 10 layers, 74 block columns, check-node degree up to 30 and at
// most 10 iterations. The numeric encodings above are this design's choice.
package rcq_pkg;

  localparam int unsigned BE_DEF      = 3;    // external message bits b^e
  localparam int unsigned BV_DEF      = 8;    // internal VN message bits b^v
  localparam int unsigned S_DEF       = 128;  // circulant size
  localparam int unsigned M_DEF       = 10;   // layers (block rows)
  localparam int unsigned NCOL_DEF    = 74;   // block columns
  localparam int unsigned DC_MAX_DEF  = 30;   // max circulants per layer
  localparam int unsigned IT_MAX_DEF  = 10;   // max decoding iterations

  // Which pass a circulant access belongs to.
  typedef enum logic [1:0] {
    PH_READ  = 2'd0,   // read posterior, VN subtract, quantize, CN min
    PH_WRITE = 2'd1,   // CN output, reconstruct, VN add, write posterior
    PH_SYN   = 2'd2    // syndrome check of the hard decisions
  } phase_e;

  // Saturate a wide signed value into the symmetric b^v-bit range.
  function automatic logic signed [15:0] sat_sym(input logic signed [15:0] x,
                                                 input int unsigned bv);
    logic signed [15:0] lim;
    lim = 16'sd1;
    lim = (lim <<< (bv - 1)) - 16'sd1;
    if (x > lim)       return lim;
    else if (x < -lim) return -lim;
    else               return x;
  endfunction

endpackage
