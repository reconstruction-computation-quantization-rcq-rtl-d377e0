// rcq_cnu: one lane of the min-sum check-node unit working on external
// (b^e-bit) messages, as in the msRCQ decoder.
//
// Because reconstruction is monotonic, the smallest magnitude index is the
// smallest LLR magnitude, so the min operation runs directly on the indices
// without any reconstruction or re-quantization in the check node.
// The unit takes the messages of one row serially, one circulant (slot) per
// cycle, and keeps the running smallest magnitude min1, its slot idx1, the
// second smallest min2 and the XOR of all signs. The extrinsic output for
// slot k is then sign_k XOR sgn with magnitude min2 if k is idx1, else min1.
// The min/XOR rule is from the paper; the serial two-minimum organisation is
// this design's choice. Ties keep the earlier slot as idx1 and set min2 to
// the equal value, so a tie gives min1 to every slot.
// Timing: clear (one cycle) resets the state; each in_valid cycle folds one
// message in on the rising clock edge; the output is combinational from the
// state and (out_slot, out_sign_in).
module rcq_cnu #(
  parameter int unsigned BE     = rcq_pkg::BE_DEF,
  parameter int unsigned DC_MAX = rcq_pkg::DC_MAX_DEF,
  localparam int unsigned SW    = $clog2(DC_MAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,        // start a new row
  input  logic          in_valid,
  input  logic [SW-1:0] in_slot,
  input  logic [BE-1:0] in_ext,       // external VN-to-CN message
  input  logic [SW-1:0] out_slot,
  input  logic          out_sign_in,  // sign of the message slot out_slot sent
  output logic [BE-1:0] out_msg       // extrinsic CN-to-VN message
);
  logic [BE-2:0] min1, min2;
  logic [SW-1:0] idx1;
  logic          sgn;
  logic [BE-2:0] mag;

  assign mag = in_ext[BE-2:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      min1 <= '1; min2 <= '1; idx1 <= '0; sgn <= 1'b0;
    end else if (clear) begin
      min1 <= '1; min2 <= '1; idx1 <= '0; sgn <= 1'b0;
    end else if (in_valid) begin
      sgn <= sgn ^ in_ext[BE-1];
      if (mag < min1) begin
        min2 <= min1;
        min1 <= mag;
        idx1 <= in_slot;
      end else if (mag < min2) begin
        min2 <= mag;
      end
    end
  end

  always_comb begin
    out_msg[BE-1]   = sgn ^ out_sign_in;
    out_msg[BE-2:0] = (out_slot == idx1) ? min2 : min1;
  end
endmodule
