// qc_syndrome: parity accumulator for one layer of S parity checks.
//
// During a syndrome pass the decoder feeds, one circulant per cycle, the
// hard decisions (posterior signs) of a block column rotated into check
// order. Each lane XORs what it receives, so after the last circulant of a
// layer lane j holds the parity of check row j; ok is 1 when all S checks of
// the layer are satisfied. Used to stop decoding once the hard decisions
// form a codeword. The paper reports average iteration counts but does not
// describe the stopping rule; this check is this design's choice.
// Timing: clear resets the parities on the rising edge, in_valid folds one
// vector in; ok is combinational from the registers.
module qc_syndrome #(
  parameter int unsigned S = rcq_pkg::S_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         in_valid,
  input  logic [S-1:0] hd,        // 1 = bit decided as one
  output logic         ok
);
  logic [S-1:0] par;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        par <= '0;
    else if (clear)    par <= '0;
    else if (in_valid) par <= par ^ hd;
  end

  assign ok = (par == '0);
endmodule
