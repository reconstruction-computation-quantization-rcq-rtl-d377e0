// rcq_param_mem: the control unit's RCQ parameter store (Broadcast method).
//
// Two RAMs hold, for every iteration t and layer r of the layer-specific
// decoder, the 2^(b^e-1)-1 quantizer thresholds tau^(t,r) and the
// 2^(b^e-1) reconstruction magnitudes R*^(t,r). At the start of each layer
// the controller pulses load with (t, r); one cycle later the output
// registers broadcast tau^(t,r), R*^(t,r) and R*^(t-1,r) (all zero for
// t = 0) to every VN lane, and they hold until the next load. The
// reconstruction RAM is read at two addresses at once (a dual-port RAM).
// Storing all parameters centrally and broadcasting the current set is the
// paper's Broadcast method; the word layout, the host write port and the
// one-cycle load are this design's choices. Word address = t * M + r.
module rcq_param_mem #(
  parameter int unsigned BE     = rcq_pkg::BE_DEF,
  parameter int unsigned BV     = rcq_pkg::BV_DEF,
  parameter int unsigned M      = rcq_pkg::M_DEF,
  parameter int unsigned IT_MAX = rcq_pkg::IT_MAX_DEF,
  localparam int unsigned NR = 1 << (BE - 1),
  localparam int unsigned NT = NR - 1,
  localparam int unsigned TW = $clog2(IT_MAX),
  localparam int unsigned LW = $clog2(M)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host write port
  input  logic                  wr_en,
  input  logic [TW-1:0]         wr_iter,
  input  logic [LW-1:0]         wr_layer,
  input  logic [NT-1:0][BV-2:0] wr_tau,
  input  logic [NR-1:0][BV-2:0] wr_rstar,
  // controller load
  input  logic                  load,
  input  logic [TW-1:0]         iter,
  input  logic [LW-1:0]         layer,
  // broadcast to the VN units
  output logic [NT-1:0][BV-2:0] tau,
  output logic [NR-1:0][BV-2:0] r_cur,
  output logic [NR-1:0][BV-2:0] r_prev
);
  localparam int unsigned DEPTH = IT_MAX * M;

  logic [NT-1:0][BV-2:0] thr_mem [DEPTH];
  logic [NR-1:0][BV-2:0] rec_mem [DEPTH];

  logic [$clog2(DEPTH)-1:0] wa, ra, ra_prev;

  always_comb begin
    wa      = $clog2(DEPTH)'(32'(wr_iter) * M + 32'(wr_layer));
    ra      = $clog2(DEPTH)'(32'(iter) * M + 32'(layer));
    ra_prev = $clog2(DEPTH)'((32'(iter) - 32'd1) * M + 32'(layer));
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      thr_mem[wa] <= wr_tau;
      rec_mem[wa] <= wr_rstar;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tau <= '0; r_cur <= '0; r_prev <= '0;
    end else if (load) begin
      tau    <= thr_mem[ra];
      r_cur  <= rec_mem[ra];
      r_prev <= (iter == '0) ? '0 : rec_mem[ra_prev];
    end
  end
endmodule
