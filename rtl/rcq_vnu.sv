// rcq_vnu: one lane of the layered RCQ variable-node unit.
//
// It holds the two arithmetic paths of the VN unit of the layer-specific
// msRCQ decoder for block row r of iteration t:
//   read path  : v2c = l_v - R^(t-1,r)(u_old)        (saturating subtract)
//                ext = Q^(t,r)(v2c)                  (b^e bits to the CN)
//   write path : l_v' = v2c + R^(t,r)(u_new)         (saturating add)
// u_old is the check-to-variable message this row sent in the previous
// iteration; in the first iteration there is none (no_old = 1) and nothing
// is subtracted. The saved v2c is the internal message that the paper's
// figure feeds around the quantizer to the adder; the decoder keeps it in a
// buffer between the two paths. The structure follows the paper; the
// symmetric saturation to b^v bits is this design's choice.
// Purely combinational; the decoder places S copies side by side.
module rcq_vnu
  import rcq_pkg::*;
#(
  parameter int unsigned BE = rcq_pkg::BE_DEF,
  parameter int unsigned BV = rcq_pkg::BV_DEF,
  localparam int unsigned NR = 1 << (BE - 1),
  localparam int unsigned NT = NR - 1
) (
  // read path
  input  logic signed [BV-1:0]  l_in,     // posterior l_v
  input  logic [BE-1:0]         u_old,    // previous c2v message
  input  logic                  no_old,   // first iteration: u_old absent
  input  logic [NR-1:0][BV-2:0] r_prev,   // R*^(t-1,r)
  input  logic [NT-1:0][BV-2:0] tau,      // thresholds of Q^(t,r)
  output logic signed [BV-1:0]  v2c,      // internal VN-to-CN message
  output logic [BE-1:0]         ext,      // external VN-to-CN message
  // write path
  input  logic signed [BV-1:0]  v2c_in,   // saved internal VN-to-CN message
  input  logic [BE-1:0]         u_new,    // new c2v message from the CN
  input  logic [NR-1:0][BV-2:0] r_cur,    // R*^(t,r)
  output logic signed [BV-1:0]  l_out     // updated posterior
);
  logic signed [BV-1:0] rec_old, rec_new;
  logic signed [15:0]   diff, sum;

  rcq_recon #(.BE(BE), .BV(BV)) u_rold (.d(u_old), .rstar(r_prev), .llr(rec_old));
  rcq_recon #(.BE(BE), .BV(BV)) u_rnew (.d(u_new), .rstar(r_cur),  .llr(rec_new));

  always_comb begin
    diff  = 16'(l_in) - (no_old ? 16'sd0 : 16'(rec_old));
    v2c   = BV'(sat_sym(diff, BV));
  end

  always_comb begin
    sum   = 16'(v2c_in) + 16'(rec_new);
    l_out = BV'(sat_sym(sum, BV));
  end

  rcq_quant #(.BE(BE), .BV(BV)) u_q (.h(v2c), .tau(tau), .d(ext));
endmodule
