// ldpc_rcq_decoder: layer-specific min-sum RCQ layered LDPC decoder for
// quasi-cyclic codes, msRCQ(b^e, b^v) = (3, 8) by default, sized for the
// (9472, 8192) code with 128x128 circulants, 10 layers and 74 block columns.
//
// Messages on the Tanner-graph edges are only b^e = 3 bits: a sign and a
// 2-bit magnitude index whose LLR meaning changes with the iteration t and
// the layer r. Variable-node arithmetic is done on b^v = 8-bit internal
// LLRs. Each time a variable node consumes a check message it reconstructs
// it with R^(t,r) (a 4:1 multiplexer over broadcast magnitudes), and each
// message it sends is quantized with Q^(t,r) (3 comparators and a
// thermometer decoder). Check nodes run min-sum directly on the 3-bit
// indices. All tau^(t,r) and R*^(t,r) are kept in a central parameter
// memory and broadcast to the S lanes for the current (t, r) (the
// Broadcast method).
//
// Organisation (this design's choice where the paper is silent): S = 128
// lanes, one per row of a layer. A layer is processed in two passes over
// its circulants, one circulant per cycle: a read pass (posterior read,
// rotate, subtract R^(t-1,r)(old c2v), quantize, fold into the check-node
// minimum search, save v2c) and a write pass (extrinsic check message,
// reconstruct with R^(t,r), add, rotate back, write posterior and c2v).
// See rcq_layer_ctrl for the cycle schedule and the syndrome-based stop.
//
// Interface: before start, the host loads the base-matrix table (hp_*), the
// RCQ parameters for every (t, r) (prm_*), and the channel LLRs, one block
// column of S b^v-bit two's complement values per llr_we (the most negative
// code is clipped to the symmetric range). start begins decoding; done
// pulses at the end with success and iters valid. While idle, hd_re with
// hd_col reads the S hard decisions (1 = bit one) of a block column one
// cycle later, and post_data the S posterior LLRs they are the signs of. Loads and reads are ignored while busy.
module ldpc_rcq_decoder
  import rcq_pkg::*;
#(
  parameter int unsigned BE     = rcq_pkg::BE_DEF,
  parameter int unsigned BV     = rcq_pkg::BV_DEF,
  parameter int unsigned S      = rcq_pkg::S_DEF,
  parameter int unsigned M      = rcq_pkg::M_DEF,
  parameter int unsigned NCOL   = rcq_pkg::NCOL_DEF,
  parameter int unsigned DC_MAX = rcq_pkg::DC_MAX_DEF,
  parameter int unsigned IT_MAX = rcq_pkg::IT_MAX_DEF,
  localparam int unsigned NR  = 1 << (BE - 1),
  localparam int unsigned NT  = NR - 1,
  localparam int unsigned LW  = $clog2(M),
  localparam int unsigned SW  = $clog2(DC_MAX),
  localparam int unsigned DW  = $clog2(DC_MAX + 1),
  localparam int unsigned CW  = $clog2(NCOL),
  localparam int unsigned SHW = $clog2(S),
  localparam int unsigned TW  = $clog2(IT_MAX),
  localparam int unsigned IW  = $clog2(IT_MAX + 1),
  localparam int unsigned EW  = $clog2(M * DC_MAX)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // base-matrix table
  input  logic                  hp_we,
  input  logic [LW-1:0]         hp_layer,
  input  logic [SW-1:0]         hp_slot,
  input  logic [CW-1:0]         hp_col,
  input  logic [SHW-1:0]        hp_shift,
  input  logic                  hp_last,
  // RCQ parameters
  input  logic                  prm_we,
  input  logic [TW-1:0]         prm_iter,
  input  logic [LW-1:0]         prm_layer,
  input  logic [NT-1:0][BV-2:0] prm_tau,
  input  logic [NR-1:0][BV-2:0] prm_rstar,
  // channel LLRs
  input  logic                  llr_we,
  input  logic [CW-1:0]         llr_col,
  input  logic [S-1:0][BV-1:0]  llr_data,
  // control and status
  input  logic                  start,
  input  logic                  early_term_en,
  output logic                  busy,
  output logic                  done,
  output logic                  success,
  output logic [IW-1:0]         iters,
  // result read-out: hard decisions and posterior LLRs
  input  logic                  hd_re,
  input  logic [CW-1:0]         hd_col,
  output logic [S-1:0]          hd_data,
  output logic [S-1:0][BV-1:0]  post_data
);
  // ---------------------------------------------------------------- control
  logic [LW-1:0]  tbl_layer;
  logic [SW-1:0]  tbl_slot;
  logic [CW-1:0]  tbl_col;
  logic [SHW-1:0] tbl_shift;
  logic [DW-1:0]  tbl_deg;

  logic           a_valid, b_valid;
  phase_e         a_phase, b_phase;
  logic [SW-1:0]  a_slot, b_slot;
  logic [CW-1:0]  a_col, b_col;
  logic [LW-1:0]  a_layer, b_layer;
  logic [SHW-1:0] b_shift;
  logic           prm_load, no_old, cnu_clear, syn_clear, syn_ok;
  logic [TW-1:0]  ld_iter;
  logic [LW-1:0]  ld_layer;

  qc_base_table #(.S(S), .M(M), .NCOL(NCOL), .DC_MAX(DC_MAX)) u_tbl (
    .clk, .rst_n,
    .wr_en(hp_we && !busy), .wr_layer(hp_layer), .wr_slot(hp_slot),
    .wr_col(hp_col), .wr_shift(hp_shift), .wr_last(hp_last),
    .rd_layer(tbl_layer), .rd_slot(tbl_slot),
    .rd_col(tbl_col), .rd_shift(tbl_shift), .rd_deg(tbl_deg)
  );

  rcq_layer_ctrl #(.S(S), .M(M), .NCOL(NCOL), .DC_MAX(DC_MAX), .IT_MAX(IT_MAX)) u_ctrl (
    .clk, .rst_n, .start, .early_term_en,
    .tbl_layer, .tbl_slot, .tbl_col, .tbl_shift, .tbl_deg,
    .a_valid, .a_phase, .a_slot, .a_col, .a_layer,
    .b_valid, .b_phase, .b_slot, .b_col, .b_shift, .b_layer,
    .prm_load, .prm_iter(ld_iter), .prm_layer(ld_layer), .no_old,
    .cnu_clear, .syn_clear, .syn_ok,
    .busy, .done, .success, .iters
  );

  logic [NT-1:0][BV-2:0] tau;
  logic [NR-1:0][BV-2:0] r_cur, r_prev;

  rcq_param_mem #(.BE(BE), .BV(BV), .M(M), .IT_MAX(IT_MAX)) u_prm (
    .clk, .rst_n,
    .wr_en(prm_we && !busy), .wr_iter(prm_iter), .wr_layer(prm_layer),
    .wr_tau(prm_tau), .wr_rstar(prm_rstar),
    .load(prm_load), .iter(ld_iter), .layer(ld_layer),
    .tau, .r_cur, .r_prev
  );

  // --------------------------------------------------------------- memories
  logic [S-1:0][BV-1:0] post_rd, post_wd, v2c_rd, v2c_wd, llr_sat;
  logic [S-1:0][BE-1:0] c2v_rd, c2v_wd;
  logic                 post_we, post_re, c2v_we, c2v_re, v2c_we, v2c_re;
  logic [CW-1:0]        post_wa, post_ra;
  logic [EW-1:0]        c2v_wa, c2v_ra;
  logic [SW-1:0]        v2c_wa, v2c_ra;
  logic [S-1:0][BV-1:0] shifted, l_new, l_new_rot;

  localparam logic [BV-1:0] MOST_NEG = {1'b1, {(BV-1){1'b0}}};

  always_comb begin
    for (int j = 0; j < S; j++)
      llr_sat[j] = (llr_data[j] == MOST_NEG) ? MOST_NEG + BV'(1) : llr_data[j];
  end

  always_comb begin
    post_re = (a_valid && a_phase != PH_WRITE) || (!busy && hd_re);
    post_ra = busy ? a_col : hd_col;
    post_we = (b_valid && b_phase == PH_WRITE) || (!busy && llr_we);
    post_wa = busy ? b_col : llr_col;
    post_wd = busy ? l_new_rot : llr_sat;

    c2v_re  = a_valid && a_phase == PH_READ;
    c2v_ra  = EW'(32'(a_layer) * DC_MAX + 32'(a_slot));
    c2v_we  = b_valid && b_phase == PH_WRITE;
    c2v_wa  = EW'(32'(b_layer) * DC_MAX + 32'(b_slot));

    v2c_re  = a_valid && a_phase == PH_WRITE;
    v2c_ra  = a_slot;
    v2c_we  = b_valid && b_phase == PH_READ;
    v2c_wa  = b_slot;
  end

  rcq_ram #(.DEPTH(NCOL), .WIDTH(S * BV)) u_post (
    .clk, .we(post_we), .wr_addr(post_wa), .wr_data(post_wd),
    .re(post_re), .rd_addr(post_ra), .rd_data(post_rd)
  );

  rcq_ram #(.DEPTH(M * DC_MAX), .WIDTH(S * BE)) u_c2v (
    .clk, .we(c2v_we), .wr_addr(c2v_wa), .wr_data(c2v_wd),
    .re(c2v_re), .rd_addr(c2v_ra), .rd_data(c2v_rd)
  );

  rcq_ram #(.DEPTH(DC_MAX), .WIDTH(S * BV)) u_v2c (
    .clk, .we(v2c_we), .wr_addr(v2c_wa), .wr_data(v2c_wd),
    .re(v2c_re), .rd_addr(v2c_ra), .rd_data(v2c_rd)
  );

  // -------------------------------------------------------------- datapath
  qc_shifter #(.S(S), .W(BV)) u_rot_fwd (
    .din(post_rd), .shift(b_shift), .inv(1'b0), .dout(shifted)
  );

  qc_shifter #(.S(S), .W(BV)) u_rot_inv (
    .din(l_new), .shift(b_shift), .inv(1'b1), .dout(l_new_rot)
  );

  logic [S-1:0][BE-1:0] ext;
  logic [S-1:0]         hd;

  for (genvar j = 0; j < S; j++) begin : g_lane
    rcq_vnu #(.BE(BE), .BV(BV)) u_vnu (
      .l_in(shifted[j]), .u_old(c2v_rd[j]), .no_old, .r_prev, .tau,
      .v2c(v2c_wd[j]), .ext(ext[j]),
      .v2c_in(v2c_rd[j]), .u_new(c2v_wd[j]), .r_cur, .l_out(l_new[j])
    );

    rcq_cnu #(.BE(BE), .DC_MAX(DC_MAX)) u_cnu (
      .clk, .rst_n, .clear(cnu_clear),
      .in_valid(b_valid && b_phase == PH_READ), .in_slot(b_slot), .in_ext(ext[j]),
      .out_slot(b_slot), .out_sign_in(v2c_rd[j][BV-1]), .out_msg(c2v_wd[j])
    );

    assign hd[j]      = shifted[j][BV-1];
    assign hd_data[j] = post_rd[j][BV-1];
    assign post_data[j] = post_rd[j];
  end

  qc_syndrome #(.S(S)) u_syn (
    .clk, .rst_n, .clear(syn_clear),
    .in_valid(b_valid && b_phase == PH_SYN), .hd, .ok(syn_ok)
  );

  // The datapath relies on these properties of the schedule.
  a_no_overlap : assert property (@(posedge clk) disable iff (!rst_n)
    !(post_we && post_re && post_wa == post_ra && busy));
  a_phase_stable : assert property (@(posedge clk) disable iff (!rst_n)
    b_valid |-> busy);
endmodule
