// rcq_layer_ctrl: iteration / layer / circulant sequencer of the layered
// RCQ decoder.
//
// For every iteration t and every layer r it runs:
//   LOAD   : load tau^(t,r), R*^(t,r), R*^(t-1,r) into the broadcast
//            registers and clear the check-node units (1 cycle);
//   READ   : one circulant per cycle, slots 0..deg-1 (deg cycles);
//   RDRAIN : wait for the last read's data (1 cycle);
//   WRITE  : one circulant per cycle again, writing posteriors and
//            check-to-variable messages back (deg cycles);
//   WDRAIN : last write (1 cycle).
// After the last layer of an iteration (every iteration when early
// termination is enabled, otherwise only the last one) it runs a syndrome
// pass: for every layer SCLR (1) + SISSUE (deg) + SDRAIN (1) + SCHK (1).
// A failing layer ends the pass at once. A pass in which all layers
// are satisfied ends decoding with success = 1; otherwise decoding goes on
// until IT_MAX iterations have run, then ends with success = 0.
// Memory reads have one cycle latency, so each access has an issue stage
// (a_*: addresses, driven combinationally from the state) and a data stage
// one cycle later (b_*: registered copies used by the datapath).
// a_col is the base-matrix table's column output passed straight through,
// so a synthesis report lists those bits as wired to an input.
// The layered schedule and the per-(t,r) parameter choice follow the paper;
// the two-pass per-layer organisation, the pipeline and the stopping rule
// are this design's choices.
module rcq_layer_ctrl
  import rcq_pkg::*;
#(
  parameter int unsigned S      = rcq_pkg::S_DEF,
  parameter int unsigned M      = rcq_pkg::M_DEF,
  parameter int unsigned NCOL   = rcq_pkg::NCOL_DEF,
  parameter int unsigned DC_MAX = rcq_pkg::DC_MAX_DEF,
  parameter int unsigned IT_MAX = rcq_pkg::IT_MAX_DEF,
  localparam int unsigned LW  = $clog2(M),
  localparam int unsigned SW  = $clog2(DC_MAX),
  localparam int unsigned DW  = $clog2(DC_MAX + 1),
  localparam int unsigned CW  = $clog2(NCOL),
  localparam int unsigned SHW = $clog2(S),
  localparam int unsigned TW  = $clog2(IT_MAX),
  localparam int unsigned IW  = $clog2(IT_MAX + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           early_term_en,
  // base-matrix table lookup (combinational)
  output logic [LW-1:0]  tbl_layer,
  output logic [SW-1:0]  tbl_slot,
  input  logic [CW-1:0]  tbl_col,
  input  logic [SHW-1:0] tbl_shift,
  input  logic [DW-1:0]  tbl_deg,
  // issue stage
  output logic           a_valid,
  output phase_e         a_phase,
  output logic [SW-1:0]  a_slot,
  output logic [CW-1:0]  a_col,
  output logic [LW-1:0]  a_layer,
  // data stage
  output logic           b_valid,
  output phase_e         b_phase,
  output logic [SW-1:0]  b_slot,
  output logic [CW-1:0]  b_col,
  output logic [SHW-1:0] b_shift,
  output logic [LW-1:0]  b_layer,
  // parameter broadcast and check nodes
  output logic           prm_load,
  output logic [TW-1:0]  prm_iter,
  output logic [LW-1:0]  prm_layer,
  output logic           no_old,      // first iteration: no old c2v message
  output logic           cnu_clear,
  output logic           syn_clear,
  input  logic           syn_ok,
  // status
  output logic           busy,
  output logic           done,        // one-cycle pulse
  output logic           success,     // hard decisions satisfy all checks
  output logic [IW-1:0]  iters        // iterations run
);
  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_READ, S_RDRAIN, S_WRITE, S_WDRAIN,
    S_SCLR, S_SISSUE, S_SDRAIN, S_SCHK
  } state_e;

  state_e        st;
  logic [TW-1:0] it;
  logic [LW-1:0] ly;
  logic [SW-1:0] sl;

  logic last_slot, last_layer, last_iter, syn_now;
  always_comb begin
    last_slot  = (DW'(sl) + DW'(1) >= tbl_deg);
    last_layer = (ly == LW'(M - 1));
    last_iter  = (it == TW'(IT_MAX - 1));
    syn_now    = early_term_en || last_iter;
  end

  // issue stage
  always_comb begin
    tbl_layer = ly;
    tbl_slot  = sl;
    a_valid   = (st == S_READ) || (st == S_WRITE) || (st == S_SISSUE);
    a_phase   = (st == S_WRITE) ? PH_WRITE : (st == S_SISSUE) ? PH_SYN : PH_READ;
    a_slot    = sl;
    a_col     = tbl_col;
    a_layer   = ly;
    prm_load  = (st == S_LOAD);
    prm_iter  = it;
    prm_layer = ly;
    cnu_clear = (st == S_LOAD);
    syn_clear = (st == S_SCLR);
    no_old    = (it == '0);
    busy      = (st != S_IDLE);
  end

  // data stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid <= 1'b0; b_phase <= PH_READ; b_slot <= '0;
      b_col <= '0; b_shift <= '0; b_layer <= '0;
    end else begin
      b_valid <= a_valid;
      b_phase <= a_phase;
      b_slot  <= sl;
      b_col   <= tbl_col;
      b_shift <= tbl_shift;
      b_layer <= ly;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; it <= '0; ly <= '0; sl <= '0;
      done <= 1'b0; success <= 1'b0; iters <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_LOAD; it <= '0; ly <= '0; sl <= '0;
          success <= 1'b0; iters <= '0;
        end
        S_LOAD:   begin st <= S_READ; sl <= '0; end
        S_READ:   if (last_slot) begin st <= S_RDRAIN; sl <= '0; end
                  else sl <= sl + SW'(1);
        S_RDRAIN: st <= S_WRITE;
        S_WRITE:  if (last_slot) begin st <= S_WDRAIN; sl <= '0; end
                  else sl <= sl + SW'(1);
        S_WDRAIN: begin
          if (!last_layer) begin
            ly <= ly + LW'(1); st <= S_LOAD;
          end else begin
            ly    <= '0;
            iters <= IW'(it) + IW'(1);
            if (syn_now) st <= S_SCLR;
            else begin it <= it + TW'(1); st <= S_LOAD; end
          end
        end
        S_SCLR:   begin st <= S_SISSUE; sl <= '0; end
        S_SISSUE: if (last_slot) begin st <= S_SDRAIN; sl <= '0; end
                  else sl <= sl + SW'(1);
        S_SDRAIN: st <= S_SCHK;
        S_SCHK: begin
          if (syn_ok && !last_layer) begin
            ly <= ly + LW'(1); st <= S_SCLR;
          end else if (syn_ok) begin
            st <= S_IDLE; done <= 1'b1; success <= 1'b1; ly <= '0;
          end else if (last_iter) begin
            st <= S_IDLE; done <= 1'b1; success <= 1'b0; ly <= '0;
          end else begin
            ly <= '0; it <= it + TW'(1); st <= S_LOAD;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
