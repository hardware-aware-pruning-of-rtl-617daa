// sparse_fc_controller -- sequences one pass of a sparse fully connected layer.
//
// A pass walks through k_count stored weights, one per cycle:
//   IDLE  --start-->  [CLEAR: m_out cycles writing 0 to the output buffer,
//                      only if `clear`]  -->  RUN: k_count cycles  -->
//   DRAIN: 1 cycle  -->  IDLE with a one-cycle `done` pulse.
// On `start` with `reseed` set the LFSRs are loaded with their seeds, so the
// first weight of the pass is at the seeds' positions. Without `reseed` the
// LFSRs continue where the previous pass stopped: a layer with more weights
// than the weight memory holds is run as several passes, the host reloading
// the weight memory in between (first pass: clear + reseed, later passes:
// neither).
//
// Each RUN cycle `issue` is high, `step` advances the LFSRs and `w_raddr`
// gives the weight number k = 0..k_count-1. Operands arrive from the
// synchronous memories one cycle later, when the MAC writes back, so the last
// write of a pass happens in the DRAIN cycle and `done` rises the cycle after.
// Cycles from `start` (sampled in IDLE) to `done`: k_count + 2, plus m_out
// when clearing. `start` must not be raised while busy (an assertion checks
// this; the state machine ignores it).
//
// The paper describes no controller; this sequencing, the clear phase and the
// multi-pass scheme are this design's own.
module sparse_fc_controller
  import lfsr_prune_pkg::*;
#(
  parameter int unsigned COL_W   = $clog2(lfsr_prune_pkg::MEM_DEPTH),
  parameter int unsigned WADDR_W = $clog2(lfsr_prune_pkg::MEM_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               clear,
  input  logic               reseed,
  input  logic [COL_W:0]     m_out,
  input  logic [WADDR_W:0]   k_count,
  output logic               lfsr_load,
  output logic               step,
  output logic               issue,
  output logic [WADDR_W-1:0] w_raddr,
  output logic               clr_we,
  output logic [COL_W-1:0]   clr_addr,
  output logic               busy,
  output logic               done,
  output ctrl_state_e        phase
);

  ctrl_state_e        state, state_n;
  logic [WADDR_W:0]   k;       // weights issued so far in this pass
  logic [COL_W:0]     c;       // entries cleared so far
  logic [WADDR_W:0]   k_total; // latched k_count
  logic [COL_W:0]     m_total; // latched m_out

  assign phase    = state;
  assign busy     = (state != ST_IDLE);
  assign lfsr_load = (state == ST_IDLE) && start && reseed;
  assign issue    = (state == ST_RUN) && (k < k_total);
  assign step     = issue;
  assign w_raddr  = k[WADDR_W-1:0];
  assign clr_we   = (state == ST_CLEAR) && (c < m_total);
  assign clr_addr = c[COL_W-1:0];

  always_comb begin
    state_n = state;
    unique case (state)
      ST_IDLE:  if (start) state_n = (clear && m_out != '0) ? ST_CLEAR
                                   : (k_count != '0) ? ST_RUN : ST_DRAIN;
      ST_CLEAR: if (c + 1'b1 >= m_total) state_n = (k_total != '0) ? ST_RUN : ST_DRAIN;
      ST_RUN:   if (k + 1'b1 >= k_total) state_n = ST_DRAIN;
      ST_DRAIN: state_n = ST_IDLE;
      default:  state_n = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= ST_IDLE;
      k       <= '0;
      c       <= '0;
      k_total <= '0;
      m_total <= '0;
      done    <= 1'b0;
    end else begin
      state <= state_n;
      done  <= (state == ST_DRAIN);
      if (state == ST_IDLE && start) begin
        k       <= '0;
        c       <= '0;
        k_total <= k_count;
        m_total <= m_out;
      end
      if (clr_we) c <= c + 1'b1;
      if (issue)  k <= k + 1'b1;
    end
  end

  // A pass must not be started while one is running.
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy);

endmodule
