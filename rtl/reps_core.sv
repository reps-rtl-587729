// reps_core: next-state logic of REPS for one connection (combinational).
//
// Given a connection's current state and one operation, it returns the new
// state and, for a send, the entropy value (EV) to put in the packet header.
// It follows the two REPS procedures step by step:
//   ACK  - an ECN-marked ACK changes nothing. Otherwise the ACK's EV is written
//          at `head` with its validity bit set (the valid count grows only if
//          that slot was not already valid), `head` advances, and if freezing
//          mode is on and its exit time has passed, freezing ends and the
//          explore counter is loaded with the congestion window in packets.
//   FAIL - if not freezing and the explore counter is zero, freezing starts and
//          ends no earlier than now + freeze_timeout.
//   SEND - while the explore counter is non-zero it is decremented and every
//          BUF_SIZE-th packet explores a random EV. Otherwise: if the buffer never
//          held an EV, or holds no valid EV outside freezing mode, a random EV is
//          explored; else the oldest valid EV is reused and invalidated; in
//          freezing mode with no valid EV the element at `head` is replayed and
//          `head` advances.
//   CLEAR- all state to zero (a new connection).
// The REPS pseudocode leaves the EV of a send unset when the explore counter is
// non-zero but not at a multiple of BUF_SIZE; here such a send falls through to
// the normal reuse/explore choice (this design's reading).
// Exit time is compared wrap-aware (signed difference), an own choice.
// Interface: state_i/state_o, op_i with its ACK fields, now_i (time base),
// rand_i (free random word, reduced modulo EVS_SIZE), cwnd_pkts_i and
// freeze_timeout_i (run-time settings). No clock: the caller registers state.
module reps_core
  import reps_pkg::*;
#(
  parameter int unsigned EVS_SIZE = 65536   // size of the entropy value set
) (
  input  reps_state_t state_i,
  input  reps_op_e    op_i,
  input  ev_t         ack_ev_i,
  input  logic        ack_ecn_i,
  input  time_t       now_i,
  input  logic [31:0] rand_i,
  input  cnt_t        cwnd_pkts_i,       // NUM_PKTS_CWND
  input  time_t       freeze_timeout_i,  // FREEZING_TIMEOUT
  output reps_state_t state_o,
  output ev_t         ev_o,
  output ev_src_e     src_o,
  output logic        freeze_enter_o,    // this operation started freezing mode
  output logic        freeze_exit_o      // this operation ended freezing mode
);

  localparam cnt_t BUF_LAST = cnt_t'(BUF_SIZE - 1);
  localparam int unsigned IDX_W = (BUF_SIZE > 1) ? $clog2(BUF_SIZE) : 1;

  function automatic cnt_t inc_head(cnt_t h);
    return (h >= BUF_LAST) ? '0 : h + cnt_t'(1);
  endfunction

  ev_t         rand_ev;
  cnt_t        expl_dec;
  logic [IDX_W-1:0] oldest;
  logic        expl_tick;
  logic        go_random;
  logic        exit_due;

  assign rand_ev   = EV_W'(rand_i % 32'(EVS_SIZE));
  assign expl_dec  = state_i.ctrl.explore - cnt_t'(1);
  assign expl_tick = (expl_dec % cnt_t'(BUF_SIZE)) == '0;
  assign oldest    = IDX_W'((state_i.ctrl.head >= state_i.ctrl.num_valid)
                   ? state_i.ctrl.head - state_i.ctrl.num_valid
                   : state_i.ctrl.head + cnt_t'(BUF_SIZE) - state_i.ctrl.num_valid);
  assign go_random = !state_i.ctrl.filled
                  || (state_i.ctrl.num_valid == '0 && !state_i.ctrl.freezing);
  assign exit_due  = $signed(now_i - state_i.ctrl.exit_time) > 0;

  always_comb begin
    state_o        = state_i;
    ev_o           = '0;
    src_o          = SRC_NONE;
    freeze_enter_o = 1'b0;
    freeze_exit_o  = 1'b0;
    unique case (op_i)
      OP_ACK: begin
        if (!ack_ecn_i) begin
          if (!state_i.ctrl.valid[state_i.ctrl.head[IDX_W-1:0]])
            state_o.ctrl.num_valid = state_i.ctrl.num_valid + cnt_t'(1);
          state_o.evs[state_i.ctrl.head[IDX_W-1:0]]        = ack_ev_i;
          state_o.ctrl.valid[state_i.ctrl.head[IDX_W-1:0]] = 1'b1;
          state_o.ctrl.head   = inc_head(state_i.ctrl.head);
          state_o.ctrl.filled = 1'b1;
          if (state_i.ctrl.freezing && exit_due) begin
            state_o.ctrl.freezing = 1'b0;
            state_o.ctrl.explore  = cwnd_pkts_i;
            freeze_exit_o         = 1'b1;
          end
        end
      end
      OP_FAIL: begin
        if (!state_i.ctrl.freezing && state_i.ctrl.explore == '0) begin
          state_o.ctrl.freezing  = 1'b1;
          state_o.ctrl.exit_time = now_i + freeze_timeout_i;
          freeze_enter_o         = 1'b1;
        end
      end
      OP_SEND: begin
        if (state_i.ctrl.explore != '0)
          state_o.ctrl.explore = expl_dec;
        if ((state_i.ctrl.explore != '0 && expl_tick) || go_random) begin
          ev_o  = rand_ev;
          src_o = SRC_EXPLORE;
        end else if (state_i.ctrl.num_valid != '0) begin
          ev_o  = state_i.evs[oldest];
          src_o = SRC_REUSE;
          state_o.ctrl.valid[oldest] = 1'b0;
          state_o.ctrl.num_valid = state_i.ctrl.num_valid - cnt_t'(1);
        end else begin
          ev_o  = state_i.evs[state_i.ctrl.head[IDX_W-1:0]];
          src_o = SRC_FROZEN;
          state_o.ctrl.head = inc_head(state_i.ctrl.head);
        end
      end
      OP_CLEAR: state_o = '0;
      default: ;
    endcase
  end

endmodule
