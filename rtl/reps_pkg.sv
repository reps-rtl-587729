// reps_pkg: sizes, types and encodings shared by the REPS (Recycled Entropy
// Packet Spraying) sender logic.
//
// The per-connection state follows the memory-footprint table of REPS: an
// 8-entry circular buffer of 16-bit entropy values (EVs) with one validity bit
// each, an 8-bit head pointer, an 8-bit count of valid EVs, a 32-bit freezing
// exit time, a freezing flag and an 8-bit explore counter. One bit, `filled`,
// is this design's own addition: it tells "the buffer has never held an EV"
// apart from "the buffer holds only used EVs", which the REPS send procedure
// distinguishes (repsBuffer.isEmpty()) but the footprint table does not count.
package reps_pkg;

  // Circular buffer depth (REPS uses 8 elements).
  localparam int unsigned BUF_SIZE = 8;
  // Bits per cached entropy value (UDP source port, 2 bytes).
  localparam int unsigned EV_W     = 16;
  // Width of head, numberOfValidEVs and exploreCounter.
  localparam int unsigned CNT_W    = 8;
  // Width of time stamps (exitFreezingMode, now()).
  localparam int unsigned TIME_W   = 32;

  typedef logic [EV_W-1:0]   ev_t;
  typedef logic [CNT_W-1:0]  cnt_t;
  typedef logic [TIME_W-1:0] time_t;

  // Operations the REPS logic performs on one connection's state.
  typedef enum logic [1:0] {
    OP_ACK   = 2'd0,  // onAck: an ACK with an EV and an ECN flag came back
    OP_SEND  = 2'd1,  // onSend: choose the EV for an outgoing data packet
    OP_FAIL  = 2'd2,  // onFailureDetection: a loss was classified as a failure
    OP_CLEAR = 2'd3   // open a new connection: all state to zero
  } reps_op_e;

  // Where the EV of a data packet came from.
  typedef enum logic [1:0] {
    SRC_NONE    = 2'd0,  // not a send
    SRC_EXPLORE = 2'd1,  // random EV from the EVS
    SRC_REUSE   = 2'd2,  // oldest valid cached EV (validity cleared)
    SRC_FROZEN  = 2'd3   // freezing mode, no valid EV: replay the buffer
  } ev_src_e;

  // Cached EVs: the part that lives in the buffer SRAM (8 x 16 bit).
  typedef ev_t [BUF_SIZE-1:0] ev_buf_t;

  // Control part of the per-connection state.
  typedef struct packed {
    logic [BUF_SIZE-1:0] valid;      // isValid per element
    cnt_t                head;       // next element to write
    cnt_t                num_valid;  // numberOfValidEVs
    cnt_t                explore;    // exploreCounter
    time_t               exit_time;  // exitFreezingMode
    logic                freezing;   // isFreezingMode
    logic                filled;     // at least one EV was ever cached
  } reps_ctrl_t;

  typedef struct packed {
    ev_buf_t    evs;
    reps_ctrl_t ctrl;
  } reps_state_t;

  localparam int unsigned CTRL_W  = $bits(reps_ctrl_t);
  localparam int unsigned EVBUF_W = $bits(ev_buf_t);

endpackage
