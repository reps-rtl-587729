// reps_engine: REPS for many connections with one shared copy of the logic.
//
// As in the FPGA NIC implementation of REPS, the state of every connection is
// kept in memory and a single instance of the REPS logic (reps_core) is shared
// by all of them. The 8 cached EVs of a connection (8 x 16 bit) form one word
// of the buffer SRAM: 256 connections take 4 KB. The control fields (validity
// bits, head, valid count, explore counter, exit time, freezing flag) sit in a
// second memory of the same depth.
//
// Pipeline (this design's own choice; the paper gives no timing):
//   cycle t   : a request is accepted (req_valid_i && req_ready_o) and both
//               memories are read at its connection index.
//   cycle t+1 : reps_core computes the new state, it is written back, and the
//               response (rsp_*) is valid for that one cycle.
// One request is accepted every cycle. When two requests in a row name the
// same connection the second one reads a stale word; a one-entry bypass then
// substitutes the state just written. After reset the engine sweeps all
// NUM_CONN entries to zero, one per cycle, with req_ready_o low.
// The random EV comes from reps_lfsr, stepped each time a send explores.
// Responses cannot be back-pressured.
module reps_engine
  import reps_pkg::*;
#(
  parameter int unsigned NUM_CONN = 256,    // connections (REPS-FPGA: 256)
  parameter int unsigned EVS_SIZE = 65536,  // entropy value set size
  localparam int unsigned CW      = (NUM_CONN > 1) ? $clog2(NUM_CONN) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // request
  input  logic        req_valid_i,
  output logic        req_ready_o,
  input  reps_op_e    req_op_i,
  input  logic [CW-1:0] req_conn_i,
  input  ev_t         req_ev_i,     // ACK: EV echoed by the receiver
  input  logic        req_ecn_i,    // ACK: ECN mark
  // settings and time base
  input  time_t       now_i,
  input  cnt_t        cwnd_pkts_i,
  input  time_t       freeze_timeout_i,
  // response, one cycle after acceptance
  output logic        rsp_valid_o,
  output reps_op_e    rsp_op_o,
  output logic [CW-1:0] rsp_conn_o,
  output ev_t         rsp_ev_o,
  output ev_src_e     rsp_src_o,
  output logic        rsp_freezing_o,   // freezing flag after the operation
  output logic        rsp_freeze_enter_o,
  output logic        rsp_freeze_exit_o,
  output logic        rsp_bypass_o      // the state came from the bypass
);

  // ---------------- reset sweep ----------------
  logic          init_q;
  logic [CW-1:0] init_idx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q     <= 1'b1;
      init_idx_q <= '0;
    end else if (init_q) begin
      init_idx_q <= init_idx_q + CW'(1);
      if (init_idx_q == CW'(NUM_CONN - 1))
        init_q <= 1'b0;
    end
  end

  assign req_ready_o = !init_q;

  // ---------------- stage 1 registers ----------------
  logic          s1_valid_q;
  reps_op_e      s1_op_q;
  logic [CW-1:0] s1_conn_q;
  ev_t           s1_ev_q;
  logic          s1_ecn_q;
  logic          accept;

  assign accept = req_valid_i && req_ready_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid_q <= 1'b0;
      s1_op_q    <= OP_ACK;
      s1_conn_q  <= '0;
      s1_ev_q    <= '0;
      s1_ecn_q   <= 1'b0;
    end else begin
      s1_valid_q <= accept;
      if (accept) begin
        s1_op_q   <= req_op_i;
        s1_conn_q <= req_conn_i;
        s1_ev_q   <= req_ev_i;
        s1_ecn_q  <= req_ecn_i;
      end
    end
  end

  // ---------------- memories ----------------
  logic [EVBUF_W-1:0] ev_rdata;
  logic [CTRL_W-1:0]  ctrl_rdata;
  logic               wr_en;
  logic [CW-1:0]      wr_addr;
  reps_state_t        cur_state, nxt_state;

  assign wr_en   = init_q || s1_valid_q;
  assign wr_addr = init_q ? init_idx_q : s1_conn_q;

  reps_sram #(.DEPTH(NUM_CONN), .WIDTH(EVBUF_W)) u_ev_mem (
    .clk      (clk),
    .rd_en_i  (accept),
    .rd_addr_i(req_conn_i),
    .rd_data_o(ev_rdata),
    .wr_en_i  (wr_en),
    .wr_addr_i(wr_addr),
    .wr_data_i(init_q ? '0 : nxt_state.evs)
  );

  reps_sram #(.DEPTH(NUM_CONN), .WIDTH(CTRL_W)) u_ctrl_mem (
    .clk      (clk),
    .rd_en_i  (accept),
    .rd_addr_i(req_conn_i),
    .rd_data_o(ctrl_rdata),
    .wr_en_i  (wr_en),
    .wr_addr_i(wr_addr),
    .wr_data_i(init_q ? '0 : nxt_state.ctrl)
  );

  // ---------------- bypass ----------------
  logic          fwd_valid_q;
  logic [CW-1:0] fwd_conn_q;
  reps_state_t   fwd_state_q;
  logic          use_fwd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fwd_valid_q <= 1'b0;
      fwd_conn_q  <= '0;
      fwd_state_q <= '0;
    end else begin
      fwd_valid_q <= s1_valid_q;
      if (s1_valid_q) begin
        fwd_conn_q  <= s1_conn_q;
        fwd_state_q <= nxt_state;
      end
    end
  end

  assign use_fwd   = fwd_valid_q && (fwd_conn_q == s1_conn_q);
  assign cur_state = use_fwd ? fwd_state_q : reps_state_t'({ev_rdata, ctrl_rdata});

  // ---------------- shared REPS logic ----------------
  logic [31:0] rand_w;
  ev_t         core_ev;
  ev_src_e     core_src;
  logic        core_enter, core_exit;

  reps_core #(.EVS_SIZE(EVS_SIZE)) u_core (
    .state_i         (cur_state),
    .op_i            (s1_op_q),
    .ack_ev_i        (s1_ev_q),
    .ack_ecn_i       (s1_ecn_q),
    .now_i           (now_i),
    .rand_i          (rand_w),
    .cwnd_pkts_i     (cwnd_pkts_i),
    .freeze_timeout_i(freeze_timeout_i),
    .state_o         (nxt_state),
    .ev_o            (core_ev),
    .src_o           (core_src),
    .freeze_enter_o  (core_enter),
    .freeze_exit_o   (core_exit)
  );

  reps_lfsr u_lfsr (
    .clk   (clk),
    .rst_n (rst_n),
    .step_i(s1_valid_q && core_src == SRC_EXPLORE),
    .rand_o(rand_w)
  );

  assign rsp_valid_o        = s1_valid_q;
  assign rsp_op_o           = s1_op_q;
  assign rsp_conn_o         = s1_conn_q;
  assign rsp_ev_o           = core_ev;
  assign rsp_src_o          = core_src;
  assign rsp_freezing_o     = nxt_state.ctrl.freezing;
  assign rsp_freeze_enter_o = s1_valid_q && core_enter;
  assign rsp_freeze_exit_o  = s1_valid_q && core_exit;
  assign rsp_bypass_o       = s1_valid_q && use_fwd;

  // A request, once raised, must wait until it is accepted.
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      (req_valid_i && !req_ready_o) |=> req_valid_i;
  endproperty
  a_req_stable: assert property (p_req_stable);

endmodule
