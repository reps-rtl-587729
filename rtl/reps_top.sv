// reps_top: sender-side REPS unit of a NIC, for NUM_CONN connections.
//
// REPS (Recycled Entropy Packet Spraying) sprays the packets of a connection
// over many network paths by writing an entropy value (EV) into each packet
// header; switches hash the EV to pick a path. EVs that come back in ACKs
// without an ECN mark are cached in a small circular buffer per connection and
// reused for later packets; when no good EV is cached, a random one explores a
// new path. A suspected link failure puts the connection in freezing mode, in
// which it only replays cached EVs until a timeout has passed.
//
// This unit joins:
//  - a free-running time base (now(), one tick per clock cycle - own choice);
//  - reps_fail_detect, which turns transport timeouts into failure events;
//  - a fixed-priority arbiter (own choice: failure, then ACK, then connection
//    open, then send) that feeds one event per cycle into
//  - reps_engine, which holds every connection's REPS state in memory and
//    runs the REPS logic on it.
// Each input channel uses valid/ready; a lower-priority channel stalls while a
// higher one is presenting. The EV for a send request appears on ev_valid_o
// one cycle after send_ready_o accepted it. Transport, congestion control
// and the receiver's EV echo are outside this unit: their signals are ports.
module reps_top
  import reps_pkg::*;
#(
  parameter int unsigned NUM_CONN = 256,
  parameter int unsigned EVS_SIZE = 65536,
  parameter int unsigned RTT_W    = 16,
  localparam int unsigned CW      = (NUM_CONN > 1) ? $clog2(NUM_CONN) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // run-time settings
  input  logic [CNT_W-1:0]  cwnd_pkts_i,       // NUM_PKTS_CWND from CC
  input  logic [TIME_W-1:0] freeze_timeout_i,  // FREEZING_TIMEOUT, cycles
  input  logic             trim_en_i,
  input  logic [RTT_W-1:0] rtt_thresh_i,
  input  logic [TIME_W-1:0] rtt_win_i,
  // ACKs from the receiver (EV echoed, ECN flag)
  input  logic             ack_valid_i,
  output logic             ack_ready_o,
  input  logic [CW-1:0]    ack_conn_i,
  input  logic [EV_W-1:0]  ack_ev_i,
  input  logic             ack_ecn_i,
  // opening a connection (clears its state)
  input  logic             open_valid_i,
  output logic             open_ready_o,
  input  logic [CW-1:0]    open_conn_i,
  // data packet about to be sent: request an EV
  input  logic             send_valid_i,
  output logic             send_ready_o,
  input  logic [CW-1:0]    send_conn_i,
  // transport loss timeouts and RTT samples
  input  logic             timeout_valid_i,
  output logic             timeout_ready_o,
  input  logic [CW-1:0]    timeout_conn_i,
  input  logic             rtt_valid_i,
  input  logic [RTT_W-1:0] rtt_i,
  // EV for the data packet
  output logic             ev_valid_o,
  output logic [CW-1:0]    ev_conn_o,
  output logic [EV_W-1:0]  ev_o,
  output logic [1:0]       ev_src_o,          // ev_src_e encoding
  // events
  output logic             freeze_enter_o,
  output logic             freeze_exit_o,
  output logic             cong_timeout_o,
  output logic             freezing_o,        // connection of ev_conn_o is freezing
  output logic             bypass_o,          // engine used its bypass this cycle
  output logic [TIME_W-1:0] now_o
);

  time_t now_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now_q <= '0;
    else        now_q <= now_q + time_t'(1);
  end
  assign now_o = now_q;

  logic          fail_valid, fail_ready;
  logic [CW-1:0] fail_conn;

  reps_fail_detect #(.NUM_CONN(NUM_CONN), .RTT_W(RTT_W)) u_fail (
    .clk            (clk),
    .rst_n          (rst_n),
    .trim_en_i      (trim_en_i),
    .rtt_thresh_i   (rtt_thresh_i),
    .win_len_i      (rtt_win_i),
    .rtt_valid_i    (rtt_valid_i),
    .rtt_i          (rtt_i),
    .timeout_valid_i(timeout_valid_i),
    .timeout_ready_o(timeout_ready_o),
    .timeout_conn_i (timeout_conn_i),
    .fail_valid_o   (fail_valid),
    .fail_ready_i   (fail_ready),
    .fail_conn_o    (fail_conn),
    .cong_o         (cong_timeout_o)
  );

  // ---------------- arbiter ----------------
  logic          eng_valid, eng_ready;
  reps_op_e      eng_op;
  logic [CW-1:0] eng_conn;

  always_comb begin
    eng_valid = 1'b1;
    eng_op    = OP_SEND;
    eng_conn  = send_conn_i;
    if (fail_valid) begin
      eng_op = OP_FAIL;  eng_conn = fail_conn;
    end else if (ack_valid_i) begin
      eng_op = OP_ACK;   eng_conn = ack_conn_i;
    end else if (open_valid_i) begin
      eng_op = OP_CLEAR; eng_conn = open_conn_i;
    end else if (!send_valid_i) begin
      eng_valid = 1'b0;
    end
  end

  assign fail_ready   = eng_ready;
  assign ack_ready_o  = eng_ready && !fail_valid;
  assign open_ready_o = eng_ready && !fail_valid && !ack_valid_i;
  assign send_ready_o = eng_ready && !fail_valid && !ack_valid_i && !open_valid_i;

  // ---------------- engine ----------------
  reps_op_e rsp_op;
  ev_src_e  rsp_src;
  logic     rsp_valid;

  reps_engine #(.NUM_CONN(NUM_CONN), .EVS_SIZE(EVS_SIZE)) u_engine (
    .clk               (clk),
    .rst_n             (rst_n),
    .req_valid_i       (eng_valid),
    .req_ready_o       (eng_ready),
    .req_op_i          (eng_op),
    .req_conn_i        (eng_conn),
    .req_ev_i          (ack_ev_i),
    .req_ecn_i         (ack_ecn_i),
    .now_i             (now_q),
    .cwnd_pkts_i       (cwnd_pkts_i),
    .freeze_timeout_i  (freeze_timeout_i),
    .rsp_valid_o       (rsp_valid),
    .rsp_op_o          (rsp_op),
    .rsp_conn_o        (ev_conn_o),
    .rsp_ev_o          (ev_o),
    .rsp_src_o         (rsp_src),
    .rsp_freezing_o    (freezing_o),
    .rsp_freeze_enter_o(freeze_enter_o),
    .rsp_freeze_exit_o (freeze_exit_o),
    .rsp_bypass_o      (bypass_o)
  );

  assign ev_valid_o = rsp_valid && rsp_op == OP_SEND;
  assign ev_src_o   = rsp_src;

endmodule
