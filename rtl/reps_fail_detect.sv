// reps_fail_detect: decides whether a retransmission timeout means a failure.
//
// REPS enters freezing mode on a suspected network failure, detected through
// loss timeouts. Two ways of telling a failure loss from a congestion loss are
// described for REPS, and both are here, selected by trim_en_i:
//  - with packet trimming (trim_en_i = 1) congestion drops are reported by
//    trimmed packets, so a loss that ends in a timeout is taken as a failure;
//  - without trimming the largest RTT seen shortly before the timeout decides:
//    a high maximum RTT points at congestion, a low one at a failure.
// "Shortly before" is this design's own construction: time is cut into epochs
// of win_len_i cycles, the maximum RTT is kept for the running epoch and for
// the previous one, and the larger of the two is compared against
// rtt_thresh_i (failure if strictly below). The window is therefore between one
// and two epochs long. The RTT statistic is shared by all connections, which
// matches a NIC where one connection is active at a time.
// Interface: rtt samples (rtt_valid_i/rtt_i), timeout events with a
// valid/ready handshake (timeout_*), and failure events towards the REPS
// engine, also valid/ready (fail_*). A timeout is accepted when no failure is
// waiting; its verdict appears in the next cycle: fail_valid_o is held until
// fail_ready_o, or cong_o pulses for one cycle if it was congestion.
module reps_fail_detect
  import reps_pkg::*;
#(
  parameter int unsigned NUM_CONN = 256,
  parameter int unsigned RTT_W    = 16,
  localparam int unsigned CW      = (NUM_CONN > 1) ? $clog2(NUM_CONN) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // settings
  input  logic             trim_en_i,
  input  logic [RTT_W-1:0] rtt_thresh_i,
  input  time_t            win_len_i,
  // RTT samples from the transport
  input  logic             rtt_valid_i,
  input  logic [RTT_W-1:0] rtt_i,
  // timeouts from the transport
  input  logic             timeout_valid_i,
  output logic             timeout_ready_o,
  input  logic [CW-1:0]    timeout_conn_i,
  // classified failures towards the REPS engine
  output logic             fail_valid_o,
  input  logic             fail_ready_i,
  output logic [CW-1:0]    fail_conn_o,
  output logic             cong_o          // timeout judged as congestion
);

  time_t            epoch_cnt_q;
  logic [RTT_W-1:0] cur_max_q, prev_max_q, win_max;
  logic             epoch_end;
  logic             take;

  assign epoch_end = (epoch_cnt_q + time_t'(1)) >= win_len_i;
  assign win_max   = (cur_max_q > prev_max_q) ? cur_max_q : prev_max_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      epoch_cnt_q <= '0;
      cur_max_q   <= '0;
      prev_max_q  <= '0;
    end else if (epoch_end) begin
      epoch_cnt_q <= '0;
      prev_max_q  <= cur_max_q;
      cur_max_q   <= rtt_valid_i ? rtt_i : '0;
    end else begin
      epoch_cnt_q <= epoch_cnt_q + time_t'(1);
      if (rtt_valid_i && rtt_i > cur_max_q)
        cur_max_q <= rtt_i;
    end
  end

  assign timeout_ready_o = !fail_valid_o;
  assign take            = timeout_valid_i && timeout_ready_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fail_valid_o <= 1'b0;
      fail_conn_o  <= '0;
      cong_o       <= 1'b0;
    end else begin
      cong_o <= 1'b0;
      if (fail_valid_o && fail_ready_i)
        fail_valid_o <= 1'b0;
      if (take) begin
        if (trim_en_i || win_max < rtt_thresh_i) begin
          fail_valid_o <= 1'b1;
          fail_conn_o  <= timeout_conn_i;
        end else begin
          cong_o <= 1'b1;
        end
      end
    end
  end

endmodule
