// tb_reps_switch_workload: single-switch workloads run through the REPS unit
// at its default size, each next to a reference run of oblivious packet
// spraying (random EV per packet) with the same arrivals.
//
// Model: NSEND connections (one per sender) feed one switch with NPORT
// uplinks. Time advances in slots of SLOT clock cycles; in each slot every
// uplink forwards one queued packet (a slow uplink only every second slot).
// A packet's uplink is a hash of its EV and connection; it is ECN-marked when
// it finds more than KMIN packets queued. Its ACK, with the EV echoed, comes
// back ACK_DELAY slots after it leaves the queue.
// Workloads (after the two microscopic cases of the REPS evaluation):
//   symmetric : 8 equal uplinks, 8 packets offered per slot (full load);
//   asymmetric: one uplink at half speed, 7 packets per slot.
// Checks, in the second half of each run: the slow uplink gets less than its
// 1/8 share under REPS (it gets about 1/8 under spraying), and the largest
// queue under REPS is no larger than under spraying. Every EV the unit
// returns must arrive one cycle after its request.
module tb_reps_switch_workload;
  import reps_pkg::*;

  localparam int NPORT = 8, NSEND = 8, SLOT = 24, KMIN = 4, ACK_DELAY = 3;
  localparam int NSLOT = 1200;

  logic clk = 0, rst_n = 0;
  logic ack_v, ack_r, ack_ecn, send_v, send_r, ev_v, fen, fex, cong, frz, byp, open_r, to_r;
  logic [7:0] ack_c, send_c, ev_c;
  logic [15:0] ack_ev, ev;
  logic [1:0] src;
  logic [31:0] now;

  reps_top dut (
    .clk(clk), .rst_n(rst_n),
    .cwnd_pkts_i(8'd16), .freeze_timeout_i(32'd2000), .trim_en_i(1'b0),
    .rtt_thresh_i(16'd100), .rtt_win_i(32'd500),
    .ack_valid_i(ack_v), .ack_ready_o(ack_r), .ack_conn_i(ack_c), .ack_ev_i(ack_ev), .ack_ecn_i(ack_ecn),
    .open_valid_i(1'b0), .open_ready_o(open_r), .open_conn_i(8'd0),
    .send_valid_i(send_v), .send_ready_o(send_r), .send_conn_i(send_c),
    .timeout_valid_i(1'b0), .timeout_ready_o(to_r), .timeout_conn_i(8'd0),
    .rtt_valid_i(1'b0), .rtt_i(16'd0),
    .ev_valid_o(ev_v), .ev_conn_o(ev_c), .ev_o(ev), .ev_src_o(src),
    .freeze_enter_o(fen), .freeze_exit_o(fex), .cong_timeout_o(cong),
    .freezing_o(frz), .bypass_o(byp), .now_o(now));

  always #5 clk = ~clk;

  typedef struct { int conn; int ev; bit ecn; } pkt_t;
  typedef struct { int due; int conn; int ev; bit ecn; } ack_t;
  pkt_t q_reps[NPORT][$];
  pkt_t q_ops[NPORT][$];
  ack_t acks[$];
  int send_fifo[$];
  int checks = 0, failures = 0;

  function automatic int port_of(int e, int c);
    int unsigned h = (e * 32'h9E37_79B1) ^ (c * 32'h85EB_CA6B);
    h = h ^ (h >> 15);
    return int'(h % NPORT);
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2 * 2 * NSLOT * SLOT + 2000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit asym, int offered, int base_conn);
    int slow_reps = 0, slow_ops = 0, tot_reps = 0, tot_ops = 0, maxq_reps = 0, maxq_ops = 0;
    int n_reuse = 0, n_expl = 0, marked = 0;
    bit s_pend; int s_conn;
    for (int p = 0; p < NPORT; p++) begin q_reps[p].delete(); q_ops[p].delete(); end
    acks.delete(); send_fifo.delete();
    s_pend = 0; s_conn = 0;
    for (int slot = 0; slot < NSLOT; slot++) begin
      bit late = slot >= NSLOT / 2;
      // offered packets of this slot, round robin over the senders
      for (int k = 0; k < offered; k++) begin
        int c = base_conn + (slot * offered + k) % NSEND;
        int e, pt;
        send_fifo.push_back(c);
        // oblivious spraying reference: random EV per packet
        e = int'($urandom_range(0, 65535));
        pt = port_of(e, c);
        q_ops[pt].push_back('{c, e, 0});
        if (late) begin tot_ops++; if (asym && pt == 0) slow_ops++; end
      end
      // the slot's clock cycles: ACKs first, then sends
      for (int cy = 0; cy < SLOT; cy++) begin
        #1;
        ack_v = acks.size() > 0 && acks[0].due <= slot;
        if (ack_v) begin ack_c = 8'(acks[0].conn); ack_ev = 16'(acks[0].ev); ack_ecn = acks[0].ecn; end
        send_v = send_fifo.size() > 0;
        if (send_v) send_c = 8'(send_fifo[0]);
        #1;
        chk(ev_v == s_pend && (!s_pend || int'(ev_c) == s_conn), "EV one cycle after send");
        if (ev_v) begin
          int pt;
          pt = port_of(int'(ev), int'(ev_c));
          q_reps[pt].push_back('{int'(ev_c), int'(ev), q_reps[pt].size() > KMIN});
          if (q_reps[pt].size() > KMIN + 1) marked++;
          if (late) begin
            tot_reps++;
            if (asym && pt == 0) slow_reps++;
            if (src == 2'(SRC_REUSE)) n_reuse++;
            if (src == 2'(SRC_EXPLORE)) n_expl++;
          end
        end
        s_pend = send_v && send_r;
        s_conn = send_v ? send_fifo[0] : 0;
        @(posedge clk);
        if (ack_v && ack_r) void'(acks.pop_front());
        if (s_pend) void'(send_fifo.pop_front());
      end
      // uplinks forward one packet per slot (port 0 every other slot if slow)
      for (int p = 0; p < NPORT; p++) begin
        if (late) begin
          if (q_reps[p].size() > maxq_reps) maxq_reps = q_reps[p].size();
          if (q_ops[p].size() > maxq_ops) maxq_ops = q_ops[p].size();
        end
        if (asym && p == 0 && slot % 2 == 1) continue;
        if (q_reps[p].size() > 0) begin
          pkt_t k = q_reps[p].pop_front();
          acks.push_back('{slot + ACK_DELAY, k.conn, k.ev, k.ecn});
        end
        if (q_ops[p].size() > 0) void'(q_ops[p].pop_front());
      end
    end
    $display("%s: REPS slow-port share %0d/%0d, spraying %0d/%0d; max queue REPS %0d, spraying %0d; reuse %0d explore %0d",
             asym ? "asymmetric" : "symmetric", slow_reps, tot_reps, slow_ops, tot_ops,
             maxq_reps, maxq_ops, n_reuse, n_expl);
    chk(tot_reps > NSLOT / 2 * offered * 9 / 10, "REPS keeps up with the offered load");
    chk(maxq_reps <= maxq_ops, "REPS queues no larger than spraying");
    if (asym) chk(slow_reps * NPORT < tot_reps, "slow uplink below its 1/8 share under REPS");
  endtask

  initial begin
    ack_v = 0; send_v = 0; ack_c = 0; ack_ev = 0; ack_ecn = 0; send_c = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    repeat (300) @(posedge clk);
    run(0, 8, 0);    // symmetric, full load, connections 0-7
    run(1, 7, 16);   // asymmetric, connections 16-23 (fresh state)
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
