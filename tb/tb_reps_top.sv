// tb_reps_top: end-to-end run of the REPS sender unit at its default size
// (256 connections, 65536-value EVS) against a small network model.
//
// The network has 8 paths; a packet's path is a hash of its EV and connection.
// ACKs return after an RTT with the EV echoed. The run has phases:
//   A  path 3 is congested: its ACKs carry ECN (moderate RTT);
//   B  path 5 fails as well: its packets are lost and time out while RTTs are
//      low, so the timeouts are judged failures and connections freeze;
//   C  path 5 is repaired; freezing ends on the first clean ACK after the
//      freezing timeout, and exploration resumes;
//   D  path 2 overflows: packets are lost after long RTTs, so its timeouts are
//      judged congestion and no connection freezes.
// Every engine operation is checked against the reference model of REPS (the
// engine request is observed inside the unit), every send gets its EV one
// cycle later, and the load-balancing effect is checked: in phase A less than
// half of a uniform share of the reused packets take the congested path; in
// phase B no packet explores a random path while its connection freezes, and
// less than half of a uniform share of frozen sends take the failed path.
// Each mechanism must occur at least once: explore, reuse, frozen replay,
// ECN discard, freeze entry and exit, failure and congestion verdicts, send
// stall behind ACKs, engine bypass, connection open.
module tb_reps_top;
  import reps_pkg::*;
  import reps_ref_pkg::*;

  localparam int NC = 256;
  localparam int NPATH = 8;
  localparam int NACT = 6;
  localparam int RTT_OK = 40, RTT_ECN = 60, RTT_DROP = 400, RTO = 300;
  localparam int PH_A = 6000, PH_B = 12000, PH_C = 18000, PH_D = 24000;

  logic clk = 0, rst_n = 0;
  logic ack_v, ack_r, ack_ecn, open_v, open_r, send_v, send_r, to_v, to_r, rtt_v;
  logic [7:0] ack_c, open_c, send_c, to_c, ev_c;
  logic [15:0] ack_ev, rtt, ev;
  logic ev_v, fen, fex, cong, frz, byp;
  logic [1:0] src;
  logic [31:0] now;

  reps_top dut (
    .clk(clk), .rst_n(rst_n),
    .cwnd_pkts_i(8'd16), .freeze_timeout_i(32'd1500), .trim_en_i(1'b0),
    .rtt_thresh_i(16'd150), .rtt_win_i(32'd400),
    .ack_valid_i(ack_v), .ack_ready_o(ack_r), .ack_conn_i(ack_c), .ack_ev_i(ack_ev), .ack_ecn_i(ack_ecn),
    .open_valid_i(open_v), .open_ready_o(open_r), .open_conn_i(open_c),
    .send_valid_i(send_v), .send_ready_o(send_r), .send_conn_i(send_c),
    .timeout_valid_i(to_v), .timeout_ready_o(to_r), .timeout_conn_i(to_c),
    .rtt_valid_i(rtt_v), .rtt_i(rtt),
    .ev_valid_o(ev_v), .ev_conn_o(ev_c), .ev_o(ev), .ev_src_o(src),
    .freeze_enter_o(fen), .freeze_exit_o(fex), .cong_timeout_o(cong),
    .freezing_o(frz), .bypass_o(byp), .now_o(now));

  always #5 clk = ~clk;

  typedef struct { int due; int conn; int ev; bit ecn; int rtt; } evt_t;
  evt_t acks[$], tos[$];

  reps_ref m[NC];
  int act[NACT] = '{0, 1, 77, 128, 200, 255};
  int checks = 0, failures = 0;
  int cyc = 0;
  int n_expl = 0, n_reuse = 0, n_frozen = 0, n_ecn = 0, n_en = 0, n_ex = 0, n_failv = 0,
      n_congv = 0, n_stall = 0, n_byp = 0, n_open = 0;
  int a_reuse = 0, a_reuse_cong = 0, b_frz_explore = 0, b_frz_sends = 0, b_frz_failed = 0;

  // engine request seen in the previous cycle
  bit p_v; reps_op_e p_op; int p_conn, p_ev; bit p_ecn; int unsigned p_now;
  bit s_pend; int s_conn;
  bit open_r_q;

  function automatic int path_of(int e, int c);
    int unsigned h = (e * 32'h9E37_79B1) ^ (c * 32'h85EB_CA6B);
    h = h ^ (h >> 15);
    return int'(h % NPATH);
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s cycle=%0d", what, cyc); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NC; i++) m[i] = new();
    ack_v = 0; open_v = 0; send_v = 0; to_v = 0; rtt_v = 0;
    ack_c = 0; ack_ev = 0; ack_ecn = 0; open_c = 0; send_c = 0; to_c = 0; rtt = 0;
    p_v = 0; s_pend = 0; open_r_q = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (cyc = 0; cyc < PH_D + 6000; cyc++) begin
      int ph;
      ph = (cyc < PH_A) ? 0 : (cyc < PH_B) ? 1 : (cyc < PH_C) ? 2 : (cyc < PH_D) ? 3 : 4;
      #1;
      // ---- drive channels ----
      ack_v = acks.size() > 0 && acks[0].due <= cyc;
      if (ack_v) begin ack_c = 8'(acks[0].conn); ack_ev = 16'(acks[0].ev); ack_ecn = acks[0].ecn; end
      to_v = tos.size() > 0 && tos[0].due <= cyc;
      if (to_v) to_c = 8'(tos[0].conn);
      if (cyc == PH_C + 3000) open_v = 1;
      else if (open_v && open_r_q) open_v = 0;
      open_c = 8'(act[1]);
      if (!send_v || s_pend)   // hold a waiting send
        begin send_v = ($urandom_range(0, 1) == 0); send_c = 8'(act[$urandom_range(0, NACT-1)]); end
      #1;
      // ---- check the response to last cycle's engine request ----
      if (p_v) begin
        ev_src_e es; int ee; bit een, eex;
        m[p_conn].step(p_op, p_ev, p_ecn, p_now, 16, 1500, es, ee, een, eex);
        chk(int'(ev_c) == p_conn, "response connection");
        chk(src == 2'(es), "ev source");
        if (ee >= 0 && es != SRC_NONE) chk(int'(ev) == ee, "ev value");
        chk(fen == een && fex == eex, "freeze events");
        if (fen) n_en++;
        if (fex) n_ex++;
        if (byp) n_byp++;
        if (p_op == OP_ACK && p_ecn) n_ecn++;
        if (p_op == OP_CLEAR) n_open++;
      end
      chk(ev_v == s_pend && (!s_pend || int'(ev_c) == s_conn), "ev one cycle after send");
      if (ev_v) begin
        int pth;
        pth = path_of(int'(ev), int'(ev_c));
        if (src == 2'(SRC_EXPLORE)) n_expl++;
        if (src == 2'(SRC_REUSE)) n_reuse++;
        if (src == 2'(SRC_FROZEN)) n_frozen++;
        if (ph == 0 && cyc > 3000 && src == 2'(SRC_REUSE)) begin
          a_reuse++; if (pth == 3) a_reuse_cong++;
        end
        if (ph == 1 && frz && src == 2'(SRC_EXPLORE)) b_frz_explore++;
        if (ph == 1 && frz) begin b_frz_sends++; if (pth == 5) b_frz_failed++; end
        if ((ph == 1 && pth == 5)) begin
          tos.push_back('{cyc + RTO, int'(ev_c), int'(ev), 0, 0});
        end else if (ph == 3 && pth == 2) begin
          tos.push_back('{cyc + RTO, int'(ev_c), int'(ev), 0, 0});
          acks.push_back('{cyc + RTT_OK, int'(ev_c), int'(ev), 1, RTT_DROP});  // a late, marked ACK of earlier data
        end else if (ph <= 1 && pth == 3) begin
          acks.push_back('{cyc + RTT_ECN, int'(ev_c), int'(ev), 1, RTT_ECN});
        end else begin
          acks.push_back('{cyc + RTT_OK + $urandom_range(0, 8), int'(ev_c), int'(ev), 0, RTT_OK});
        end
        acks.sort(x) with (x.due);
      end
      if (send_v && !send_r) n_stall++;
      if (cong) n_congv++;
      if (fen) n_failv++;
      // ---- record what is accepted at this edge ----
      p_v    = dut.u_engine.req_valid_i && dut.u_engine.req_ready_o;
      p_op   = dut.u_engine.req_op_i;
      p_conn = int'(dut.u_engine.req_conn_i);
      p_ev   = int'(dut.u_engine.req_ev_i);
      p_ecn  = dut.u_engine.req_ecn_i;
      p_now  = now;
      open_r_q = open_r;
      s_pend = send_v && send_r;
      s_conn = int'(send_c);
      rtt_v  = 0;
      @(posedge clk);
      if (ack_v && ack_r) begin
        rtt = 16'(acks[0].rtt);
        void'(acks.pop_front());
        rtt_v = 1;   // RTT sample of this ACK reaches the detector next cycle
      end
      if (to_v && to_r) void'(tos.pop_front());
    end
    chk(a_reuse > 100 && a_reuse_cong * NPATH * 2 < a_reuse, "reused EVs avoid the congested path");
    chk(b_frz_explore == 0, "no random exploration while freezing");
    chk(b_frz_sends > 50 && b_frz_failed * NPATH * 2 < b_frz_sends, "frozen connections avoid the failed path");
    chk(n_expl > 0, "explore happened");
    chk(n_reuse > 0, "reuse happened");
    chk(n_frozen > 0, "frozen replay happened");
    chk(n_ecn > 0, "ECN discard happened");
    chk(n_en > 0, "freeze entry happened");
    chk(n_ex > 0, "freeze exit happened");
    chk(n_congv > 0, "congestion verdict happened");
    chk(n_stall > 0, "send stall happened");
    chk(n_byp > 0, "bypass happened");
    chk(n_open > 0, "connection open happened");
    $display("explore=%0d reuse=%0d frozen=%0d ecn=%0d enter=%0d exit=%0d congv=%0d stall=%0d bypass=%0d open=%0d",
             n_expl, n_reuse, n_frozen, n_ecn, n_en, n_ex, n_congv, n_stall, n_byp, n_open);
    $display("phaseA reused=%0d on congested path=%0d; phaseB frozen sends=%0d on failed path=%0d, frozen explores=%0d",
             a_reuse, a_reuse_cong, b_frz_sends, b_frz_failed, b_frz_explore);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
