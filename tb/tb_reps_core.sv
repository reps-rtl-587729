// tb_reps_core: random operation sequences on reps_core, checked against a
// reference model of the REPS procedures written with plain integers.
// The testbench keeps the state register itself (reps_core has no clock).
// Checks per operation: EV source, EV (except random draws, which only have to
// lie in the EVS), and every state field. Also checks the figure-1 style
// sequence: empty buffer explores, ECN ACKs are dropped, clean ACKs are reused.
module tb_reps_core;
  import reps_pkg::*;

  localparam int EVS = 65536;
  localparam int B   = BUF_SIZE;

  reps_state_t st, nx;
  reps_op_e    op;
  ev_t         aev, ev;
  logic        aecn;
  time_t       now;
  logic [31:0] rnd;
  cnt_t        cwnd;
  time_t       fto;
  ev_src_e     src;
  logic        fen, fex;

  reps_core #(.EVS_SIZE(EVS)) dut (
    .state_i(st), .op_i(op), .ack_ev_i(aev), .ack_ecn_i(aecn), .now_i(now),
    .rand_i(rnd), .cwnd_pkts_i(cwnd), .freeze_timeout_i(fto),
    .state_o(nx), .ev_o(ev), .src_o(src), .freeze_enter_o(fen), .freeze_exit_o(fex));

  // ---------------- reference model ----------------
  int  m_ev[B];
  bit  m_val[B];
  int  m_head, m_nv, m_expl, m_exit;
  bit  m_frz, m_filled;

  int  checks = 0, failures = 0;
  int  n_explore = 0, n_reuse = 0, n_frozen = 0, n_enter = 0, n_exit = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at now=%0d", what, now);
    end
  endtask

  task automatic model_reset();
    for (int i = 0; i < B; i++) begin m_ev[i] = 0; m_val[i] = 0; end
    m_head = 0; m_nv = 0; m_expl = 0; m_exit = 0; m_frz = 0; m_filled = 0;
  endtask

  // returns expected source and EV (-1 = random)
  task automatic model_step(output ev_src_e esrc, output int eev, output bit een, output bit eex);
    esrc = SRC_NONE; eev = 0; een = 0; eex = 0;
    case (op)
      OP_ACK: if (!aecn) begin
        if (!m_val[m_head]) m_nv++;
        m_ev[m_head] = aev; m_val[m_head] = 1; m_head = (m_head + 1) % B; m_filled = 1;
        if (m_frz && int'(now - time_t'(m_exit)) > 0) begin
          m_frz = 0; m_expl = cwnd; eex = 1;
        end
      end
      OP_FAIL: if (!m_frz && m_expl == 0) begin
        m_frz = 1; m_exit = int'(now + fto); een = 1;
      end
      OP_SEND: begin
        bit done = 0;
        if (m_expl > 0) begin
          m_expl--;
          if (m_expl % B == 0) begin esrc = SRC_EXPLORE; eev = -1; done = 1; end
        end
        if (!done) begin
          if (!m_filled || (m_nv == 0 && !m_frz)) begin esrc = SRC_EXPLORE; eev = -1; end
          else if (m_nv > 0) begin
            int off = (m_head - m_nv + B) % B;
            m_val[off] = 0; m_nv--; esrc = SRC_REUSE; eev = m_ev[off];
          end else begin
            esrc = SRC_FROZEN; eev = m_ev[m_head]; m_head = (m_head + 1) % B;
          end
        end
      end
      OP_CLEAR: model_reset();
      default: ;
    endcase
  endtask

  task automatic compare_state();
    bit ok = 1;
    for (int i = 0; i < B; i++) begin
      if (nx.ctrl.valid[i] != m_val[i]) ok = 0;
      if (m_val[i] && nx.evs[i] != ev_t'(m_ev[i])) ok = 0;
    end
    chk(ok, "buffer");
    chk(nx.ctrl.head == cnt_t'(m_head), "head");
    chk(nx.ctrl.num_valid == cnt_t'(m_nv), "num_valid");
    chk(nx.ctrl.explore == cnt_t'(m_expl), "explore");
    chk(nx.ctrl.freezing == m_frz, "freezing");
    if (m_frz) chk(nx.ctrl.exit_time == time_t'(m_exit), "exit_time");
  endtask

  task automatic do_op(reps_op_e o, int e = 0, bit ecn = 0);
    ev_src_e esrc; int eev; bit een, eex;
    op = o; aev = ev_t'(e); aecn = ecn; rnd = $urandom;
    #1;
    model_step(esrc, eev, een, eex);
    chk(src == esrc, "source");
    if (eev >= 0 && esrc != SRC_NONE) chk(ev == ev_t'(eev), "ev");
    if (esrc == SRC_EXPLORE) chk(32'(ev) == rnd % EVS, "random ev mod EVS");
    chk(fen == een && fex == eex, "freeze events");
    compare_state();
    if (src == SRC_EXPLORE) n_explore++;
    if (src == SRC_REUSE)   n_reuse++;
    if (src == SRC_FROZEN)  n_frozen++;
    if (fen) n_enter++;
    if (fex) n_exit++;
    st = nx;
    now = now + time_t'($urandom_range(1, 20));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    st = '0; model_reset(); now = 100; cwnd = 20; fto = 200;
    // Figure 1 sequence: two explores, ECN ACKs dropped, clean ACKs 55, 11 reused.
    do_op(OP_SEND); chk(src == SRC_EXPLORE, "fig1 explore 1");
    do_op(OP_SEND); chk(src == SRC_EXPLORE, "fig1 explore 2");
    do_op(OP_ACK, 4, 1);
    do_op(OP_ACK, 55, 0);
    do_op(OP_SEND); chk(ev == 16'd55 && src == SRC_REUSE, "fig1 reuse 55");
    do_op(OP_ACK, 99, 1);
    do_op(OP_ACK, 11, 0);
    do_op(OP_SEND); chk(ev == 16'd11 && src == SRC_REUSE, "fig1 reuse 11");
    chk(st.ctrl.num_valid == 0 && !st.ctrl.freezing, "fig1 end: 0 valid, not freezing");
    // Freezing: replay of invalid entries.
    do_op(OP_FAIL); chk(st.ctrl.freezing, "freeze on failure");
    do_op(OP_SEND); chk(src == SRC_FROZEN, "frozen replay");
    // Random sequences
    for (int it = 0; it < 20000; it++) begin
      int r;
      r = $urandom_range(0, 99);
      if (r < 45)      do_op(OP_ACK, int'($urandom_range(0, 65535)), $urandom_range(0, 3) == 0);
      else if (r < 93) do_op(OP_SEND);
      else if (r < 99) do_op(OP_FAIL);
      else             do_op(OP_CLEAR);
    end
    chk(n_explore > 0 && n_reuse > 0 && n_frozen > 0 && n_enter > 0 && n_exit > 0, "all paths seen");
    $display("checks=%0d explore=%0d reuse=%0d frozen=%0d enter=%0d exit=%0d", checks, n_explore, n_reuse, n_frozen, n_enter, n_exit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
