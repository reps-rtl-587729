// tb_reps_engine: the multi-connection engine at its default size (256
// connections) against one reference model per connection.
// Checks: req_ready stays low for exactly NUM_CONN cycles after reset (state
// sweep); with a request every cycle, a response comes every cycle, one cycle
// after acceptance; EV source and EV of every send; freezing flag and freeze
// events; random EVs inside the EVS. Requests are drawn from a few connections
// so that back-to-back requests to the same connection use the bypass, and
// from all 256 to exercise the memory. Gaps in the request stream are random.
module tb_reps_engine;
  import reps_pkg::*;
  import reps_ref_pkg::*;

  localparam int NC  = 256;
  localparam int EVS = 65536;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_ecn;
  reps_op_e req_op;
  logic [7:0] req_conn;
  ev_t req_ev;
  time_t now;
  cnt_t cwnd;
  time_t fto;
  logic rsp_valid, rsp_frz, rsp_en, rsp_ex, rsp_byp;
  reps_op_e rsp_op;
  logic [7:0] rsp_conn;
  ev_t rsp_ev;
  ev_src_e rsp_src;

  reps_engine dut (
    .clk(clk), .rst_n(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .req_op_i(req_op), .req_conn_i(req_conn), .req_ev_i(req_ev), .req_ecn_i(req_ecn),
    .now_i(now), .cwnd_pkts_i(cwnd), .freeze_timeout_i(fto),
    .rsp_valid_o(rsp_valid), .rsp_op_o(rsp_op), .rsp_conn_o(rsp_conn), .rsp_ev_o(rsp_ev),
    .rsp_src_o(rsp_src), .rsp_freezing_o(rsp_frz), .rsp_freeze_enter_o(rsp_en),
    .rsp_freeze_exit_o(rsp_ex), .rsp_bypass_o(rsp_byp));

  always #5 clk = ~clk;

  reps_ref m[NC];
  int checks = 0, failures = 0;
  int n_byp = 0, n_expl = 0, n_reuse = 0, n_frozen = 0, n_en = 0, n_ex = 0;

  // expected response of the request accepted in the previous cycle
  bit       pend;
  reps_op_e p_op;
  int       p_conn, p_ev;
  bit       p_ecn;
  int unsigned p_now;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) now <= rst_n ? now + 1 : 0;

  initial begin
    int init_cycles;
    for (int i = 0; i < NC; i++) m[i] = new();
    req_valid = 0; req_op = OP_ACK; req_conn = 0; req_ev = 0; req_ecn = 0;
    cwnd = 12; fto = 300; pend = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    init_cycles = 0;
    while (!req_ready) begin @(posedge clk); #1; init_cycles++; end
    chk(init_cycles == NC, "reset sweep length");
    for (int it = 0; it < 60000; it++) begin
      // drive a new request (or a gap) for this cycle, clear of the edge
      #1;
      req_valid = ($urandom_range(0, 9) != 0);
      begin
        int r;
        r = $urandom_range(0, 99);
        req_op  = (r < 45) ? OP_ACK : (r < 95) ? OP_SEND : (r < 99) ? OP_FAIL : OP_CLEAR;
      end
      req_conn = ($urandom_range(0, 3) == 0) ? 8'($urandom_range(0, NC-1)) : 8'($urandom_range(0, 2));
      req_ev   = ev_t'($urandom);
      req_ecn  = ($urandom_range(0, 3) == 0);
      #1;
      // check the response to last cycle's request
      chk(rsp_valid == pend, "response every accepted cycle");
      if (pend && rsp_valid) begin
        ev_src_e es; int ee; bit een, eex;
        m[p_conn].step(p_op, p_ev, p_ecn, p_now, int'(cwnd), fto, es, ee, een, eex);
        chk(rsp_op == p_op && int'(rsp_conn) == p_conn, "response op/conn");
        chk(rsp_src == es, "source");
        if (ee >= 0 && es != SRC_NONE) chk(int'(rsp_ev) == ee, "ev");
        if (es == SRC_EXPLORE) chk(int'(rsp_ev) < EVS, "ev in EVS");
        chk(rsp_en == een && rsp_ex == eex, "freeze events");
        chk(rsp_frz == m[p_conn].frz, "freezing flag");
        if (rsp_byp) n_byp++;
        if (rsp_src == SRC_EXPLORE) n_expl++;
        if (rsp_src == SRC_REUSE) n_reuse++;
        if (rsp_src == SRC_FROZEN) n_frozen++;
        if (rsp_en) n_en++;
        if (rsp_ex) n_ex++;
      end
      chk(req_ready, "always ready after sweep");
      pend = req_valid && req_ready;
      p_op = req_op; p_conn = int'(req_conn); p_ev = int'(req_ev); p_ecn = req_ecn; p_now = now;
      @(posedge clk);
    end
    chk(n_byp > 0 && n_expl > 0 && n_reuse > 0 && n_frozen > 0 && n_en > 0 && n_ex > 0, "all mechanisms");
    $display("bypass=%0d explore=%0d reuse=%0d frozen=%0d enter=%0d exit=%0d",
             n_byp, n_expl, n_reuse, n_frozen, n_en, n_ex);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
