// tb_reps_fail_detect: drives RTT samples and timeouts and checks each verdict
// against a model of the two-epoch maximum-RTT window: without trimming a
// timeout is a failure when the window maximum is below the threshold,
// otherwise congestion; with trimming every timeout is a failure. Also checks
// the valid/ready hold of the failure output and the one-cycle verdict latency.
module tb_reps_fail_detect;
  import reps_pkg::*;
  logic clk = 0, rst_n = 0;
  logic trim_en;
  logic [15:0] thr, rtt;
  time_t win;
  logic rtt_v, to_v, to_r, f_v, f_r, cong;
  logic [7:0] to_c, f_c;
  int checks = 0, failures = 0, n_fail = 0, n_cong = 0, n_hold = 0;

  reps_fail_detect dut (
    .clk(clk), .rst_n(rst_n), .trim_en_i(trim_en), .rtt_thresh_i(thr), .win_len_i(win),
    .rtt_valid_i(rtt_v), .rtt_i(rtt), .timeout_valid_i(to_v), .timeout_ready_o(to_r),
    .timeout_conn_i(to_c), .fail_valid_o(f_v), .fail_ready_i(f_r), .fail_conn_o(f_c), .cong_o(cong));

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  // model
  int m_cnt, m_cur, m_prev;
  bit exp_v; int exp_c; bit exp_cong; bit m_fv; int m_fc;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trim_en = 0; thr = 1000; win = 50; rtt_v = 0; rtt = 0; to_v = 0; to_c = 0; f_r = 0;
    m_cnt = 0; m_cur = 0; m_prev = 0; m_fv = 0; m_fc = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 30000; it++) begin
      bit take, fire;
      int wmax;
      if (it == 15000) trim_en = 1;
      // phases of low and high RTT so both verdicts occur
      rtt_v = ($urandom_range(0, 2) == 0);
      rtt   = ((it / 700) % 2 == 0) ? 16'($urandom_range(100, 900)) : 16'($urandom_range(100, 3000));
      to_v  = ($urandom_range(0, 19) == 0);
      to_c  = 8'($urandom);
      f_r   = ($urandom_range(0, 2) != 0);
      #1;
      chk(to_r == !m_fv, "timeout_ready");
      chk(f_v == m_fv && (!m_fv || int'(f_c) == m_fc), "fail output held");
      // model of this clock edge
      wmax = (m_cur > m_prev) ? m_cur : m_prev;
      take = to_v && !m_fv;
      if (m_fv && !f_r) n_hold++;
      if (m_fv && f_r) m_fv = 0;
      exp_cong = 0;
      if (take) begin
        fire = trim_en || (wmax < int'(thr));
        if (fire) begin m_fv = 1; m_fc = int'(to_c); n_fail++; end
        else begin exp_cong = 1; n_cong++; end
      end
      if (m_cnt + 1 >= int'(win)) begin
        m_cnt = 0; m_prev = m_cur; m_cur = rtt_v ? int'(rtt) : 0;
      end else begin
        m_cnt++;
        if (rtt_v && int'(rtt) > m_cur) m_cur = int'(rtt);
      end
      @(posedge clk);
      #1;
      chk(cong == exp_cong, "congestion verdict");
      chk(f_v == m_fv, "failure verdict");
      #3;
    end
    chk(n_fail > 10 && n_cong > 10 && n_hold > 10, "both verdicts and hold seen");
    $display("fail=%0d cong=%0d hold=%0d", n_fail, n_cong, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
