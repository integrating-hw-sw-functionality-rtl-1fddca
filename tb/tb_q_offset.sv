// tb_q_offset: checks the Q offset: I unchanged, Q delayed by N samples from zero at packet start, N flush samples after the last input with last on the final one, random stalls, and transparency for N = 0 and when disabled.
module tb_q_offset;
  import radio_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned gap = 0, stall = 0;

  axis_if s_if (.clk(clk), .rst_n(rst_n));
  axis_if m_if (.clk(clk), .rst_n(rst_n));
  tb_src  u_src  (.clk, .rst_n, .gap_pct(gap), .m(s_if));
  tb_sink u_sink (.clk, .rst_n, .stall_pct(stall), .s(m_if));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic reset_dut();
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
  endtask

  task automatic wait_words(input int n);
    int t;
    t = 0;
    while (u_sink.dq.size() < n && t < 5000) begin
      @(posedge clk);
      t++;
    end
    repeat (5) @(posedge clk);
    check(u_sink.dq.size() == n, $sformatf("word count %0d, expected %0d", u_sink.dq.size(), n));
  endtask
  logic en;
  logic [3:0] n;
  q_offset dut (.clk, .rst_n, .en, .n, .s(s_if), .m(m_if));

  task automatic run(input int cnt, input int nd, input bit ena, input int g, input int st);
    logic [15:0] i [$], q [$];
    int tot, dly;
    gap = g; stall = st; en = ena; n = 4'(nd);
    dly = ena ? nd : 0;
    u_sink.clear();
    for (int k = 0; k < cnt; k++) begin
      i.push_back(16'($urandom)); q.push_back(16'($urandom));
      u_src.push({i[k], q[k]}, k == cnt - 1);
    end
    tot = cnt + dly;
    wait_words(tot);
    for (int k = 0; k < tot && k < u_sink.dq.size(); k++) begin
      logic [15:0] ei, eq;
      ei = (k < cnt) ? i[k] : 16'd0;
      eq = (k - dly >= 0) ? q[k - dly] : 16'd0;
      check(u_sink.dq[k] == {ei, eq}, $sformatf("N=%0d word %0d got %h exp %h", nd, k, u_sink.dq[k], {ei, eq}));
      check(u_sink.lq[k] == (k == tot - 1), $sformatf("last at %0d", k));
    end
  endtask

  initial begin
    en = 1'b1; n = 4'd2;
    reset_dut();
    run(20, 2, 1'b1, 0, 0);
    run(20, 2, 1'b1, 0, 0);
    run(33, 5, 1'b1, 30, 30);
    run(10, 15, 1'b1, 10, 10);
    run(10, 0, 1'b1, 0, 0);
    run(10, 3, 1'b0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
