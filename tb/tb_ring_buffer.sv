// tb_ring_buffer: checks the ring buffer (depth 16 here): first-in first-out order with random gaps and stalls across many pointer wraps, the level count, the count of packet ends held, and back-pressure exactly when full.
module tb_ring_buffer;
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
  logic [4:0] level, lasts_held;
  ring_buffer #(.DEPTH(16)) dut (.clk, .rst_n, .s(s_if), .m(m_if), .level, .lasts_held);

  initial begin
    word_t d [$];
    logic  l [$];
    int n;
    reset_dut();
    // fill with the sink stalled: exactly 16 words enter
    stall = 100;
    for (int k = 0; k < 20; k++) begin
      d.push_back($urandom); l.push_back(k == 4 || k == 11);
      u_src.push(d[k], l[k]);
    end
    repeat (60) @(posedge clk);
    check(level == 16, $sformatf("level %0d when full", level));
    check(!s_if.ready, "not ready when full");
    check(u_src.pending() == 4, $sformatf("pending %0d", u_src.pending()));
    check(lasts_held == 2, $sformatf("lasts held %0d", lasts_held));
    check(m_if.valid, "valid when not empty");
    // drain with random behaviour on both sides, many wraps
    stall = 40; gap = 40;
    for (int k = 20; k < 300; k++) begin
      d.push_back($urandom); l.push_back(($urandom_range(9) == 0) || k == 299);
      u_src.push(d[k], l[k]);
    end
    n = 300;
    wait_words(n);
    for (int k = 0; k < n && k < u_sink.dq.size(); k++) begin
      check(u_sink.dq[k] == d[k], $sformatf("order %0d", k));
      check(u_sink.lq[k] == l[k], $sformatf("last %0d", k));
    end
    check(level == 0 && lasts_held == 0 && !m_if.valid, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
