// tb_diffenc: checks the differential encoder e(n) = d(n) ^ e(n-1), e(-1) = 0 per packet, last passing through, and bypass.
module tb_diffenc;
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
  logic en, clr;
  diffenc dut (.clk, .rst_n, .en, .clr, .s(s_if), .m(m_if));

  task automatic run(input int n, input bit ena, input int g, input int st);
    logic d [$];
    logic e;
    gap = g; stall = st; en = ena;
    u_sink.clear();
    for (int k = 0; k < n; k++) begin
      d.push_back(1'($urandom));
      u_src.push(word_t'(d[k]), k == n - 1);
    end
    wait_words(n);
    e = 1'b0;
    for (int k = 0; k < n; k++) begin
      e = ena ? (d[k] ^ e) : d[k];
      check(u_sink.dq[k] == word_t'(e), $sformatf("bit %0d", k));
      check(u_sink.lq[k] == (k == n - 1), $sformatf("last at %0d", k));
    end
  endtask

  initial begin
    en = 1'b1; clr = 1'b0;
    reset_dut();
    run(64, 1'b1, 0, 0);
    run(64, 1'b1, 30, 30);
    for (int k = 0; k < 12; k++) run(8, 1'b1, 10, 10);
    run(20, 1'b0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
