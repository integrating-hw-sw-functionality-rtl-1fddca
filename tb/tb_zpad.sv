// tb_zpad: checks zero insertion: N zero samples after every M-th sample, counting restarted per packet, none after the last sample, random stalls, and transparency for N = 0 and when disabled.
module tb_zpad;
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
  logic [7:0] n, m_len;
  zpad dut (.clk, .rst_n, .en, .n, .m_len, .s(s_if), .m(m_if));

  task automatic run(input int cnt, input int nz, input int mz, input bit ena, input int g, input int st);
    word_t d [$];
    word_t e [$];
    logic  el [$];
    gap = g; stall = st; en = ena; n = 8'(nz); m_len = 8'(mz);
    u_sink.clear();
    for (int k = 0; k < cnt; k++) begin
      d.push_back(word_t'($urandom) | 32'h1);
      u_src.push(d[k], k == cnt - 1);
      e.push_back(d[k]); el.push_back(k == cnt - 1);
      if (ena && nz != 0 && mz != 0 && (k + 1) % mz == 0 && k != cnt - 1)
        for (int z = 0; z < nz; z++) begin e.push_back('0); el.push_back(1'b0); end
    end
    wait_words(e.size());
    foreach (e[k]) if (k < u_sink.dq.size()) begin
      check(u_sink.dq[k] == e[k], $sformatf("word %0d got %h exp %h", k, u_sink.dq[k], e[k]));
      check(u_sink.lq[k] == el[k], $sformatf("last at %0d", k));
    end
  endtask

  initial begin
    en = 1'b1; n = '0; m_len = '0;
    reset_dut();
    run(20, 2, 3, 1'b1, 0, 0);
    run(21, 3, 4, 1'b1, 30, 30);
    run(12, 1, 1, 1'b1, 20, 20);
    run(10, 0, 3, 1'b1, 0, 0);
    run(10, 2, 3, 1'b0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
