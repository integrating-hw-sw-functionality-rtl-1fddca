// tb_splitter: checks the splitter in nibble mode (low nibble first), bit
// mode (LSB first) and bypass, with random source gaps and sink stalls, the
// position of last, and that with no stalls one symbol leaves per cycle.
module tb_splitter;
  import radio_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned gap = 0, stall = 0;
  logic en, bits_mode;

  axis_if s_if (.clk(clk), .rst_n(rst_n));
  axis_if m_if (.clk(clk), .rst_n(rst_n));
  tb_src  u_src  (.clk, .rst_n, .gap_pct(gap), .m(s_if));
  tb_sink u_sink (.clk, .rst_n, .stall_pct(stall), .s(m_if));
  splitter dut (.clk, .rst_n, .en, .bits_mode, .s(s_if), .m(m_if));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit bm, input bit ena, input int nbytes, input int g, input int st);
    logic [7:0] b [$];
    int nsym, n;
    gap = g; stall = st; en = ena; bits_mode = bm;
    u_sink.clear();
    for (int k = 0; k < nbytes; k++) begin
      b.push_back(8'($urandom));
      u_src.push(word_t'(b[k]), k == nbytes - 1);
    end
    nsym = !ena ? 1 : (bm ? 8 : 2);
    n = nbytes * nsym;
    wait (u_sink.dq.size() == n);
    repeat (5) @(posedge clk);
    check(u_sink.dq.size() == n, $sformatf("count %0d exp %0d", u_sink.dq.size(), n));
    for (int k = 0; k < n; k++) begin
      word_t e;
      logic [7:0] by;
      by = b[k / nsym];
      if (!ena)    e = word_t'(by);
      else if (bm) e = word_t'(by[k % 8]);
      else         e = word_t'((k % 2) ? by[7:4] : by[3:0]);
      check(u_sink.dq[k] == e, $sformatf("sym %0d got %h exp %h", k, u_sink.dq[k], e));
      check(u_sink.lq[k] == (k == n - 1), $sformatf("last at %0d", k));
    end
    if (g == 0 && st == 0)
      check(u_sink.tq[n-1] - u_sink.tq[0] == n - 1,
            $sformatf("rate: %0d symbols over %0d cycles", n, u_sink.tq[n-1] - u_sink.tq[0] + 1));
  endtask

  initial begin
    en = 1'b1; bits_mode = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    run(1'b0, 1'b1, 16, 0, 0);
    run(1'b1, 1'b1, 16, 0, 0);
    run(1'b0, 1'b1, 20, 30, 30);
    run(1'b1, 1'b1, 20, 30, 40);
    run(1'b0, 1'b0, 10, 20, 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
