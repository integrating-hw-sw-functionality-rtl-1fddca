// tb_clock_seq: checks the Clock (GFSK sequence) block: sps phase indices per bit, stepping up for a 1 and down for a 0 modulo 16, phase carried between bits and restarted per packet, one output per cycle, and bypass.
module tb_clock_seq;
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
  logic [2:0] sps;
  logic [3:0] step;
  clock_seq dut (.clk, .rst_n, .en, .clr, .sps, .step, .s(s_if), .m(m_if));

  task automatic run(input int n, input int ns, input int stp, input bit ena, input int g, input int st);
    logic d [$];
    int ph, nout, k2;
    gap = g; stall = st; en = ena; sps = 3'(ns); step = 4'(stp);
    u_sink.clear();
    for (int k = 0; k < n; k++) begin
      d.push_back(1'($urandom));
      u_src.push(word_t'(d[k]), k == n - 1);
    end
    nout = ena ? n * ns : n;
    wait_words(nout);
    ph = 0; k2 = 0;
    for (int k = 0; k < n; k++) begin
      if (!ena) begin
        check(u_sink.dq[k] == word_t'(d[k]), "bypass");
      end else begin
        for (int j = 0; j < ns; j++) begin
          ph = d[k] ? (ph + stp) % 16 : (ph - stp + 16) % 16;
          check(u_sink.dq[k2] == word_t'(ph), $sformatf("out %0d got %0d exp %0d", k2, u_sink.dq[k2], ph));
          check(u_sink.lq[k2] == (k2 == nout - 1), $sformatf("last at %0d", k2));
          k2++;
        end
      end
    end
    if (ena && g == 0 && st == 0)
      check(u_sink.tq[nout-1] - u_sink.tq[0] == nout - 1, "one output per cycle");
  endtask

  initial begin
    en = 1'b1; clr = 1'b0; sps = 3'd4; step = 4'd1;
    reset_dut();
    run(20, 4, 1, 1'b1, 0, 0);
    run(30, 4, 1, 1'b1, 30, 30);
    run(25, 3, 2, 1'b1, 20, 40);
    run(10, 4, 1, 1'b0, 10, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
