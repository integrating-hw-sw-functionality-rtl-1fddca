// tb_fir_filter: checks the 41-tap filter against a direct convolution of the zero-stuffed input with random coefficients, for interpolation 1 and 4, random stalls, saturation, one output per cycle, the cleared delay line between packets, and bypass.
module tb_fir_filter;
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
  logic en, coef_we;
  logic [2:0] up;
  logic [5:0] coef_addr;
  logic [15:0] coef_wdata;
  fir_filter dut (.clk, .rst_n, .en, .up, .coef_we, .coef_addr, .coef_wdata, .s(s_if), .m(m_if));

  int c [41];

  function automatic logic signed [15:0] sat(input longint v);
    if (v > 32767)  return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return 16'(v);
  endfunction

  task automatic load_coefs(input int maxabs);
    for (int k = 0; k < 41; k++) begin
      c[k] = $urandom_range(2 * maxabs) - maxabs;
      @(negedge clk); coef_we = 1'b1; coef_addr = 6'(k); coef_wdata = 16'(c[k]);
    end
    @(negedge clk); coef_we = 1'b0;
  endtask

  task automatic run(input int n, input int L, input int amp, input int g, input int st);
    longint xi [$], xq [$];
    int nout;
    gap = g; stall = st; up = 3'(L);
    u_sink.clear();
    for (int k = 0; k < n; k++) begin
      int vi, vq;
      vi = $urandom_range(2 * amp) - amp;
      vq = $urandom_range(2 * amp) - amp;
      u_src.push({16'(vi), 16'(vq)}, k == n - 1);
      for (int j = 0; j < L; j++) begin
        xi.push_back(j == 0 ? vi : 0);
        xq.push_back(j == 0 ? vq : 0);
      end
    end
    nout = n * L;
    wait_words(nout);
    for (int t = 0; t < nout; t++) begin
      longint ai, aq;
      logic signed [15:0] ei, eq;
      ai = 0; aq = 0;
      for (int k = 0; k < 41; k++) if (t - k >= 0) begin
        ai += c[k] * xi[t-k];
        aq += c[k] * xq[t-k];
      end
      ei = sat((ai + 16384) >>> 15);
      eq = sat((aq + 16384) >>> 15);
      check(u_sink.dq[t] == {ei, eq}, $sformatf("L=%0d out %0d got %h exp %h", L, t, u_sink.dq[t], {ei, eq}));
      check(u_sink.lq[t] == (t == nout - 1), $sformatf("last at %0d", t));
    end
    if (g == 0 && st == 0)
      check(u_sink.tq[nout-1] - u_sink.tq[0] == nout - 1, "one output per cycle");
  endtask

  initial begin
    en = 1'b1; up = 3'd1; coef_we = 1'b0; coef_addr = '0; coef_wdata = '0;
    reset_dut();
    load_coefs(8000);
    run(60, 1, 20000, 0, 0);
    run(30, 4, 20000, 0, 0);
    run(40, 4, 30000, 30, 30);
    load_coefs(32000);                 // large gains exercise saturation
    run(50, 2, 32000, 10, 10);
    en = 1'b0;
    u_sink.clear();
    for (int k = 0; k < 5; k++) u_src.push(word_t'(k * 7), k == 4);
    wait_words(5);
    for (int k = 0; k < 5; k++) check(u_sink.dq[k] == word_t'(k * 7), "bypass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
