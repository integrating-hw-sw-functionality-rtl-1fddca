// tb_pn9: checks PN9 whitening against the sequence b(n+9) = b(n) ^ b(n+5) from an all-ones seed (first bytes 0xFF 0xE1 as in IEEE 802.15.4), its restart after last and on clr, data XOR, and bypass.
module tb_pn9;
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
  logic [8:0] seed;
  pn9 dut (.clk, .rst_n, .en, .clr, .seed, .s(s_if), .m(m_if));

  logic ref_bits [512];

  task automatic run(input int n, input bit ena, input int g, input int st);
    logic d [$];
    gap = g; stall = st; en = ena;
    u_sink.clear();
    for (int k = 0; k < n; k++) begin
      d.push_back(1'($urandom));
      u_src.push(word_t'(d[k]), k == n - 1);
    end
    wait_words(n);
    for (int k = 0; k < n && k < u_sink.dq.size(); k++) begin
      logic e;
      e = ena ? d[k] ^ ref_bits[k] : d[k];
      check(u_sink.dq[k] == word_t'(e), $sformatf("bit %0d got %0d exp %0d", k, u_sink.dq[k], e));
      check(u_sink.lq[k] == (k == n - 1), $sformatf("last at %0d", k));
    end
  endtask

  initial begin
    logic [15:0] first16;
    for (int k = 0; k < 9; k++) ref_bits[k] = 1'b1;
    for (int k = 0; k + 9 < 512; k++) ref_bits[k+9] = ref_bits[k] ^ ref_bits[k+5];
    for (int k = 0; k < 16; k++) first16[k] = ref_bits[k];
    check(first16 == 16'hE1FF, "reference PN9 starts 0xFF 0xE1");
    en = 1'b1; clr = 1'b0; seed = 9'h1FF;
    reset_dut();
    // all-zero data shows the raw sequence
    u_sink.clear();
    for (int k = 0; k < 16; k++) u_src.push('0, k == 15);
    wait_words(16);
    for (int k = 0; k < 16; k++) begin
      check(u_sink.dq[k][0] == first16[k], $sformatf("raw PN9 bit %0d", k));
    end
    run(100, 1'b1, 0, 0);
    run(300, 1'b1, 30, 30);
    run(50, 1'b0, 10, 10);
    // clr reloads the seed mid-packet
    en = 1'b1; gap = 0; stall = 0;
    u_sink.clear();
    for (int k = 0; k < 5; k++) u_src.push('0, 1'b0);
    wait_words(5);
    @(negedge clk); clr = 1'b1; @(negedge clk); clr = 1'b0;
    u_sink.clear();
    for (int k = 0; k < 12; k++) u_src.push('0, k == 11);
    wait_words(12);
    for (int k = 0; k < 12; k++) check(u_sink.dq[k][0] == ref_bits[k], $sformatf("after clr bit %0d", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
