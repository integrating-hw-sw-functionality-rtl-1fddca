// tb_iq_mapper: checks the mapper's reset QPSK table (bit 0 to I, bit 1 to Q, +-23170), a reloaded table, last passing through, and bypass.
module tb_iq_mapper;
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
  logic en, tbl_we;
  logic [3:0] tbl_addr;
  logic [31:0] tbl_wdata;
  iq_mapper dut (.clk, .rst_n, .en, .tbl_we, .tbl_addr, .tbl_wdata, .s(s_if), .m(m_if));

  initial begin
    logic [31:0] tbl [16];
    int n;
    en = 1'b1; tbl_we = 1'b0; tbl_addr = '0; tbl_wdata = '0;
    reset_dut();
    gap = 20; stall = 20;
    u_sink.clear();
    for (int k = 0; k < 16; k++) u_src.push(word_t'(k % 4), k == 15);
    wait_words(16);
    for (int k = 0; k < 16; k++) begin
      logic signed [15:0] ei, eq;
      ei = (k % 2)       ? 16'sd23170 : -16'sd23170;
      eq = ((k / 2) % 2) ? 16'sd23170 : -16'sd23170;
      check(u_sink.dq[k] == {ei, eq}, $sformatf("QPSK %0d got %h", k, u_sink.dq[k]));
      check(u_sink.lq[k] == (k == 15), "last");
    end
    for (int k = 0; k < 16; k++) begin
      tbl[k] = $urandom;
      @(negedge clk); tbl_we = 1'b1; tbl_addr = 4'(k); tbl_wdata = tbl[k];
    end
    @(negedge clk); tbl_we = 1'b0;
    u_sink.clear();
    n = 40;
    begin
      int idx [$];
      for (int k = 0; k < n; k++) begin
        idx.push_back($urandom_range(15));
        u_src.push(word_t'(idx[k]), k == n - 1);
      end
      wait_words(n);
      for (int k = 0; k < n; k++) check(u_sink.dq[k] == tbl[idx[k]], $sformatf("table %0d", k));
    end
    en = 1'b0;
    u_sink.clear();
    for (int k = 0; k < 5; k++) u_src.push(word_t'(k + 100), k == 4);
    wait_words(5);
    for (int k = 0; k < 5; k++) check(u_sink.dq[k] == word_t'(k + 100), "bypass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
