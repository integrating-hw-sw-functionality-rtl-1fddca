// tb_pkt_buffer: checks the packet buffer: bytes written through the write port stream out in order with last on byte len-1, one per cycle without stalls, busy while streaming, a zero length sends nothing, and a second packet of another length.
module tb_pkt_buffer;
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
  logic wr_en, start, busy;
  logic [7:0] wr_addr, wr_data;
  logic [8:0] len;
  pkt_buffer #(.DEPTH(256)) dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .start, .len, .busy, .m(s_if));
  // the packet buffer is a source, so the sink listens on s_if; m_if is unused
  tb_sink u_sink2 (.clk, .rst_n, .stall_pct(stall), .s(s_if));
  assign m_if.valid = 1'b0;
  assign m_if.data  = '0;
  assign m_if.last  = 1'b0;

  logic [7:0] mem [256];

  task automatic send(input int n, input int st);
    int t;
    stall = st;
    u_sink2.clear();
    @(negedge clk); len = 9'(n); start = 1'b1;
    @(negedge clk); start = 1'b0;
    if (n > 0) check(busy, "busy after start");
    t = 0;
    while (u_sink2.dq.size() < n && t < 5000) begin @(posedge clk); t++; end
    repeat (5) @(posedge clk);
    check(u_sink2.dq.size() == n, $sformatf("count %0d exp %0d", u_sink2.dq.size(), n));
    check(!busy, "idle at end");
    for (int k = 0; k < n && k < u_sink2.dq.size(); k++) begin
      check(u_sink2.dq[k] == word_t'(mem[k]), $sformatf("byte %0d", k));
      check(u_sink2.lq[k] == (k == n - 1), $sformatf("last at %0d", k));
    end
    if (n > 1 && st == 0) check(u_sink2.tq[n-1] - u_sink2.tq[0] == n - 1, "one byte per cycle");
  endtask

  initial begin
    wr_en = 1'b0; start = 1'b0; len = '0; wr_addr = '0; wr_data = '0;
    reset_dut();
    for (int k = 0; k < 256; k++) begin
      mem[k] = 8'($urandom);
      @(negedge clk); wr_en = 1'b1; wr_addr = 8'(k); wr_data = mem[k];
    end
    @(negedge clk); wr_en = 1'b0;
    send(20, 0);
    send(256, 30);
    send(0, 0);
    send(1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
