// tb_dac_pacer: checks the DAC interface: nothing converted before the prefill level, then one sample every div cycles in order, done after the last sample; an underrun (zero sample, flag, count) when the ring runs dry inside a packet; then longer packets at several sample periods, including a packet shorter than the prefill level, which must start on its last word alone.
module tb_dac_pacer;
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
  logic start, dac_strobe, running, done, underrun;
  logic [15:0] div, underrun_cnt;
  logic [10:0] prefill, level, lasts_held;
  iq_t dac_data;
  int  lasts_in;

  dac_pacer #(.LEVEL_W(11)) dut (.clk, .rst_n, .start, .div, .prefill, .level, .lasts_held, .s(s_if),
                                 .dac_data, .dac_strobe, .running, .done, .underrun, .underrun_cnt);
  assign level      = 11'(u_src.pending());
  assign lasts_held = 11'(lasts_in);
  assign m_if.valid = 1'b0;
  assign m_if.data  = '0;
  assign m_if.last  = 1'b0;

  word_t  sq[$];
  longint st[$];
  longint cyc = 0;
  int     ndone = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dac_strobe) begin sq.push_back(dac_data); st.push_back(cyc); end
    if (done) ndone++;
  end

  task automatic pulse_start();
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
  endtask

  initial begin
    word_t d [$];
    start = 0; div = 16'd3; prefill = 11'd4; lasts_in = 0;
    reset_dut();
    pulse_start();
    check(running, "armed after start");
    repeat (20) @(posedge clk);
    check(sq.size() == 0, "nothing before prefill");
    for (int k = 0; k < 3; k++) begin d.push_back($urandom); u_src.push(d[k], 1'b0); end
    repeat (20) @(posedge clk);
    check(sq.size() == 0, "still below prefill");
    for (int k = 3; k < 6; k++) begin d.push_back($urandom); u_src.push(d[k], k == 5); end
    lasts_in = 1;
    repeat (40) @(posedge clk);
    check(sq.size() == 6, $sformatf("converted %0d", sq.size()));
    for (int k = 0; k < 6 && k < sq.size(); k++) begin
      check(sq[k] == d[k], $sformatf("sample %0d", k));
      if (k > 0) check(st[k] - st[k-1] == 3, $sformatf("period %0d", st[k] - st[k-1]));
    end
    check(ndone == 1 && !running && !underrun, "done, idle, no underrun");
    lasts_in = 0;

    // underrun: prefill 1, div 2, the ring empties inside the packet
    sq.delete(); st.delete(); d.delete();
    prefill = 11'd1; div = 16'd2;
    pulse_start();
    for (int k = 0; k < 3; k++) begin d.push_back($urandom | 32'h1); u_src.push(d[k], 1'b0); end
    repeat (30) @(posedge clk);
    check(underrun, "underrun flagged");
    check(underrun_cnt > 0 && int'(underrun_cnt) == sq.size() - 3,
          $sformatf("underrun count %0d for %0d conversions", underrun_cnt, sq.size()));
    for (int k = 3; k < sq.size(); k++) check(sq[k] == '0, "zero sample on underrun");
    for (int k = 0; k < 3; k++) check(sq[k] == d[k], "samples before underrun");
    u_src.push(32'h1234_5678, 1'b1);
    repeat (10) @(posedge clk);
    check(ndone == 2 && sq[sq.size()-1] == 32'h1234_5678 && !running, "packet ends after underrun");

    // longer packets, several periods; the packet is in the ring before the
    // pacer is armed, so no sample may underrun
    begin
      int divs [5] = '{1, 2, 5, 17, 4};
      int pres [5] = '{8, 1, 30, 2, 100};   // 100: more than the packet
      foreach (divs[r]) begin
        int n;
        n = 20 + r * 7;
        sq.delete(); st.delete(); d.delete();
        div = 16'(divs[r]); prefill = 11'(pres[r]);
        for (int k = 0; k < n; k++) begin d.push_back($urandom | 32'h1); u_src.push(d[k], k == n - 1); end
        lasts_in = 1;
        pulse_start();
        repeat (n * divs[r] + 20) @(posedge clk);
        check(sq.size() == n, $sformatf("div %0d: converted %0d of %0d", divs[r], sq.size(), n));
        for (int k = 0; k < n && k < sq.size(); k++) begin
          check(sq[k] == d[k], $sformatf("div %0d: sample %0d", divs[r], k));
          if (k > 0) check(st[k] - st[k-1] == divs[r], $sformatf("div %0d: period %0d", divs[r], st[k] - st[k-1]));
        end
        check(ndone == 3 + r && !running && !underrun && underrun_cnt == 0,
              $sformatf("div %0d: done once, idle, no underrun", divs[r]));
        lasts_in = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
