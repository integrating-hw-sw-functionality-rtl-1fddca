// tb_chip_seq: checks chip spreading: the reset table against the IEEE 802.15.4 2450 MHz O-QPSK sequences of symbols 0, 1, 8 and 15 written out as chip strings, two chips per word (c(2k) in bit 0), sixteen words per symbol; then a loaded 15-chip BPSK table one chip per word; then a loaded 16-entry table of 16-chip sequences (the 915/780 MHz form: symbol 0 = 0011111000100101, each next symbol rotated right by two chips, symbols 8-15 with their odd chips inverted), two chips per word; last on the final chip; bypass.
module tb_chip_seq;
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
  logic en, pair, tbl_we;
  logic [5:0] len;
  logic [3:0] tbl_addr;
  logic [31:0] tbl_wdata;
  chip_seq dut (.clk, .rst_n, .en, .len, .pair, .tbl_we, .tbl_addr, .tbl_wdata, .s(s_if), .m(m_if));

  // chip strings, c0 first, as printed in the standard
  string seq2450 [16];

  function automatic logic chip_of(input string sq, input int k);
    return sq[k] == "1";
  endfunction

  task automatic run(input int syms [$], input string tbl [16], input int ln, input bit pr,
                     input bit ena, input int g, input int st);
    int nper, n, w;
    gap = g; stall = st; en = ena; len = 6'(ln); pair = pr;
    u_sink.clear();
    foreach (syms[k]) u_src.push(word_t'(syms[k]), k == syms.size() - 1);
    nper = !ena ? 1 : (pr ? ln / 2 : ln);
    n = nper * syms.size();
    wait_words(n);
    w = 0;
    foreach (syms[k]) begin
      for (int j = 0; j < nper; j++) begin
        word_t e;
        if (!ena)    e = word_t'(syms[k]);
        else if (pr) e = {30'd0, chip_of(tbl[syms[k]], 2*j+1), chip_of(tbl[syms[k]], 2*j)};
        else         e = {31'd0, chip_of(tbl[syms[k]], j)};
        check(u_sink.dq[w] == e, $sformatf("sym %0d word %0d got %h exp %h", syms[k], j, u_sink.dq[w], e));
        check(u_sink.lq[w] == (w == n - 1), $sformatf("last at %0d", w));
        w++;
      end
    end
    if (ena && g == 0 && st == 0)
      check(u_sink.tq[n-1] - u_sink.tq[0] == n - 1, "one word per cycle");
  endtask

  initial begin
    string bpsk [16];
    int s1 [$];
    seq2450[0]  = "11011001110000110101001000101110";
    seq2450[1]  = "11101101100111000011010100100010";
    seq2450[8]  = "10001100100101100000011101111011";
    seq2450[15] = "11001001011000000111011110111000";
    bpsk[0] = "111101011001000";
    bpsk[1] = "000010100110111";
    en = 1'b1; pair = 1'b1; len = 6'd32; tbl_we = 1'b0; tbl_addr = '0; tbl_wdata = '0;
    reset_dut();
    s1 = '{0, 1, 8, 15, 0};
    run(s1, seq2450, 32, 1'b1, 1'b1, 0, 0);
    run(s1, seq2450, 32, 1'b1, 1'b1, 30, 30);
    // load the BPSK sequences
    for (int k = 0; k < 2; k++) begin
      logic [31:0] v;
      v = '0;
      for (int j = 0; j < 15; j++) v[j] = chip_of(bpsk[k], j);
      @(negedge clk); tbl_we = 1'b1; tbl_addr = 4'(k); tbl_wdata = v;
    end
    @(negedge clk); tbl_we = 1'b0;
    s1 = '{1, 0, 0, 1, 1, 0};
    run(s1, bpsk, 15, 1'b0, 1'b1, 20, 20);
    run(s1, bpsk, 15, 1'b0, 1'b0, 0, 0);
    // 16-chip sequences, all sixteen entries rewritten
    begin
      string seq16 [16];
      seq16[0] = "0011111000100101";
      for (int k = 1; k < 8; k++)
        seq16[k] = {seq16[k-1].substr(14, 15), seq16[k-1].substr(0, 13)};
      for (int k = 8; k < 16; k++) begin
        string t;
        t = "";
        for (int j = 0; j < 16; j++)
          t = {t, ((j % 2 == 1) ^ (seq16[k-8][j] == "1")) ? "1" : "0"};
        seq16[k] = t;
      end
      check(seq16[1] == "0100111110001001", "16-chip symbol 1 is symbol 0 rotated by two chips");
      for (int k = 0; k < 16; k++) begin
        logic [31:0] v;
        v = '0;
        for (int j = 0; j < 16; j++) v[j] = chip_of(seq16[k], j);
        @(negedge clk); tbl_we = 1'b1; tbl_addr = 4'(k); tbl_wdata = v;
      end
      @(negedge clk); tbl_we = 1'b0;
      s1 = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 14, 15, 3};
      run(s1, seq16, 16, 1'b1, 1'b1, 0, 0);
      run(s1, seq16, 16, 1'b1, 1'b1, 25, 25);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
