// tb_interposer: checks the interposer: bypass; read path with banks closed at the buffer size or at last, counts, packet-last flag, interrupt, and the input stall when both banks wait; write path with chunks closed by the DMA last flag, packet last, free flag, interrupt and back-pressure when both banks are full; and a software loop through the same interposer.
module tb_interposer;
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
  logic rd_en, wr_en, rd_irq_en, wr_irq_en;
  logic [8:0] size;
  logic [31:0] dma_rd_data, dma_wr_data;
  logic dma_rd_valid, dma_rd_ready, dma_rd_last, dma_rd_pkt_last;
  logic dma_wr_valid, dma_wr_ready, dma_wr_last, dma_wr_pkt_last;
  logic rd_ready, rd_pkt_last, wr_free, irq;
  logic [8:0] rd_count;

  interposer #(.W(32), .DEPTH(256)) dut (
    .clk, .rst_n, .rd_en, .wr_en, .rd_irq_en, .wr_irq_en, .size, .s(s_if), .m(m_if),
    .dma_rd_data, .dma_rd_valid, .dma_rd_ready, .dma_rd_last, .dma_rd_pkt_last,
    .dma_wr_data, .dma_wr_valid, .dma_wr_ready, .dma_wr_last, .dma_wr_pkt_last,
    .rd_ready, .rd_count, .rd_pkt_last, .wr_free, .irq);

  // DMA read side: collects words while dma_rd_ready is high
  word_t rq[$];
  logic  rl[$], rp[$];
  always @(posedge clk) if (rst_n && dma_rd_valid && dma_rd_ready) begin
    rq.push_back(dma_rd_data); rl.push_back(dma_rd_last); rp.push_back(dma_rd_pkt_last);
  end

  task automatic dma_write(input word_t d [$], input bit pkt_last);
    foreach (d[k]) begin
      @(negedge clk);
      dma_wr_valid = 1'b1; dma_wr_data = d[k];
      dma_wr_last = (k == d.size() - 1); dma_wr_pkt_last = pkt_last && (k == d.size() - 1);
      forever begin
        logic taken;
        #1 taken = dma_wr_ready;
        @(posedge clk);
        if (taken) break;
        @(negedge clk);
      end
    end
    @(negedge clk); dma_wr_valid = 1'b0; dma_wr_last = 1'b0; dma_wr_pkt_last = 1'b0;
  endtask

  initial begin
    word_t d [$];
    word_t c1 [$], c2 [$];
    int t;
    rd_en = 0; wr_en = 0; rd_irq_en = 0; wr_irq_en = 0; size = 9'd4;
    dma_rd_ready = 0; dma_wr_valid = 0; dma_wr_data = '0; dma_wr_last = 0; dma_wr_pkt_last = 0;
    reset_dut();
    // A: bypass
    gap = 20; stall = 20;
    u_sink.clear();
    for (int k = 0; k < 30; k++) begin d.push_back($urandom); u_src.push(d[k], k == 29); end
    wait_words(30);
    foreach (d[k]) check(u_sink.dq[k] == d[k] && u_sink.lq[k] == (k == 29), $sformatf("bypass %0d", k));
    check(!dma_rd_valid && !irq, "bypass: nothing for the DMA");

    // B: read path
    rd_en = 1; rd_irq_en = 1; gap = 0; stall = 0;
    u_sink.clear(); d.delete();
    check(!irq, "no irq before data");
    for (int k = 0; k < 10; k++) begin d.push_back($urandom); u_src.push(d[k], k == 9); end
    repeat (40) @(posedge clk);
    check(u_src.pending() == 2, $sformatf("stall with both banks full: %0d pending", u_src.pending()));
    check(rd_ready && rd_count == 4 && !rd_pkt_last, "first bank ready, 4 words");
    check(irq, "read irq");
    rd_irq_en = 0; #1;
    check(!irq, "read irq masked");
    dma_rd_ready = 1;
    t = 0;
    while (rq.size() < 10 && t < 1000) begin @(posedge clk); t++; end
    repeat (3) @(posedge clk);
    dma_rd_ready = 0;
    check(rq.size() == 10, $sformatf("read %0d words", rq.size()));
    foreach (d[k]) if (k < rq.size()) begin
      check(rq[k] == d[k], $sformatf("read data %0d", k));
      check(rl[k] == (k == 3 || k == 7 || k == 9), $sformatf("bank end at %0d", k));
      check(rp[k] == (k == 9), $sformatf("packet last at %0d", k));
    end
    check(u_sink.dq.size() == 0, "nothing forwarded while reading");
    check(!rd_ready, "read banks empty");

    // C: write path
    rd_en = 0; wr_en = 1; wr_irq_en = 1; stall = 100;
    repeat (2) @(posedge clk);
    check(wr_free && irq, "write bank free raises irq");
    for (int k = 0; k < 5; k++) c1.push_back($urandom);
    for (int k = 0; k < 3; k++) c2.push_back($urandom);
    dma_write(c1, 1'b0);
    dma_write(c2, 1'b1);
    repeat (2) @(posedge clk);
    check(!wr_free && !dma_wr_ready && !irq, "both write banks full");
    stall = 0;
    wait_words(8);
    for (int k = 0; k < 8; k++) begin
      check(u_sink.dq[k] == (k < 5 ? c1[k] : c2[k-5]), $sformatf("write data %0d", k));
      check(u_sink.lq[k] == (k == 7), $sformatf("write last %0d", k));
    end
    check(wr_free, "write bank free again");

    // D: software loop through one interposer, buffer size 7
    rd_en = 1; wr_en = 1; size = 9'd7; stall = 10; gap = 10;
    u_sink.clear(); d.delete(); rq.delete(); rl.delete(); rp.delete();
    for (int k = 0; k < 40; k++) begin d.push_back($urandom); u_src.push(d[k], k == 39); end
    t = 0;
    while (u_sink.dq.size() < 40 && t < 5000) begin
      word_t ch [$];
      logic pl;
      @(negedge clk);
      dma_rd_ready = 1;
      @(posedge clk);
      #1;
      t++;
      if (rq.size() > 0 && rl[rl.size()-1]) begin
        @(negedge clk);
        dma_rd_ready = 0;
        pl = rp[rp.size()-1];
        ch.delete();
        foreach (rq[k]) ch.push_back(rq[k] ^ 32'h5555_aaaa);
        rq.delete(); rl.delete(); rp.delete();
        dma_write(ch, pl);
      end
    end
    repeat (5) @(posedge clk);
    check(u_sink.dq.size() == 40, $sformatf("loop count %0d", u_sink.dq.size()));
    for (int k = 0; k < 40 && k < u_sink.dq.size(); k++) begin
      check(u_sink.dq[k] == (d[k] ^ 32'h5555_aaaa), $sformatf("loop data %0d got %h exp %h d %h", k, u_sink.dq[k], d[k] ^ 32'h5555_aaaa, d[k]));
      check(u_sink.lq[k] == (k == 39), $sformatf("loop last %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
