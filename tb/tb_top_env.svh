// tb_top_env.svh: the environment shared by the testbenches of the whole
// transmitter, included inside their modules. It instantiates the design,
// plays the CPU (register bus, interrupt-driven software loop) and the DMA
// controller (the two DMA streams), counts the mechanisms seen inside the
// design, collects the samples the DAC takes from the ring buffer, and
// holds a reference model of every stage. The including module supplies
// software(kind, x), the CPU's processing of one buffer, and a watchdog.

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [9:0]  bus_addr;
  logic        bus_wr, bus_rd, irq;
  logic [31:0] bus_wdata, bus_rdata;
  logic [31:0] dma_rd_data, dma_wr_data;
  logic        dma_rd_valid, dma_rd_ready, dma_rd_last, dma_rd_pkt_last;
  logic        dma_wr_valid, dma_wr_ready, dma_wr_last, dma_wr_pkt_last;
  iq_t         dac_code;
  logic        dac_strobe, tx_done;
  real         dac_vout_i, dac_vout_q;

  radio_tx_top dut (.*);

  localparam int A = 23170;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ bus
  task automatic bus_write(input int a, input logic [31:0] d);
    @(negedge clk); bus_addr = 10'(a); bus_wdata = d; bus_wr = 1'b1;
    @(negedge clk); bus_wr = 1'b0;
  endtask

  task automatic bus_read(input int a, output logic [31:0] d);
    @(negedge clk); bus_addr = 10'(a); bus_rd = 1'b1;
    @(negedge clk); bus_rd = 1'b0; d = bus_rdata;
  endtask

  // ------------------------------------------------------------ mechanism counters
  int n_bypass, n_dma_rd, n_dma_wr, n_irq, n_stall, n_bank, n_zpad, n_flush, n_interp;
  int n_underrun, n_done, n_prefill_wait, n_oqpsk, n_bpsk, n_gfsk;
  logic irq_q;
  always @(posedge clk) if (rst_n) begin
    irq_q <= irq;
    if (irq && !irq_q) n_irq++;
    if (!dut.cfg.block_en[BLK_PN9] && dut.blk_out[1].valid && dut.blk_out[1].ready) n_bypass++;
    if (!dut.cfg.block_en[BLK_MAPPER] && dut.blk_out[5].valid && dut.blk_out[5].ready) n_bypass++;
    if (dma_rd_valid && dma_rd_ready) n_dma_rd++;
    if (dma_wr_valid && dma_wr_ready) n_dma_wr++;
    if (dma_rd_valid && dma_rd_ready && dma_rd_last) n_bank++;
    if (dut.cfg.ip_rd_en[4] && dut.blk_out[4].valid && !dut.blk_out[4].ready) n_stall++;
    if (dut.cfg.ip_rd_en[0] && dut.blk_out[0].valid && !dut.blk_out[0].ready) n_stall++;
    if (dut.u_zpad.zeroing && dut.blk_out[7].ready) n_zpad++;
    if (dut.u_offset.flushing && dut.blk_out[8].ready) n_flush++;
    if (dut.u_fir.step_zero) n_interp++;
    if (dut.u_pacer.state == 2'd1 && dut.ring_level != 0) n_prefill_wait++;
    if (tx_done) n_done++;
  end

  // samples the DAC takes from the ring, and its conversions
  word_t got[$];
  int    n_conv;
  // (an underrun is a step of the design's underrun counter)
  logic [15:0] ucnt_q;
  always @(posedge clk) if (rst_n) begin
    ucnt_q <= dut.underrun_cnt;
    if (dut.ring_out.valid && dut.ring_out.ready) got.push_back(dut.ring_out.data);
    if (dac_strobe) n_conv++;
    if (dut.underrun_cnt == ucnt_q + 16'd1) n_underrun++;
  end

  // ------------------------------------------------------------ reference model
  typedef word_t wq_t[$];

  string oq_chips [16];
  string bpsk_chips [2];
  int    pn_ref [4096];

  function automatic wq_t ref_split(input logic [7:0] b [$], input bit bits);
    wq_t o;
    foreach (b[k])
      if (bits) for (int j = 0; j < 8; j++) o.push_back(word_t'(b[k][j]));
      else begin o.push_back(word_t'(b[k][3:0])); o.push_back(word_t'(b[k][7:4])); end
    return o;
  endfunction

  function automatic wq_t ref_pn9(input wq_t x);
    wq_t o;
    foreach (x[k]) o.push_back(x[k] ^ word_t'(pn_ref[k]));
    return o;
  endfunction

  function automatic wq_t ref_clock(input wq_t x, input int sps, input int stp);
    wq_t o;
    int ph = 0;
    foreach (x[k]) for (int j = 0; j < sps; j++) begin
      ph = x[k][0] ? (ph + stp) % 16 : (ph + 16 - stp) % 16;
      o.push_back(word_t'(ph));
    end
    return o;
  endfunction

  function automatic wq_t ref_diffenc(input wq_t x);
    wq_t o;
    int e = 0;
    foreach (x[k]) begin e = e ^ int'(x[k][0]); o.push_back(word_t'(e)); end
    return o;
  endfunction

  string oq16 [16];
  function automatic wq_t ref_chip(input wq_t x, input bit bpsk, input int len, input bit pair);
    wq_t o;
    foreach (x[k]) begin
      string s;
      s = bpsk ? bpsk_chips[x[k][0]] : (len == 16) ? oq16[x[k][3:0]] : oq_chips[x[k][3:0]];
      for (int j = 0; j < len; j += (pair ? 2 : 1))
        if (pair) o.push_back({30'd0, s[j+1] == "1", s[j] == "1"});
        else      o.push_back({31'd0, s[j] == "1"});
    end
    return o;
  endfunction

  function automatic wq_t ref_map(input wq_t x, input word_t lut [16]);
    wq_t o;
    foreach (x[k]) o.push_back(lut[x[k][3:0]]);
    return o;
  endfunction

  function automatic int sat(input longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : int'(v));
  endfunction

  function automatic wq_t ref_fir(input wq_t x, input int c [41], input int up);
    wq_t o;
    longint xi [$], xq [$];
    foreach (x[k]) for (int j = 0; j < up; j++) begin
      xi.push_back(j == 0 ? longint'($signed(x[k][31:16])) : 0);
      xq.push_back(j == 0 ? longint'($signed(x[k][15:0])) : 0);
    end
    foreach (xi[t]) begin
      longint ai = 0, aq = 0;
      for (int k = 0; k < 41; k++) if (t >= k) begin
        ai += c[k] * xi[t-k];
        aq += c[k] * xq[t-k];
      end
      o.push_back({16'(sat((ai + 16384) >>> 15)), 16'(sat((aq + 16384) >>> 15))});
    end
    return o;
  endfunction

  function automatic wq_t ref_zpad(input wq_t x, input int n, input int m);
    wq_t o;
    foreach (x[k]) begin
      o.push_back(x[k]);
      if ((k + 1) % m == 0 && k != x.size() - 1) for (int z = 0; z < n; z++) o.push_back('0);
    end
    return o;
  endfunction

  function automatic wq_t ref_offset(input wq_t x, input int n);
    wq_t o;
    for (int k = 0; k < x.size() + n; k++) begin
      logic [15:0] i, q;
      i = (k < x.size()) ? x[k][31:16] : 16'd0;
      q = (k >= n) ? x[k-n][15:0] : 16'd0;
      o.push_back({i, q});
    end
    return o;
  endfunction

  // ------------------------------------------------------------ CPU + DMA
  word_t qpsk_lut [16], bpsk_lut [16], gfsk_lut [16];
  int    c_hs [41], c_rc [41];

  // set by the software loop before software() sees the buffer that ends
  // the packet
  bit sw_fin;

  task automatic dma_write(input wq_t d, input bit pkt_last);
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

  // Interrupt-driven software loop in the style of the paper's driver: wait
  // for the interrupt, read the status, pull the buffer by DMA, process it,
  // push the result by DMA, until the buffer flagged as the packet end.
  task automatic cpu_loop(input int rd_ip, input int wr_ip, input int kind, input int delay);
    bit fin = 0;
    int guard = 0;
    while (!fin && guard < 20000) begin
      logic [31:0] st, sel;
      wq_t buf_in, buf_out;
      int cnt;
      guard++;
      while (!irq) @(posedge clk);
      bus_read(18, st);
      if (!st[rd_ip]) continue;
      bus_read(19, sel);
      cnt = int'(sel[8:0]);
      fin = sel[16];
      repeat (delay) @(posedge clk);
      @(negedge clk); dma_rd_ready = 1'b1;
      while (buf_in.size() < cnt) begin
        @(posedge clk);
        if (dma_rd_valid) begin
          buf_in.push_back(dma_rd_data);
          check(dma_rd_last == (buf_in.size() == cnt), "DMA read buffer end");
          check(dma_rd_pkt_last == (fin && buf_in.size() == cnt), "DMA read packet end");
        end
      end
      @(negedge clk); dma_rd_ready = 1'b0;
      sw_fin = fin;
      buf_out = software(kind, buf_in);
      dma_write(buf_out, fin);
    end
  endtask

  task automatic wait_done(input int limit);
    int t = 0;
    logic [31:0] st;
    while (t < limit) begin
      @(posedge clk);
      t++;
      if (tx_done) break;
    end
    repeat (4) @(posedge clk);
    bus_read(1, st);
    check(st[1] && !st[0], "STATUS shows done and not busy");
  endtask

  task automatic load_packet(input logic [7:0] b [$]);
    foreach (b[k]) bus_write(10'h100 + k, 32'(b[k]));
    bus_write(8, b.size());
  endtask

  task automatic load_mapper(input word_t lut [16]);
    for (int k = 0; k < 16; k++) bus_write(10'h050 + k, lut[k]);
  endtask

  task automatic load_fir(input int c [41]);
    for (int k = 0; k < 41; k++) bus_write(10'h080 + k, 32'(c[k]) & 32'hffff);
  endtask

  task automatic compare(input wq_t exp, input string name);
    check(got.size() == exp.size(), $sformatf("%s: %0d samples, expected %0d", name, got.size(), exp.size()));
    for (int k = 0; k < exp.size() && k < got.size(); k++)
      check(got[k] == exp[k], $sformatf("%s: sample %0d got %h exp %h", name, k, got[k], exp[k]));
  endtask

  task automatic start_tx();
    got.delete();
    n_conv = 0;
    bus_write(0, 1);
  endtask

  // reference tables, written out independently of the design, and the
  // idle state of the bus and DMA inputs
  task automatic init_env();
    bus_addr = '0; bus_wr = 0; bus_rd = 0; bus_wdata = '0;
    dma_rd_ready = 0; dma_wr_valid = 0; dma_wr_data = '0; dma_wr_last = 0; dma_wr_pkt_last = 0;
    {n_bypass, n_dma_rd, n_dma_wr, n_irq, n_stall, n_bank, n_zpad, n_flush, n_interp} = '0;
    {n_underrun, n_done, n_prefill_wait, n_oqpsk, n_bpsk, n_gfsk} = '0;
    oq_chips[0]  = "11011001110000110101001000101110";
    oq_chips[1]  = "11101101100111000011010100100010";
    oq_chips[2]  = "00101110110110011100001101010010";
    oq_chips[3]  = "00100010111011011001110000110101";
    oq_chips[4]  = "01010010001011101101100111000011";
    oq_chips[5]  = "00110101001000101110110110011100";
    oq_chips[6]  = "11000011010100100010111011011001";
    oq_chips[7]  = "10011100001101010010001011101101";
    oq_chips[8]  = "10001100100101100000011101111011";
    oq_chips[9]  = "10111000110010010110000001110111";
    oq_chips[10] = "01111011100011001001011000000111";
    oq_chips[11] = "01110111101110001100100101100000";
    oq_chips[12] = "00000111011110111000110010010110";
    oq_chips[13] = "01100000011101111011100011001001";
    oq_chips[14] = "10010110000001110111101110001100";
    oq_chips[15] = "11001001011000000111011110111000";
    bpsk_chips[0] = "111101011001000";
    bpsk_chips[1] = "000010100110111";
    for (int k = 0; k < 9; k++) pn_ref[k] = 1;
    for (int k = 0; k + 9 < 4096; k++) pn_ref[k+9] = pn_ref[k] ^ pn_ref[k+5];
    for (int k = 0; k < 16; k++) begin
      qpsk_lut[k] = {16'((k % 2) ? A : -A), 16'(((k / 2) % 2) ? A : -A)};
      bpsk_lut[k] = {16'((k % 2) ? A : -A), 16'd0};
      gfsk_lut[k] = {16'($rtoi($floor(A * $cos(2.0 * 3.14159265358979 * k / 16.0) + 0.5))),
                     16'($rtoi($floor(A * $sin(2.0 * 3.14159265358979 * k / 16.0) + 0.5)))};
    end
    // half-sine pulse over 8 taps, and a raised cosine (roll-off 0.2) over 41 taps
    for (int k = 0; k < 41; k++) begin
      real t, h;
      c_hs[k] = (k < 8) ? $rtoi($floor(16384.0 * $sin(3.14159265358979 * (k + 0.5) / 8.0) + 0.5)) : 0;
      t = (k - 20) / 4.0;
      if (k == 20) h = 1.0;
      else if (k == 10 || k == 30) h = 0.1;   // limit at t = 1/(2 roll-off)
      else h = $sin(3.14159265358979 * t) / (3.14159265358979 * t) * $cos(3.14159265358979 * 0.2 * t)
               / (1.0 - (0.4 * t) * (0.4 * t));
      c_rc[k] = $rtoi($floor(16384.0 * h + 0.5));
    end
  endtask
