// tb_radio_tx_top: end-to-end test of the transmitter at its default sizes.
// The testbench plays the CPU (register bus, interrupt) and the DMA
// controller (the two DMA streams), and holds its own reference model of
// every stage. It runs:
//   1. O-QPSK 2450 MHz in hardware only (Splitter, Chip, Mapper, FIR x4,
//      Zpad, Offset), PN9/Clock/Diffenc bypassed;
//   2. the same with the Mapper replaced by software: interposer 4 hands the
//      chip stream to the CPU in 32-word buffers, the CPU maps it and writes
//      it back through interposer 5, by interrupt;
//   3. the same hybrid run with a slow CPU and a fast DAC, which must stall
//      the pipeline and underrun the DAC;
//   3b. O-QPSK with its own blocks, Zpad and Offset, in software between
//      interposers 6 and 8;
//   3c. O-QPSK with a 16-chip table (the 915/780 MHz form);
//   4. BPSK 868 MHz (bits, Diffenc, 15-chip sequences, BPSK table, FIR x4),
//      in hardware and then with Diffenc in software between interposers 2
//      and 3 and the write interrupt enabled;
//   5. GFSK (bits, PN9, Clock, cos/sin table) in hardware, then with PN9 and Clock replaced by
//      software between interposers 0 and 2.
// The samples taken from the ring buffer by the DAC are compared with the
// reference, and every mechanism is counted; one that never happens fails.
module tb_radio_tx_top;
  import radio_pkg::*;

  `include "tb_top_env.svh"

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the CPU's software stage: 0 = QPSK mapper, 1 = PN9 then Clock,
  // 2 = differential encoder, 3 = Zpad (1 zero every 64) then Offset (2);
  // their state carries across buffers, and sw_fin marks the packet's end
  int sw_pos;
  bit sw_e, sw_pend;
  wq_t sw_hist;
  function automatic wq_t software(input int kind, input wq_t x);
    wq_t o;
    if (kind == 0) return ref_map(x, qpsk_lut);
    if (kind == 2) begin
      foreach (x[k]) begin
        sw_e = sw_e ^ x[k][0];
        o.push_back(word_t'(sw_e));
      end
      return o;
    end
    if (kind == 3) begin
      foreach (x[k]) begin
        wq_t z;
        if (sw_pend) z.push_back('0);
        z.push_back(x[k]);
        sw_pos++;
        sw_pend = (sw_pos % 64 == 0);
        foreach (z[j]) begin
          sw_hist.push_back(z[j]);
          o.push_back({z[j][31:16], (sw_hist.size() > 2) ? sw_hist[sw_hist.size() - 3][15:0] : 16'd0});
        end
      end
      if (sw_fin)
        for (int j = 2; j > 0; j--) o.push_back({16'd0, sw_hist[sw_hist.size() - j][15:0]});
      return o;
    end
    foreach (x[k]) begin
      wq_t one, cl;
      one.push_back(x[k] ^ word_t'(pn_ref[sw_pos]));
      sw_pos++;
      o = {o, one};
    end
    return sw_clock(o);
  endfunction

  // clock phases continue across buffers, so the Clock part keeps its phase
  int sw_phase;
  function automatic wq_t sw_clock(input wq_t x);
    wq_t o;
    foreach (x[k]) for (int j = 0; j < 4; j++) begin
      sw_phase = x[k][0] ? (sw_phase + 1) % 16 : (sw_phase + 15) % 16;
      o.push_back(word_t'(sw_phase));
    end
    return o;
  endfunction

  // ------------------------------------------------------------ test
  initial begin
    logic [7:0] pkt [$];
    wq_t exp_oq, exp_bp, exp_gf, t0;
    logic [31:0] st;
    int u0;

    init_env();

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // ---------------- 1. O-QPSK 2450 MHz, hardware only (reset configuration)
    for (int k = 0; k < 6; k++) pkt.push_back(8'($urandom));
    load_packet(pkt);
    load_fir(c_hs);
    bus_write(14, 32'h0000_4001);          // Zpad: 1 zero every 64 samples
    bus_write(16, 2);                       // DAC every 2 cycles
    t0 = ref_split(pkt, 0);
    t0 = ref_chip(t0, 0, 32, 1);
    t0 = ref_map(t0, qpsk_lut);
    t0 = ref_fir(t0, c_hs, 4);
    t0 = ref_zpad(t0, 1, 64);
    exp_oq = ref_offset(t0, 2);
    start_tx();
    wait_done(100000);
    compare(exp_oq, "O-QPSK hardware");
    check(n_conv == exp_oq.size(), "one conversion per sample, no underrun");
    n_oqpsk++;

    // ---------------- 2. O-QPSK with the Mapper in software
    bus_write(2, 9'b1_1101_0001);           // Mapper off
    bus_write(3, 9'b0_0001_0000);           // interposer 4 reads
    bus_write(4, 9'b0_0010_0000);           // interposer 5 writes
    bus_write(6, 32);                       // buffer size
    bus_write(7, 32'h0000_0504);            // DMA: read 4, write 5
    bus_write(5, 32'h0000_0010);            // read interrupt of interposer 4
    start_tx();
    cpu_loop(4, 5, 0, 0);
    wait_done(100000);
    compare(exp_oq, "O-QPSK, software mapper");
    n_oqpsk++;

    // ---------------- 3. same, slow CPU and a fast DAC: stall and underrun
    u0 = n_underrun;
    bus_write(16, 1);
    bus_write(17, 1);
    start_tx();
    cpu_loop(4, 5, 0, 300);
    wait_done(200000);
    compare(exp_oq, "O-QPSK, slow software mapper");
    bus_read(1, st);
    check(st[2] && st[31:16] != 0, "underrun reported in STATUS");
    check(n_underrun > u0, "DAC underran");
    n_oqpsk++;

    // ---------------- 3b. O-QPSK with Zpad and Offset, its own blocks, in software
    bus_write(16, 2); bus_write(17, 64);
    bus_write(2, 9'b0_0111_0001);           // Zpad and Offset off
    bus_write(3, 9'b0_0100_0000);           // interposer 6 reads filtered samples
    bus_write(4, 9'b1_0000_0000);           // interposer 8 writes to the ring
    bus_write(7, 32'h0000_0806);
    bus_write(6, 256);
    bus_write(5, 32'h0000_0040);
    sw_pos = 0; sw_pend = 0; sw_hist.delete();
    start_tx();
    cpu_loop(6, 8, 3, 0);
    wait_done(100000);
    compare(exp_oq, "O-QPSK, software Zpad and Offset");
    n_oqpsk++;

    // ---------------- 3c. O-QPSK 915/780 MHz: 16-chip sequences, hardware only
    // (symbol 0 as in the standard, rotated right two chips per symbol, odd
    // chips inverted for symbols 8-15)
    bus_write(3, 0); bus_write(4, 0); bus_write(5, 0); bus_write(7, 32'hffff);
    bus_write(2, 9'b1_1111_0001);
    oq16[0] = "0011111000100101";
    for (int k = 1; k < 8; k++) oq16[k] = {oq16[k-1].substr(14, 15), oq16[k-1].substr(0, 13)};
    for (int k = 8; k < 16; k++) begin
      string t;
      t = "";
      for (int j = 0; j < 16; j++) t = {t, ((j % 2 == 1) ^ (oq16[k-8][j] == "1")) ? "1" : "0"};
      oq16[k] = t;
    end
    for (int k = 0; k < 16; k++) begin
      logic [31:0] v = '0;
      for (int j = 0; j < 16; j++) v[j] = (oq16[k][j] == "1");
      bus_write(10'h040 + k, v);
    end
    bus_write(12, 32'h0000_0110);           // 16 chips, two per word
    t0 = ref_split(pkt, 0);
    t0 = ref_chip(t0, 0, 16, 1);
    t0 = ref_map(t0, qpsk_lut);
    t0 = ref_fir(t0, c_hs, 4);
    t0 = ref_zpad(t0, 1, 64);
    t0 = ref_offset(t0, 2);
    start_tx();
    wait_done(100000);
    compare(t0, "O-QPSK 16-chip hardware");
    n_oqpsk++;

    // ---------------- 4. BPSK 868 MHz, hardware only
    bus_write(3, 0); bus_write(4, 0); bus_write(5, 0); bus_write(7, 32'hffff);
    bus_write(2, 9'b0_0111_1001);           // Splitter, Diffenc, Chip, Mapper, FIR
    bus_write(9, 1);                        // bits
    bus_write(12, 32'h0000_000f);           // 15 chips, one per word
    for (int k = 0; k < 2; k++) begin
      logic [31:0] v = '0;
      for (int j = 0; j < 15; j++) v[j] = (bpsk_chips[k][j] == "1");
      bus_write(10'h040 + k, v);
    end
    load_mapper(bpsk_lut);
    load_fir(c_rc);
    bus_write(16, 2); bus_write(17, 64);
    pkt.delete();
    for (int k = 0; k < 2; k++) pkt.push_back(8'($urandom));
    load_packet(pkt);
    t0 = ref_split(pkt, 1);
    t0 = ref_diffenc(t0);
    t0 = ref_chip(t0, 1, 15, 0);
    t0 = ref_map(t0, bpsk_lut);
    exp_bp = ref_fir(t0, c_rc, 4);
    start_tx();
    wait_done(100000);
    compare(exp_bp, "BPSK hardware");
    n_bpsk++;

    // ---------------- 4b. BPSK with Diffenc in software, write interrupt on
    bus_write(2, 9'b0_0111_0001);           // Diffenc off
    bus_write(3, 9'b0_0000_0100);           // interposer 2 reads bits
    bus_write(4, 9'b0_0000_1000);           // interposer 3 writes encoded bits
    bus_write(7, 32'h0000_0302);
    bus_write(6, 5);
    bus_write(5, 32'h0008_0004);            // read irq 2, write irq 3
    @(negedge clk);
    check(irq == 1'b1, "write interrupt raised by a free write bank");
    bus_read(20, st);
    check(st[3] && !st[2], "IRQ_STATUS shows interposer 3 only");
    bus_read(18, st);
    check(st[16+3] && !st[2], "IP_STATUS shows a free write bank, no read bank");
    sw_e = 0;
    start_tx();
    cpu_loop(2, 3, 2, 10);
    wait_done(100000);
    compare(exp_bp, "BPSK, software Diffenc");
    n_bpsk++;

    // ---------------- 5. GFSK with PN9 and Clock in software
    bus_write(3, 0); bus_write(4, 0); bus_write(5, 0); bus_write(7, 32'hffff);
    bus_write(2, 9'b0_0010_0111);           // Splitter, PN9, Clock, Mapper
    bus_write(11, 32'h0000_0104);           // 4 per bit, step 1
    load_mapper(gfsk_lut);
    pkt.delete();
    for (int k = 0; k < 4; k++) pkt.push_back(8'($urandom));
    load_packet(pkt);
    t0 = ref_split(pkt, 1);
    t0 = ref_pn9(t0);
    t0 = ref_clock(t0, 4, 1);
    exp_gf = ref_map(t0, gfsk_lut);
    start_tx();
    wait_done(100000);
    compare(exp_gf, "GFSK hardware");
    n_gfsk++;
    bus_write(3, 9'b0_0000_0001);           // interposer 0 reads bits
    bus_write(4, 9'b0_0000_0100);           // interposer 2 writes phases
    bus_write(7, 32'h0000_0200);
    bus_write(6, 8);
    bus_write(5, 32'h0000_0001);
    sw_pos = 0; sw_phase = 0;
    start_tx();
    cpu_loop(0, 2, 1, 20);
    wait_done(100000);
    compare(exp_gf, "GFSK, software PN9 and Clock");
    n_gfsk++;

    // ---------------- mechanisms
    $display("mechanisms: bypass=%0d dma_read=%0d dma_write=%0d irq=%0d stall=%0d buffers=%0d zpad=%0d",
             n_bypass, n_dma_rd, n_dma_wr, n_irq, n_stall, n_bank, n_zpad);
    $display("            offset_flush=%0d interp=%0d underrun=%0d done=%0d prefill_wait=%0d oqpsk=%0d bpsk=%0d gfsk=%0d",
             n_flush, n_interp, n_underrun, n_done, n_prefill_wait, n_oqpsk, n_bpsk, n_gfsk);
    check(n_bypass > 0, "block bypass happened");
    check(n_dma_rd > 0, "interposer read happened");
    check(n_dma_wr > 0, "interposer write happened");
    check(n_irq > 0, "interrupt happened");
    check(n_stall > 0, "double-buffer stall happened");
    check(n_bank > 1, "buffer hand-over happened");
    check(n_zpad > 0, "zero padding happened");
    check(n_flush > 0, "offset flush happened");
    check(n_interp > 0, "FIR interpolation happened");
    check(n_underrun > 0, "underrun happened");
    check(n_done == 9, $sformatf("done %0d times", n_done));
    check(n_prefill_wait > 0, "ring prefill wait happened");
    check(n_oqpsk > 0 && n_bpsk > 0 && n_gfsk > 0, "all three modulations ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
