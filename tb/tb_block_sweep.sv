// tb_block_sweep: the hybrid workload of the O-QPSK 2450 MHz transmitter,
// one block at a time. For every block index b = 0..8 and for the buffer
// sizes 1, 8, 64 and 256, block b is switched off and the CPU does its work
// in software, while every other block stays in hardware. The CPU takes
// block b's input from interposer b-1 and writes block b's output to
// interposer b, by interrupt and DMA, in buffers of the given size. Block 0
// has no interposer in front of it, so for it interposer 0 both reads (the
// raw bytes, Splitter off) and writes (the nibbles). PN9, Clock and Diffenc
// are not used by O-QPSK, so their software stage only moves data.
//
// The software stage keeps the whole input seen so far, runs the stage's
// reference on it, and writes only the outputs it has not written yet; the
// Offset stage holds back its last N outputs until the packet ends, as its
// final samples are the flush. Every run must deliver exactly the samples
// of the all-hardware chain to the DAC. The testbench also reports, per
// block and buffer size, how many DAC samples underran with a CPU that
// answers each interrupt after 40 cycles and a DAC that takes a sample
// every 8 cycles; those numbers are printed, not checked.
module tb_block_sweep;
  import radio_pkg::*;

  `include "tb_top_env.svh"

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int CPU_DELAY = 40;
  localparam int DAC_DIV   = 8;

  // the software stage for block b; hist holds all its input so far
  wq_t sw_in;
  int  sw_out_n;
  function automatic wq_t stage(input int b, input wq_t x);
    case (b)
      0: begin
        logic [7:0] by [$];
        foreach (x[k]) by.push_back(x[k][7:0]);
        return ref_split(by, 0);
      end
      4: return ref_chip(x, 0, 32, 1);
      5: return ref_map(x, qpsk_lut);
      6: return ref_fir(x, c_hs, 4);
      7: return ref_zpad(x, 1, 64);
      8: return ref_offset(x, 2);
      default: return x;
    endcase
  endfunction

  function automatic wq_t software(input int kind, input wq_t x);
    wq_t full, o;
    int n;
    sw_in = {sw_in, x};
    full = stage(kind, sw_in);
    n = full.size();
    if (kind == 8 && !sw_fin) n -= 2;
    for (int k = sw_out_n; k < n; k++) o.push_back(full[k]);
    sw_out_n = n;
    return o;
  endfunction

  initial begin
    logic [7:0] pkt [$];
    wq_t exp_oq, t0;
    int sizes [4] = '{1, 8, 64, 256};
    int under [9][4];
    int runs = 0;

    init_env();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    for (int k = 0; k < 4; k++) pkt.push_back(8'($urandom));
    load_packet(pkt);
    load_fir(c_hs);
    bus_write(14, 32'h0000_4001);           // Zpad: 1 zero every 64 samples
    bus_write(16, DAC_DIV);
    t0 = ref_split(pkt, 0);
    t0 = ref_chip(t0, 0, 32, 1);
    t0 = ref_map(t0, qpsk_lut);
    t0 = ref_fir(t0, c_hs, 4);
    t0 = ref_zpad(t0, 1, 64);
    exp_oq = ref_offset(t0, 2);

    // all-hardware reference run
    start_tx();
    wait_done(100000);
    compare(exp_oq, "hardware");

    for (int b = 0; b < 9; b++) begin
      for (int si = 0; si < 4; si++) begin
        int rd_ip, u0;
        rd_ip = (b == 0) ? 0 : b - 1;
        bus_write(2, 32'(9'b1_1111_0001 & ~(9'd1 << b)));
        bus_write(3, 32'(1) << rd_ip);
        bus_write(4, 32'(1) << b);
        bus_write(7, 32'(rd_ip | (b << 8)));
        bus_write(6, sizes[si]);
        bus_write(5, 32'(1) << rd_ip);
        sw_in.delete();
        sw_out_n = 0;
        u0 = n_underrun;
        start_tx();
        cpu_loop(rd_ip, b, b, CPU_DELAY);
        wait_done(400000);
        compare(exp_oq, $sformatf("block %0d in software, buffer %0d", b, sizes[si]));
        under[b][si] = n_underrun - u0;
        runs++;
      end
    end
    check(runs == 36, "all block and buffer-size combinations ran");
    check(n_dma_rd > 0 && n_dma_wr > 0 && n_irq > 0, "interposer traffic happened");

    $display("DAC underruns per block in software (columns: buffer 1, 8, 64, 256):");
    for (int b = 0; b < 9; b++)
      $display("  block %0d: %6d %6d %6d %6d", b, under[b][0], under[b][1], under[b][2], under[b][3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
