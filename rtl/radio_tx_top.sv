// radio_tx_top: the hybrid hardware/software IEEE 802.15.4 transmitter.
//
// Data path: packet buffer -> Splitter -> PN9 -> Clock -> Diffenc -> Chip ->
// Mapper -> FIR -> Zpad -> Offset -> ring buffer -> DAC, with an interposer
// after each of the nine blocks. A disabled block passes its input through,
// so one pipeline serves the O-QPSK, BPSK and GFSK PHYs. Any interposer can
// hand its stream to the CPU (read) and take a stream back from it (write),
// so software can stand in for a contiguous run of blocks: enable reading on
// the interposer in front of the run, writing on the one after it, and point
// the DMA selects at them. All stages are linked by valid/ready streams, so
// the pipeline stalls rather than loses data when the CPU is late; only the
// DAC, which takes a sample every DAC_DIV cycles, can starve (underrun).
//
// Ports: the register bus of csr_regs; irq; the DMA read and write streams
// that the external DMA controller moves to and from memory; the converted
// samples (codes, strobe and the DAC model's levels). The block order, the
// interposers, the ring buffer and the DMA/interrupt connection follow the
// paper; sizes, bus and register map are this design's choice.
module radio_tx_top #(
  parameter int unsigned PKT_DEPTH  = 256,
  parameter int unsigned IP_DEPTH   = 256,
  parameter int unsigned RING_DEPTH = 1024
) (
  input  logic           clk,
  input  logic           rst_n,
  // register bus
  input  logic [9:0]     bus_addr,
  input  logic           bus_wr,
  input  logic [31:0]    bus_wdata,
  input  logic           bus_rd,
  output logic [31:0]    bus_rdata,
  output logic           irq,
  // DMA read stream (accelerator to memory)
  output logic [31:0]    dma_rd_data,
  output logic           dma_rd_valid,
  input  logic           dma_rd_ready,
  output logic           dma_rd_last,
  output logic           dma_rd_pkt_last,
  // DMA write stream (memory to accelerator)
  input  logic [31:0]    dma_wr_data,
  input  logic           dma_wr_valid,
  output logic           dma_wr_ready,
  input  logic           dma_wr_last,
  input  logic           dma_wr_pkt_last,
  // DAC
  output radio_pkg::iq_t dac_code,
  output logic           dac_strobe,
  output real            dac_vout_i,
  output real            dac_vout_q,
  output logic           tx_done
);
  import radio_pkg::*;

  localparam int unsigned N = NUM_BLK;
  localparam int unsigned IAW = $clog2(IP_DEPTH);
  localparam int unsigned RAW = $clog2(RING_DEPTH);

  cfg_t        cfg;
  logic        start;
  logic        chip_we, map_we, coef_we, pkt_we;
  logic [7:0]  tbl_addr;
  logic [31:0] tbl_wdata;
  logic        pkt_busy, pacer_running, underrun;
  logic [15:0] underrun_cnt;
  logic [RAW:0] ring_level, ring_lasts;
  int unsigned dac_conversions;

  axis_if pkt_link (.clk(clk), .rst_n(rst_n));
  axis_if blk_out [N] (.clk(clk), .rst_n(rst_n));
  axis_if ip_out  [N] (.clk(clk), .rst_n(rst_n));
  axis_if ring_out    (.clk(clk), .rst_n(rst_n));

  // ---------------- registers ----------------
  logic [N-1:0] ip_rd_ready, ip_wr_free, ip_irq;
  logic [IAW:0] ip_rd_count [N];
  logic [N-1:0] ip_rd_pkt_last_st;
  logic [8:0]   sel_rd_count;
  logic         sel_rd_pkt_last;

  always_comb begin
    sel_rd_count    = '0;
    sel_rd_pkt_last = 1'b0;
    if (cfg.rd_sel < 4'(N)) begin
      sel_rd_count    = 9'(ip_rd_count[cfg.rd_sel]);
      sel_rd_pkt_last = ip_rd_pkt_last_st[cfg.rd_sel];
    end
  end

  csr_regs u_csr (
    .clk, .rst_n,
    .addr(bus_addr), .wr(bus_wr), .wdata(bus_wdata), .rd(bus_rd), .rdata(bus_rdata),
    .cfg, .start, .chip_we, .map_we, .coef_we, .pkt_we, .tbl_addr, .tbl_wdata,
    .busy(pkt_busy || pacer_running), .done(tx_done), .underrun, .underrun_cnt,
    .ip_rd_ready, .ip_wr_free, .ip_irq, .sel_rd_count, .sel_rd_pkt_last, .irq
  );

  // ---------------- packet buffer and the nine blocks ----------------
  pkt_buffer #(.DEPTH(PKT_DEPTH)) u_pkt (
    .clk, .rst_n, .wr_en(pkt_we), .wr_addr(tbl_addr[$clog2(PKT_DEPTH)-1:0]), .wr_data(tbl_wdata[7:0]),
    .start, .len(cfg.pkt_len[$clog2(PKT_DEPTH):0]), .busy(pkt_busy), .m(pkt_link)
  );

  splitter u_splitter (.clk, .rst_n, .en(cfg.block_en[BLK_SPLITTER]), .bits_mode(cfg.split_bits),
                       .s(pkt_link), .m(blk_out[0]));

  pn9 u_pn9 (.clk, .rst_n, .en(cfg.block_en[BLK_PN9]), .clr(start), .seed(cfg.pn9_seed),
             .s(ip_out[0]), .m(blk_out[1]));

  clock_seq u_clock (.clk, .rst_n, .en(cfg.block_en[BLK_CLOCK]), .clr(start), .sps(cfg.clk_sps),
                     .step(cfg.clk_step), .s(ip_out[1]), .m(blk_out[2]));

  diffenc u_diffenc (.clk, .rst_n, .en(cfg.block_en[BLK_DIFFENC]), .clr(start),
                     .s(ip_out[2]), .m(blk_out[3]));

  chip_seq u_chip (.clk, .rst_n, .en(cfg.block_en[BLK_CHIP]), .len(cfg.chip_len), .pair(cfg.chip_pair),
                   .tbl_we(chip_we), .tbl_addr(tbl_addr[3:0]), .tbl_wdata,
                   .s(ip_out[3]), .m(blk_out[4]));

  iq_mapper u_mapper (.clk, .rst_n, .en(cfg.block_en[BLK_MAPPER]),
                      .tbl_we(map_we), .tbl_addr(tbl_addr[3:0]), .tbl_wdata,
                      .s(ip_out[4]), .m(blk_out[5]));

  fir_filter u_fir (.clk, .rst_n, .en(cfg.block_en[BLK_FIR]), .up(cfg.fir_up),
                    .coef_we, .coef_addr(tbl_addr[5:0]), .coef_wdata(tbl_wdata[15:0]),
                    .s(ip_out[5]), .m(blk_out[6]));

  zpad u_zpad (.clk, .rst_n, .en(cfg.block_en[BLK_ZPAD]), .n(cfg.zpad_n), .m_len(cfg.zpad_m),
               .s(ip_out[6]), .m(blk_out[7]));

  q_offset u_offset (.clk, .rst_n, .en(cfg.block_en[BLK_OFFSET]), .n(cfg.off_n),
                     .s(ip_out[7]), .m(blk_out[8]));

  // ---------------- interposers and DMA routing ----------------
  logic [31:0]  ip_rd_data [N];
  logic [N-1:0] ip_rd_valid, ip_rd_ready_dma, ip_rd_last, ip_rd_pkt_last;
  logic [31:0]  ip_wr_data;
  logic [N-1:0] ip_wr_valid, ip_wr_ready;
  logic         ip_wr_last, ip_wr_pkt_last;

  for (genvar g = 0; g < N; g++) begin : g_ip
    interposer #(.W(32), .DEPTH(IP_DEPTH)) u_ip (
      .clk, .rst_n,
      .rd_en(cfg.ip_rd_en[g]), .wr_en(cfg.ip_wr_en[g]),
      .rd_irq_en(cfg.rd_irq_en[g]), .wr_irq_en(cfg.wr_irq_en[g]),
      .size(cfg.buf_size[IAW:0]),
      .s(blk_out[g]), .m(ip_out[g]),
      .dma_rd_data(ip_rd_data[g]), .dma_rd_valid(ip_rd_valid[g]), .dma_rd_ready(ip_rd_ready_dma[g]),
      .dma_rd_last(ip_rd_last[g]), .dma_rd_pkt_last(ip_rd_pkt_last[g]),
      .dma_wr_data(ip_wr_data), .dma_wr_valid(ip_wr_valid[g]), .dma_wr_ready(ip_wr_ready[g]),
      .dma_wr_last(ip_wr_last), .dma_wr_pkt_last(ip_wr_pkt_last),
      .rd_ready(ip_rd_ready[g]), .rd_count(ip_rd_count[g]), .rd_pkt_last(ip_rd_pkt_last_st[g]),
      .wr_free(ip_wr_free[g]), .irq(ip_irq[g])
    );
  end

  dma_router #(.N(N), .W(32)) u_router (
    .rd_sel(cfg.rd_sel), .wr_sel(cfg.wr_sel),
    .ip_rd_data, .ip_rd_valid, .ip_rd_ready(ip_rd_ready_dma), .ip_rd_last, .ip_rd_pkt_last,
    .ip_wr_data, .ip_wr_valid, .ip_wr_ready, .ip_wr_last, .ip_wr_pkt_last,
    .dma_rd_data, .dma_rd_valid, .dma_rd_ready, .dma_rd_last, .dma_rd_pkt_last,
    .dma_wr_data, .dma_wr_valid, .dma_wr_ready, .dma_wr_last, .dma_wr_pkt_last
  );

  // ---------------- ring buffer and DAC ----------------
  ring_buffer #(.DEPTH(RING_DEPTH)) u_ring (
    .clk, .rst_n, .s(ip_out[N-1]), .m(ring_out), .level(ring_level), .lasts_held(ring_lasts)
  );

  dac_pacer #(.LEVEL_W(RAW + 1)) u_pacer (
    .clk, .rst_n, .start, .div(cfg.dac_div), .prefill((RAW+1)'(cfg.prefill)),
    .level(ring_level), .lasts_held(ring_lasts), .s(ring_out),
    .dac_data(dac_code), .dac_strobe, .running(pacer_running), .done(tx_done),
    .underrun, .underrun_cnt
  );

  dac_model u_dac (
    .clk, .rst_n, .strobe(dac_strobe), .code(dac_code),
    .vout_i(dac_vout_i), .vout_q(dac_vout_q), .conversions(dac_conversions)
  );
endmodule
