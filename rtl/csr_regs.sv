// csr_regs: the accelerator's memory-mapped registers. The CPU configures
// every stage here, loads the packet and the stage tables, starts a
// transmission and reads status; the block also forms the interrupt line.
//
// Bus: word addresses, one access per cycle. A write takes effect on the
// clock edge with wr high; a read returns rdata on the cycle after rd.
//
//   0x000 CTRL       W   bit 0: start (one-cycle pulse to the pipeline)
//   0x001 STATUS     R   0 busy, 1 done (sticky; write 1 to clear), 2 underrun,
//                        31:16 underrun count
//   0x002 BLOCK_EN   RW  bit k enables block k (0 Splitter .. 8 Offset)
//   0x003 IP_RD_EN   RW  bit k diverts interposer k's input to the CPU
//   0x004 IP_WR_EN   RW  bit k feeds interposer k's output from the CPU
//   0x005 IRQ_EN     RW  8:0 read irq, 24:16 write irq, 31 done irq
//   0x006 BUF_SIZE   RW  interposer read-buffer size in words (1..256)
//   0x007 DMA_SEL    RW  3:0 read interposer, 11:8 write interposer
//   0x008 PKT_LEN    RW  packet length in bytes
//   0x009 SPLIT_CFG  RW  bit 0: 1 = bits, 0 = nibbles
//   0x00A PN9_SEED   RW  8:0
//   0x00B CLK_CFG    RW  2:0 outputs per bit, 11:8 phase step
//   0x00C CHIP_CFG   RW  5:0 chips per symbol, 8 two chips per word
//   0x00D FIR_UP     RW  2:0 interpolation factor
//   0x00E ZPAD_CFG   RW  7:0 N zeros, 15:8 every M samples
//   0x00F OFFSET_N   RW  3:0 Q delay in samples
//   0x010 DAC_DIV    RW  15:0 clock cycles per DAC sample
//   0x011 PREFILL    RW  10:0 ring level that starts the DAC
//   0x012 IP_STATUS  R   8:0 read bank ready, 24:16 write bank free
//   0x013 SEL_STATUS R   8:0 word count of the selected read bank,
//                        16 that bank ends the packet
//   0x014 IRQ_STATUS R   8:0 interposer irq, 31 done irq
//   0x040..0x04F     W   chip table, symbol 0..15
//   0x050..0x05F     W   mapper table, entry 0..15, {I, Q}
//   0x080..0x0A8     W   FIR coefficients 0..40
//   0x100..0x1FF     W   packet buffer bytes
//
// Reset values select the 2450 MHz O-QPSK chain (Splitter, Chip, Mapper,
// FIR, Zpad, Offset), with all interposers in bypass. The paper says only
// that stages are configured "via memory mapped I/O" and that the CPU reads
// "status registers"; the map, the bus and the reset values are this
// design's choice.
module csr_regs (
  input  logic                  clk,
  input  logic                  rst_n,
  // register bus
  input  logic [9:0]            addr,
  input  logic                  wr,
  input  logic [31:0]           wdata,
  input  logic                  rd,
  output logic [31:0]           rdata,
  // configuration and controls
  output radio_pkg::cfg_t       cfg,
  output logic                  start,
  output logic                  chip_we,
  output logic                  map_we,
  output logic                  coef_we,
  output logic                  pkt_we,
  output logic [7:0]            tbl_addr,
  output logic [31:0]           tbl_wdata,
  // status
  input  logic                  busy,
  input  logic                  done,
  input  logic                  underrun,
  input  logic [15:0]           underrun_cnt,
  input  logic [radio_pkg::NUM_BLK-1:0] ip_rd_ready,
  input  logic [radio_pkg::NUM_BLK-1:0] ip_wr_free,
  input  logic [radio_pkg::NUM_BLK-1:0] ip_irq,
  input  logic [8:0]            sel_rd_count,
  input  logic                  sel_rd_pkt_last,
  output logic                  irq
);
  import radio_pkg::*;

  logic done_flag;
  logic done_irq;

  assign chip_we   = wr && (addr[9:4] == 6'h04);
  assign map_we    = wr && (addr[9:4] == 6'h05);
  assign coef_we   = wr && (addr >= 10'h080) && (addr <= 10'h0A8);
  assign pkt_we    = wr && (addr[9:8] == 2'b01);
  assign tbl_addr  = (addr[9:8] == 2'b01) ? addr[7:0] : {2'b00, addr[5:0]};
  assign tbl_wdata = wdata;
  assign done_irq  = done_flag && cfg.done_irq_en;
  assign irq       = (|ip_irq) || done_irq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg             <= '0;
      cfg.block_en    <= 9'b1_1111_0001;
      cfg.buf_size    <= 9'd256;
      cfg.rd_sel      <= 4'hF;
      cfg.wr_sel      <= 4'hF;
      cfg.pn9_seed    <= 9'h1FF;
      cfg.clk_sps     <= 3'd4;
      cfg.clk_step    <= 4'd1;
      cfg.chip_len    <= 6'd32;
      cfg.chip_pair   <= 1'b1;
      cfg.fir_up      <= 3'd4;
      cfg.off_n       <= 4'd2;
      cfg.dac_div     <= 16'd1;
      cfg.prefill     <= 11'd64;
      start           <= 1'b0;
      done_flag       <= 1'b0;
      rdata           <= '0;
    end else begin
      start <= 1'b0;
      if (done) done_flag <= 1'b1;
      if (wr) begin
        case (addr)
          10'h000: if (wdata[0]) begin start <= 1'b1; done_flag <= 1'b0; end
          10'h001: if (wdata[1]) done_flag <= 1'b0;
          10'h002: cfg.block_en  <= wdata[NUM_BLK-1:0];
          10'h003: cfg.ip_rd_en  <= wdata[NUM_BLK-1:0];
          10'h004: cfg.ip_wr_en  <= wdata[NUM_BLK-1:0];
          10'h005: begin
            cfg.rd_irq_en   <= wdata[8:0];
            cfg.wr_irq_en   <= wdata[24:16];
            cfg.done_irq_en <= wdata[31];
          end
          10'h006: cfg.buf_size   <= wdata[8:0];
          10'h007: begin cfg.rd_sel <= wdata[3:0]; cfg.wr_sel <= wdata[11:8]; end
          10'h008: cfg.pkt_len    <= wdata[8:0];
          10'h009: cfg.split_bits <= wdata[0];
          10'h00A: cfg.pn9_seed   <= wdata[8:0];
          10'h00B: begin cfg.clk_sps <= wdata[2:0]; cfg.clk_step <= wdata[11:8]; end
          10'h00C: begin cfg.chip_len <= wdata[5:0]; cfg.chip_pair <= wdata[8]; end
          10'h00D: cfg.fir_up     <= wdata[2:0];
          10'h00E: begin cfg.zpad_n <= wdata[7:0]; cfg.zpad_m <= wdata[15:8]; end
          10'h00F: cfg.off_n      <= wdata[3:0];
          10'h010: cfg.dac_div    <= wdata[15:0];
          10'h011: cfg.prefill    <= wdata[10:0];
          default: ;
        endcase
      end
      if (rd) begin
        case (addr)
          10'h001: rdata <= {underrun_cnt, 13'd0, underrun, done_flag, busy};
          10'h002: rdata <= 32'(cfg.block_en);
          10'h003: rdata <= 32'(cfg.ip_rd_en);
          10'h004: rdata <= 32'(cfg.ip_wr_en);
          10'h005: rdata <= {cfg.done_irq_en, 6'd0, cfg.wr_irq_en, 7'd0, cfg.rd_irq_en};
          10'h006: rdata <= 32'(cfg.buf_size);
          10'h007: rdata <= {20'd0, cfg.wr_sel, 4'd0, cfg.rd_sel};
          10'h008: rdata <= 32'(cfg.pkt_len);
          10'h009: rdata <= 32'(cfg.split_bits);
          10'h00A: rdata <= 32'(cfg.pn9_seed);
          10'h00B: rdata <= {20'd0, cfg.clk_step, 5'd0, cfg.clk_sps};
          10'h00C: rdata <= {23'd0, cfg.chip_pair, 2'd0, cfg.chip_len};
          10'h00D: rdata <= 32'(cfg.fir_up);
          10'h00E: rdata <= {16'd0, cfg.zpad_m, cfg.zpad_n};
          10'h00F: rdata <= 32'(cfg.off_n);
          10'h010: rdata <= 32'(cfg.dac_div);
          10'h011: rdata <= 32'(cfg.prefill);
          10'h012: rdata <= {7'd0, ip_wr_free, 7'd0, ip_rd_ready};
          10'h013: rdata <= {15'd0, sel_rd_pkt_last, 7'd0, sel_rd_count};
          10'h014: rdata <= {done_irq, 22'd0, ip_irq};
          default: rdata <= '0;
        endcase
      end
    end
  end
endmodule
