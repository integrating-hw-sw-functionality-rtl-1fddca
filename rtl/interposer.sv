// interposer: the device placed after each accelerator block that lets the
// CPU take data out of the pipeline, or put data into it, through DMA.
//
// Structure. An input demultiplexer (select rd_en) sends the incoming stream
// either straight on (bypass) or into a read double buffer; an output
// multiplexer (select wr_en) takes the outgoing stream either from the bypass
// path or from a write double buffer. Each double buffer has two banks of
// DEPTH words, so the pipeline side can fill (or drain) one bank while the
// DMA side drains (or fills) the other.
//
// Read direction. Pipeline words are written into the filling bank. The bank
// is handed to the DMA side when it holds `size` words or when a word with
// last arrives; its word count and a packet-last flag go with it. The DMA
// read port then streams the bank out (dma_rd_last on its final word,
// dma_rd_pkt_last with it if the bank ends the packet) and frees it. While
// both banks wait for the DMA the input is stalled.
//
// Write direction. DMA words fill the free bank; dma_wr_last closes the chunk
// (a full bank closes it too) and dma_wr_pkt_last marks the chunk that ends
// the packet. Closed banks are drained into the pipeline in order, the final
// word of the packet-ending chunk carrying last.
//
// Interrupt. irq is high while (rd_irq_en and a read bank waits) or
// (wr_irq_en and a write bank is free). rd_ready, rd_count, rd_pkt_last and
// wr_free are the status bits the CPU polls before blocking on the interrupt.
//
// The double buffers, the (de)multiplexer pair and the read/write interrupt
// enables are from the paper's interposer diagram; the separate selects for
// the two multiplexers, the bank hand-over rules and the port protocol are
// this design's choice. rd_en and wr_en high together is the paper's
// "interposer enabled". Memories are arrays with a combinational read.
module interposer #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         rd_en,
  input  logic         wr_en,
  input  logic         rd_irq_en,
  input  logic         wr_irq_en,
  input  logic [AW:0]  size,
  axis_if.snk          s,
  axis_if.src          m,
  // DMA read stream (pipeline to CPU)
  output logic [W-1:0] dma_rd_data,
  output logic         dma_rd_valid,
  input  logic         dma_rd_ready,
  output logic         dma_rd_last,
  output logic         dma_rd_pkt_last,
  // DMA write stream (CPU to pipeline)
  input  logic [W-1:0] dma_wr_data,
  input  logic         dma_wr_valid,
  output logic         dma_wr_ready,
  input  logic         dma_wr_last,
  input  logic         dma_wr_pkt_last,
  // status and interrupt
  output logic         rd_ready,
  output logic [AW:0]  rd_count,
  output logic         rd_pkt_last,
  output logic         wr_free,
  output logic         irq
);
  // ---------------- read double buffer ----------------
  logic [W-1:0] rmem [2][DEPTH];
  logic [1:0]   r_full;
  logic [AW:0]  r_cnt  [2];
  logic [1:0]   r_plast;
  logic         r_fill_b, r_drain_b;
  logic [AW:0]  r_fill_n;
  logic [AW:0]  r_drain_i;
  logic [AW:0]  size_eff;
  logic         r_push, r_close, r_pop;

  assign size_eff = (size == 0 || size > (AW+1)'(DEPTH)) ? (AW+1)'(DEPTH) : size;
  assign r_push   = rd_en && s.valid && !r_full[r_fill_b];
  assign r_close  = r_push && (s.last || (r_fill_n + 1'b1 == size_eff));

  assign dma_rd_valid    = r_full[r_drain_b];
  assign dma_rd_data     = rmem[r_drain_b][r_drain_i[AW-1:0]];
  assign dma_rd_last     = (r_drain_i + 1'b1 == r_cnt[r_drain_b]);
  assign dma_rd_pkt_last = dma_rd_last && r_plast[r_drain_b];
  assign r_pop           = dma_rd_valid && dma_rd_ready;

  assign rd_ready    = r_full[r_drain_b];
  assign rd_count    = r_full[r_drain_b] ? r_cnt[r_drain_b] : '0;
  assign rd_pkt_last = r_full[r_drain_b] && r_plast[r_drain_b];

  always_ff @(posedge clk) begin
    if (r_push) rmem[r_fill_b][r_fill_n[AW-1:0]] <= s.data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_full    <= '0;
      r_cnt[0]  <= '0;
      r_cnt[1]  <= '0;
      r_plast   <= '0;
      r_fill_b  <= 1'b0;
      r_drain_b <= 1'b0;
      r_fill_n  <= '0;
      r_drain_i <= '0;
    end else begin
      if (r_push) begin
        if (r_close) begin
          r_full[r_fill_b]  <= 1'b1;
          r_cnt[r_fill_b]   <= r_fill_n + 1'b1;
          r_plast[r_fill_b] <= s.last;
          r_fill_b          <= ~r_fill_b;
          r_fill_n          <= '0;
        end else begin
          r_fill_n <= r_fill_n + 1'b1;
        end
      end
      if (r_pop) begin
        if (dma_rd_last) begin
          r_full[r_drain_b] <= 1'b0;
          r_drain_b         <= ~r_drain_b;
          r_drain_i         <= '0;
        end else begin
          r_drain_i <= r_drain_i + 1'b1;
        end
      end
    end
  end

  // ---------------- write double buffer ----------------
  logic [W-1:0] wmem [2][DEPTH];
  logic [1:0]   w_full;
  logic [AW:0]  w_cnt  [2];
  logic [1:0]   w_plast;
  logic         w_fill_b, w_drain_b;
  logic [AW:0]  w_fill_n;
  logic [AW:0]  w_drain_i;
  logic         w_push, w_close, w_pop, w_final;

  assign dma_wr_ready = !w_full[w_fill_b];
  assign w_push       = dma_wr_valid && dma_wr_ready;
  assign w_close      = w_push && (dma_wr_last || (w_fill_n + 1'b1 == (AW+1)'(DEPTH)));
  assign w_final      = (w_drain_i + 1'b1 == w_cnt[w_drain_b]);
  assign wr_free      = !w_full[w_fill_b];

  always_ff @(posedge clk) begin
    if (w_push) wmem[w_fill_b][w_fill_n[AW-1:0]] <= dma_wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_full    <= '0;
      w_cnt[0]  <= '0;
      w_cnt[1]  <= '0;
      w_plast   <= '0;
      w_fill_b  <= 1'b0;
      w_drain_b <= 1'b0;
      w_fill_n  <= '0;
      w_drain_i <= '0;
    end else begin
      if (w_push) begin
        if (w_close) begin
          w_full[w_fill_b]  <= 1'b1;
          w_cnt[w_fill_b]   <= w_fill_n + 1'b1;
          w_plast[w_fill_b] <= dma_wr_pkt_last;
          w_fill_b          <= ~w_fill_b;
          w_fill_n          <= '0;
        end else begin
          w_fill_n <= w_fill_n + 1'b1;
        end
      end
      if (w_pop) begin
        if (w_final) begin
          w_full[w_drain_b] <= 1'b0;
          w_drain_b         <= ~w_drain_b;
          w_drain_i         <= '0;
        end else begin
          w_drain_i <= w_drain_i + 1'b1;
        end
      end
    end
  end

  // ---------------- (de)multiplexers ----------------
  always_comb begin
    // input demultiplexer
    s.ready = rd_en ? !r_full[r_fill_b] : (!wr_en && m.ready);
    // output multiplexer
    if (wr_en) begin
      m.valid = w_full[w_drain_b];
      m.data  = wmem[w_drain_b][w_drain_i[AW-1:0]];
      m.last  = w_final && w_plast[w_drain_b];
    end else begin
      m.valid = !rd_en && s.valid;
      m.data  = s.data;
      m.last  = s.last;
    end
  end
  assign w_pop = wr_en && m.valid && m.ready;

  assign irq = (rd_irq_en && rd_ready) || (wr_irq_en && wr_free);

  // A bank is never handed over empty.
  a_rcnt: assert property (@(posedge clk) disable iff (!rst_n) dma_rd_valid |-> r_cnt[r_drain_b] != 0);
endmodule
