// dma_router: joins the interposers to the single DMA channel. The DMA read
// stream is taken from interposer rd_sel and the DMA write stream is steered
// to interposer wr_sel; every other interposer sees ready/valid low on that
// side. A select of N or more connects nothing (the reads show no data and
// writes are not accepted). Both paths are combinational.
// The paper's system diagram shows all interposers sharing one DMA device and
// a single CPU working on one contiguous section; the select registers and
// this multiplexer form are this design's choice.
module dma_router #(
  parameter int unsigned N = 9,
  parameter int unsigned W = 32
) (
  input  logic [3:0]   rd_sel,
  input  logic [3:0]   wr_sel,
  // interposer side, read
  input  logic [W-1:0] ip_rd_data     [N],
  input  logic [N-1:0] ip_rd_valid,
  output logic [N-1:0] ip_rd_ready,
  input  logic [N-1:0] ip_rd_last,
  input  logic [N-1:0] ip_rd_pkt_last,
  // interposer side, write
  output logic [W-1:0] ip_wr_data,
  output logic [N-1:0] ip_wr_valid,
  input  logic [N-1:0] ip_wr_ready,
  output logic         ip_wr_last,
  output logic         ip_wr_pkt_last,
  // DMA side
  output logic [W-1:0] dma_rd_data,
  output logic         dma_rd_valid,
  input  logic         dma_rd_ready,
  output logic         dma_rd_last,
  output logic         dma_rd_pkt_last,
  input  logic [W-1:0] dma_wr_data,
  input  logic         dma_wr_valid,
  output logic         dma_wr_ready,
  input  logic         dma_wr_last,
  input  logic         dma_wr_pkt_last
);
  logic rd_ok, wr_ok;
  assign rd_ok = (rd_sel < 4'(N));
  assign wr_ok = (wr_sel < 4'(N));

  always_comb begin
    dma_rd_data     = '0;
    dma_rd_valid    = 1'b0;
    dma_rd_last     = 1'b0;
    dma_rd_pkt_last = 1'b0;
    ip_rd_ready     = '0;
    if (rd_ok) begin
      dma_rd_data     = ip_rd_data[rd_sel];
      dma_rd_valid    = ip_rd_valid[rd_sel];
      dma_rd_last     = ip_rd_last[rd_sel];
      dma_rd_pkt_last = ip_rd_pkt_last[rd_sel];
      ip_rd_ready[rd_sel] = dma_rd_ready;
    end
    ip_wr_data     = dma_wr_data;
    ip_wr_last     = dma_wr_last;
    ip_wr_pkt_last = dma_wr_pkt_last;
    ip_wr_valid    = '0;
    dma_wr_ready   = 1'b0;
    if (wr_ok) begin
      ip_wr_valid[wr_sel] = dma_wr_valid;
      dma_wr_ready        = ip_wr_ready[wr_sel];
    end
  end
endmodule
