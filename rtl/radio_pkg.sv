// radio_pkg: types and constants shared by the IEEE 802.15.4 transmit
// accelerator. Every stage passes one 32-bit stream word. Symbol stages use
// the low bits of the word; sample stages pack a complex sample as
// {I[15:0], Q[15:0]}. The word width and the sample width are this design's
// choice; the nine-stage order and the 41-tap filter follow the paper.
package radio_pkg;

  localparam int unsigned WORD_W   = 32;
  localparam int unsigned SAMPLE_W = 16;
  localparam int unsigned NUM_BLK  = 9;   // Splitter .. Offset
  localparam int unsigned FIR_TAPS = 41;

  typedef logic [WORD_W-1:0] word_t;

  typedef struct packed {
    logic signed [SAMPLE_W-1:0] i;
    logic signed [SAMPLE_W-1:0] q;
  } iq_t;

  // Stage index of each block in the unified pipeline.
  typedef enum logic [3:0] {
    BLK_SPLITTER = 4'd0,
    BLK_PN9      = 4'd1,
    BLK_CLOCK    = 4'd2,
    BLK_DIFFENC  = 4'd3,
    BLK_CHIP     = 4'd4,
    BLK_MAPPER   = 4'd5,
    BLK_FIR      = 4'd6,
    BLK_ZPAD     = 4'd7,
    BLK_OFFSET   = 4'd8
  } blk_e;


  // Configuration held in the register block and fanned out to the stages.
  typedef struct packed {
    logic [NUM_BLK-1:0] block_en;     // per block: 1 process, 0 bypass
    logic [NUM_BLK-1:0] ip_rd_en;     // per interposer: divert stream to CPU
    logic [NUM_BLK-1:0] ip_wr_en;     // per interposer: take stream from CPU
    logic [NUM_BLK-1:0] rd_irq_en;
    logic [NUM_BLK-1:0] wr_irq_en;
    logic               done_irq_en;
    logic [8:0]         buf_size;     // interposer read-buffer fill level
    logic [3:0]         rd_sel;       // interposer on the DMA read stream
    logic [3:0]         wr_sel;       // interposer on the DMA write stream
    logic [8:0]         pkt_len;      // bytes in the packet buffer
    logic               split_bits;   // splitter: 0 nibbles, 1 bits
    logic [8:0]         pn9_seed;
    logic [2:0]         clk_sps;      // clock: outputs per input bit
    logic [3:0]         clk_step;     // clock: phase step per output
    logic [5:0]         chip_len;     // chip: chips per symbol
    logic               chip_pair;    // chip: two chips per output word
    logic [2:0]         fir_up;       // FIR: interpolation factor
    logic [7:0]         zpad_n;
    logic [7:0]         zpad_m;
    logic [3:0]         off_n;
    logic [15:0]        dac_div;      // clock cycles per DAC sample
    logic [10:0]        prefill;      // ring level that starts the DAC
  } cfg_t;

  // Chip sequence of symbol s for the 2450 MHz O-QPSK PHY of IEEE 802.15.4,
  // chip c0 in bit 0. Symbols 1..7 rotate symbol 0 by four chips per step;
  // symbols 8..15 are symbols 0..7 with every odd-indexed chip inverted.
  localparam logic [31:0] OQPSK2450_SYM0 = 32'b0111_0100_0100_1010_1100_0011_1001_1011;

  function automatic logic [31:0] oqpsk2450_chips(input logic [3:0] s);
    logic [31:0] c;
    int unsigned sh;
    sh = 4 * int'(s[2:0]);
    c  = (OQPSK2450_SYM0 << sh) | (OQPSK2450_SYM0 >> ((32 - sh) % 32));
    if (sh == 0) c = OQPSK2450_SYM0;
    if (s[3]) c = c ^ 32'hAAAA_AAAA;
    return c;
  endfunction

  // Saturate a wide signed value to a sample.
  function automatic logic signed [SAMPLE_W-1:0] sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[SAMPLE_W-1:0];
  endfunction

endpackage
