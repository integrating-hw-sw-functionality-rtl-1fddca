// chip_seq: block 4 ("Chip"), symbol-to-chip spreading. Each input symbol
// (data[3:0]) selects one of SYMBOLS chip sequences held in a table the CPU
// can rewrite; the block then emits the first len chips of that sequence,
// chip c0 first. With pair = 1 it emits two chips per word, {c(2k+1), c(2k)}
// in data[1:0] (the even chip for I, the odd chip for Q in O-QPSK), else one
// chip per word in data[0]. One word leaves per cycle and the next symbol is
// accepted as the final word of the current one leaves. At reset the table
// holds the 32-chip sequences of the 2450 MHz O-QPSK PHY; the 16-chip
// (780/915 MHz O-QPSK) and 15-chip (BPSK) sequences are loaded by software.
// The paper gives the function and the lengths 32, 16 and 15; the table
// format and the programmable table are this design's choice.
module chip_seq #(
  parameter int unsigned MAX_CHIPS = 32,
  parameter int unsigned SYMBOLS   = 16
) (
  input logic        clk,
  input logic        rst_n,
  input logic        en,
  input logic [5:0]  len,
  input logic        pair,
  input logic        tbl_we,
  input logic [3:0]  tbl_addr,
  input logic [31:0] tbl_wdata,
  axis_if.snk        s,
  axis_if.src        m
);
  import radio_pkg::*;

  logic [MAX_CHIPS-1:0] table_q [SYMBOLS];
  logic [MAX_CHIPS-1:0] seq;
  logic                 last_q;
  logic                 full;
  logic [5:0]           idx;
  logic [5:0]           stride;
  logic                 final_w;
  logic                 s_rdy_int;
  logic [$clog2(MAX_CHIPS)-1:0] i0, i1;

  assign i0 = idx[$clog2(MAX_CHIPS)-1:0];
  assign i1 = i0 + 1'b1;

  assign stride    = pair ? 6'd2 : 6'd1;
  assign final_w   = (idx + stride >= len);
  assign s_rdy_int = !full || (m.ready && final_w);

  assign s.ready = en ? s_rdy_int : m.ready;
  assign m.valid = en ? full : s.valid;
  assign m.data  = en ? (pair ? {30'd0, seq[i1], seq[i0]} : {31'd0, seq[i0]}) : s.data;
  assign m.last  = en ? (last_q && final_w) : s.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < SYMBOLS; k++)
        table_q[k] <= MAX_CHIPS'(oqpsk2450_chips(4'(k)));
    end else if (tbl_we) begin
      table_q[tbl_addr] <= tbl_wdata[MAX_CHIPS-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full   <= 1'b0;
      idx    <= '0;
      seq    <= '0;
      last_q <= 1'b0;
    end else if (en) begin
      if (full && m.ready) begin
        idx <= final_w ? 6'd0 : idx + stride;
        if (final_w) full <= 1'b0;
      end
      if (s.valid && s_rdy_int) begin
        seq    <= table_q[s.data[3:0]];
        last_q <= s.last;
        full   <= 1'b1;
        idx    <= '0;
      end
    end
  end
endmodule
