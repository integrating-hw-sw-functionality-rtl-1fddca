// splitter: block 0 of the pipeline. It splits each input byte into symbols:
// two 4-bit symbols (O-QPSK PHYs) or eight 1-bit symbols (BPSK and GFSK
// PHYs), least significant first, each in the low bits of an output word. The
// last flag of a byte goes with its final symbol. One symbol leaves per cycle;
// a new byte is taken in the cycle its predecessor's final symbol leaves, so
// there is no bubble. With en low the block is bypassed (output = input).
// The function is the paper's; the LSB-first order is that of IEEE 802.15.4.
module splitter (
  input logic clk,
  input logic rst_n,
  input logic en,
  input logic bits_mode,
  axis_if.snk s,
  axis_if.src m
);
  import radio_pkg::*;

  logic [7:0] byte_q;
  logic       last_q;
  logic       full;
  logic [2:0] cnt;
  logic [2:0] final_idx;
  logic       final_sym;
  word_t      sym;

  assign final_idx = bits_mode ? 3'd7 : 3'd1;
  assign final_sym = (cnt == final_idx);

  always_comb begin
    if (bits_mode) sym = {31'd0, byte_q[cnt]};
    else           sym = {28'd0, (cnt[0] ? byte_q[7:4] : byte_q[3:0])};
  end

  logic s_rdy_int;
  assign s_rdy_int = !full || (m.ready && final_sym);

  assign s.ready = en ? s_rdy_int : m.ready;
  assign m.valid = en ? full      : s.valid;
  assign m.data  = en ? sym       : s.data;
  assign m.last  = en ? (last_q && final_sym) : s.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full   <= 1'b0;
      cnt    <= '0;
      byte_q <= '0;
      last_q <= 1'b0;
    end else if (en) begin
      if (full && m.ready) begin
        cnt <= final_sym ? 3'd0 : cnt + 3'd1;
        if (final_sym) full <= 1'b0;
      end
      if (s.valid && s_rdy_int) begin
        byte_q <= s.data[7:0];
        last_q <= s.last;
        full   <= 1'b1;
        cnt    <= '0;
      end
    end
  end
endmodule
