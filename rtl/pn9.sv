// pn9: block 1, data whitening. Each 1-bit symbol is XORed with the next bit
// of the PN9 sequence x^9 + x^5 + 1 (the whitening sequence of the IEEE
// 802.15.4 SUN FSK PHY); with the all-ones seed the sequence begins
// 0xFF, 0xE1, ... read LSB first. The generator is a 9-bit Fibonacci LFSR:
// the output bit is lfsr[0], and lfsr[0]^lfsr[5] shifts in at the top, so
// b(n+9) = b(n) ^ b(n+5). It restarts from the seed at reset, on clr (start
// of a transmission) and after each packet's last word. The stage is
// combinational (valid/ready pass straight through); en low bypasses it.
// The paper gives the function and the name PN9; the polynomial, bit order
// and restart points are taken from the standard and are this design's
// reading of it.
module pn9 (
  input logic       clk,
  input logic       rst_n,
  input logic       en,
  input logic       clr,
  input logic [8:0] seed,
  axis_if.snk       s,
  axis_if.src       m
);
  logic [8:0] lfsr;

  assign m.valid = s.valid;
  assign s.ready = m.ready;
  assign m.last  = s.last;
  assign m.data  = en ? (s.data ^ {31'd0, lfsr[0]}) : s.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= 9'h1FF;
    end else if (clr) begin
      lfsr <= seed;
    end else if (en && s.valid && m.ready) begin
      if (s.last) lfsr <= seed;
      else        lfsr <= {lfsr[0] ^ lfsr[5], lfsr[8:1]};
    end
  end
endmodule
