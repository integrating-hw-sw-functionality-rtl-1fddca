// diffenc: block 3, the differential encoder of the BPSK PHYs. Each 1-bit
// symbol leaves as e(n) = d(n) XOR e(n-1), with e(-1) = 0 at the start of
// every packet (reset, clr, and after a packet's last word). The stage is
// combinational in the data path and passes valid/ready straight through;
// en low bypasses it. The paper names the block; the encoding rule and the
// zero initial state are those of the IEEE 802.15.4 BPSK PHY.
module diffenc (
  input logic clk,
  input logic rst_n,
  input logic en,
  input logic clr,
  axis_if.snk s,
  axis_if.src m
);
  logic prev;
  logic e;

  assign e       = s.data[0] ^ prev;
  assign m.valid = s.valid;
  assign s.ready = m.ready;
  assign m.last  = s.last;
  assign m.data  = en ? {31'd0, e} : s.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          prev <= 1'b0;
    else if (clr)                        prev <= 1'b0;
    else if (en && s.valid && m.ready)   prev <= s.last ? 1'b0 : e;
  end
endmodule
