// pkt_buffer: the packet buffer at the head of the transmit pipeline. The CPU
// writes the packet bytes through the register block; a start pulse then
// streams bytes 0..len-1 out, one per accepted word, in data[7:0], with last
// on the final byte. The memory is a plain array with a combinational read,
// so one byte can leave every clock cycle. The paper names the buffer and its
// role; the depth (256 bytes, enough for a 127-byte 802.15.4 PSDU) and the
// write port are this design's choice.
module pkt_buffer #(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_data,
  input  logic          start,
  input  logic [AW:0]   len,
  output logic          busy,
  axis_if.src           m
);
  logic [7:0]  mem [DEPTH];
  logic [AW:0] idx;
  logic        active;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  assign m.valid = active;
  assign m.data  = {24'd0, mem[idx[AW-1:0]]};
  assign m.last  = (idx == len - 1'b1);
  assign busy    = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      idx    <= '0;
    end else if (start && !active) begin
      active <= (len != 0);
      idx    <= '0;
    end else if (active && m.ready) begin
      if (m.last) active <= 1'b0;
      idx <= idx + 1'b1;
    end
  end
endmodule
