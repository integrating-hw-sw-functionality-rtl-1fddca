// zpad: block 7, zero insertion. After every m-th sample of a packet it
// inserts n zero samples (I = Q = 0) before passing on the next one. The
// count restarts at each packet; no zeros follow the sample that carries
// last. Passing samples go straight through (combinational valid/ready);
// while zeros are owed the input is held and a zero word is offered. n = 0
// or m = 0, or en low, makes the block transparent.
// The paper gives the rule "inserts N zeros every M samples"; the restart
// per packet and the treatment of the last sample are this design's choice.
module zpad (
  input logic       clk,
  input logic       rst_n,
  input logic       en,
  input logic [7:0] n,
  input logic [7:0] m_len,
  axis_if.snk       s,
  axis_if.src       m
);
  logic [7:0] cnt;
  logic [7:0] zrem;
  logic       active;
  logic       zeroing;

  assign active  = en && (n != 0) && (m_len != 0);
  assign zeroing = active && (zrem != 0);

  assign m.valid = zeroing ? 1'b1  : s.valid;
  assign m.data  = zeroing ? '0    : s.data;
  assign m.last  = zeroing ? 1'b0  : s.last;
  assign s.ready = zeroing ? 1'b0  : m.ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      zrem <= '0;
    end else if (!active) begin
      cnt  <= '0;
      zrem <= '0;
    end else if (zeroing) begin
      if (m.ready) zrem <= zrem - 8'd1;
    end else if (s.valid && m.ready) begin
      if (s.last) begin
        cnt <= '0;
      end else if (cnt == m_len - 8'd1) begin
        cnt  <= '0;
        zrem <= n;
      end else begin
        cnt <= cnt + 8'd1;
      end
    end
  end
endmodule
