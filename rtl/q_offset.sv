// q_offset: block 8 ("Offset"), the O-QPSK quadrature offset. The I part of
// each sample passes at once; the Q part leaves n samples later, through an
// n-deep delay line that starts each packet at zero. After the packet's last
// input the block appends n more samples (I = 0, Q = the delayed tail), the
// final one carrying last, so no Q value is lost. Data moves straight
// through (combinational valid/ready) except during that flush, when the
// input is held; the whole delay line is cleared as the flush ends. en low
// or n = 0 makes the block transparent.
// The paper gives the rule "delays Q by N samples"; the flush at the end of a
// packet and MAX_N are this design's choice.
module q_offset #(
  parameter int unsigned MAX_N = 15
) (
  input logic       clk,
  input logic       rst_n,
  input logic       en,
  input logic [3:0] n,
  axis_if.snk       s,
  axis_if.src       m
);
  import radio_pkg::*;

  logic signed [SAMPLE_W-1:0] qd [MAX_N];
  logic [3:0] nn;
  logic [3:0] fl;
  logic       active;
  logic       flushing;
  logic signed [SAMPLE_W-1:0] q_out;
  iq_t        in_smp;

  assign nn       = (n > 4'(MAX_N)) ? 4'(MAX_N) : n;
  assign active   = en && (nn != 0);
  assign flushing = active && (fl != 0);
  assign in_smp   = iq_t'(s.data);
  assign q_out    = qd[nn - 4'd1];

  always_comb begin
    if (!active) begin
      m.valid = s.valid;
      m.data  = s.data;
      m.last  = s.last;
      s.ready = m.ready;
    end else if (flushing) begin
      m.valid = 1'b1;
      m.data  = {16'd0, q_out};
      m.last  = (fl == 4'd1);
      s.ready = 1'b0;
    end else begin
      m.valid = s.valid;
      m.data  = {in_smp.i, q_out};
      m.last  = 1'b0;
      s.ready = m.ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < MAX_N; k++) qd[k] <= '0;
      fl <= '0;
    end else if (active) begin
      if (flushing) begin
        if (m.ready) begin
          // shift during the flush; clear the whole line once it ends
          qd[0] <= '0;
          for (int k = 1; k < MAX_N; k++) qd[k] <= (fl == 4'd1) ? '0 : qd[k-1];
          fl <= fl - 4'd1;
        end
      end else if (s.valid && m.ready) begin
        qd[0] <= in_smp.q;
        for (int k = 1; k < MAX_N; k++) qd[k] <= qd[k-1];
        if (s.last) fl <= nn;
      end
    end
  end
endmodule
