// tb_sink: testbench stream sink. It records every word taken (data, last
// and the cycle it was taken in) and drops ready on a random stall_pct
// percent of cycles.
module tb_sink (
  input logic        clk,
  input logic        rst_n,
  input int unsigned stall_pct,
  axis_if.snk        s
);
  import radio_pkg::*;

  word_t       dq[$];
  logic        lq[$];
  longint      tq[$];
  logic        r;
  longint      cyc;

  assign s.ready = r;

  task automatic clear();
    dq.delete();
    lq.delete();
    tq.delete();
  endtask

  always @(posedge clk) begin
    if (!rst_n) begin
      r   <= 1'b0;
      cyc <= 0;
    end else begin
      cyc <= cyc + 1;
      if (s.valid && r) begin
        dq.push_back(s.data);
        lq.push_back(s.last);
        tq.push_back(cyc);
      end
      r <= ($urandom_range(99) >= stall_pct);
    end
  end
endmodule
