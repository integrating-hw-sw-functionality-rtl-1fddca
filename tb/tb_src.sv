// tb_src: testbench stream source. Words queued with push() are offered on
// the stream in order; before each new word the source idles for a random
// cycle with probability gap_pct percent. Once valid is raised it is held,
// with the word stable, until the sink takes it.
module tb_src (
  input logic        clk,
  input logic        rst_n,
  input int unsigned gap_pct,
  axis_if.src        m
);
  import radio_pkg::*;

  word_t dq[$];
  logic  lq[$];
  logic  v, l;
  word_t d;

  assign m.valid = v;
  assign m.data  = d;
  assign m.last  = l;

  task automatic push(input word_t data, input logic last);
    dq.push_back(data);
    lq.push_back(last);
  endtask

  function automatic int pending();
    return dq.size() + (v ? 1 : 0);
  endfunction

  always @(posedge clk) begin
    automatic logic nv = v;
    if (!rst_n) begin
      v <= 1'b0;
      d <= '0;
      l <= 1'b0;
    end else begin
      if (v && m.ready) nv = 1'b0;
      if (!nv && dq.size() > 0 && $urandom_range(99) >= gap_pct) begin
        d  <= dq.pop_front();
        l  <= lq.pop_front();
        nv = 1'b1;
      end
      v <= nv;
    end
  end
endmodule
