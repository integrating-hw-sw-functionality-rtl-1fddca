// ring_buffer: the FIFO between the last interposer and the DAC. It absorbs
// the uneven delivery of samples when the CPU is in the loop, so the DAC can
// take them at a fixed rate. DEPTH words of data plus the last flag are held
// in a circular array with read and write pointers; level reports the fill
// and lasts_held how many packet ends are inside (the DAC interface uses it
// to start a packet shorter than its prefill level). Input ready is "not
// full", output valid is "not empty"; a word written is readable on the next
// cycle. The paper adds a ring buffer at this point; its depth and
// interface are this design's choice.
module ring_buffer #(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  axis_if.snk         s,
  axis_if.src         m,
  output logic [AW:0] level,
  output logic [AW:0] lasts_held
);
  import radio_pkg::*;

  word_t         mem      [DEPTH];
  logic [DEPTH-1:0] last_mem;
  logic [AW-1:0] wp, rp;
  logic          push, pop;

  assign s.ready = (level != (AW+1)'(DEPTH));
  assign m.valid = (level != 0);
  assign m.data  = mem[rp];
  assign m.last  = last_mem[rp];
  assign push    = s.valid && s.ready;
  assign pop     = m.valid && m.ready;

  always_ff @(posedge clk) begin
    if (push) begin
      mem[wp]      <= s.data;
      last_mem[wp] <= s.last;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp         <= '0;
      rp         <= '0;
      level      <= '0;
      lasts_held <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      level      <= level + (AW+1)'(push) - (AW+1)'(pop);
      lasts_held <= lasts_held + (AW+1)'(push && s.last) - (AW+1)'(pop && m.last);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) level <= (AW+1)'(DEPTH));
endmodule
