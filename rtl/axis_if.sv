// axis_if: the AXI-Stream style link between accelerator stages (data,
// valid, ready, last). A word moves on a clock edge where valid and ready are
// both high; last marks the final word of a packet. The paper connects its
// blocks and interposers with AXI-Stream; the single 32-bit data field and
// the omission of the other AXI-Stream sidebands are this design's choice.
// The assertion checks the handshake rule that a source holding valid keeps
// its word stable until it is taken.
interface axis_if (
  input logic clk,
  input logic rst_n
);
  import radio_pkg::*;

  word_t data;
  logic  valid;
  logic  ready;
  logic  last;

  modport src (output data, valid, last, input ready);
  modport snk (input data, valid, last, output ready);

  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (valid && !ready) |=> (valid && $stable(data) && $stable(last));
  endproperty
  a_hold: assert property (p_hold) else $error("axis_if: word changed while stalled");

endinterface
