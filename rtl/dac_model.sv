// dac_model: behavioural model of the two-channel DAC at the end of the
// transmit pipeline; it is not synthesizable logic. On each clock edge with
// strobe high it converts the 16-bit two's-complement codes of I and Q to
// levels vout = VFS * code / 32768 and holds them until the next strobe
// (zero-order hold); conversions counts the samples converted. The paper
// shows only a block named DAC; resolution, full scale and hold behaviour
// are this model's choice.
module dac_model #(
  parameter real VFS = 1.0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           strobe,
  input  radio_pkg::iq_t code,
  output real            vout_i,
  output real            vout_q,
  output int unsigned    conversions
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vout_i      <= 0.0;
      vout_q      <= 0.0;
      conversions <= 0;
    end else if (strobe) begin
      vout_i      <= VFS * $itor(code.i) / 32768.0;
      vout_q      <= VFS * $itor(code.q) / 32768.0;
      conversions <= conversions + 1;
    end
  end
endmodule
