// fir_filter: block 6, the 41-tap pulse-shaping filter. I and Q pass through
// the same real coefficients (signed, COEF_FRAC fraction bits), loaded by the
// CPU so that one filter serves the half-sine and both raised-cosine shapes.
// With interpolation factor up = L the filter runs on the zero-stuffed
// stream: each input sample enters the delay line followed by L-1 zeros, and
// every entry produces one output, so L samples leave per input. Each output
// is the full 41-tap sum, rounded, shifted right by COEF_FRAC and saturated
// to 16 bits, registered once (one cycle of latency, one output per cycle).
// Coefficients reset to zero and must be loaded before use.
// After a packet's last output the delay line is cleared, so packets do not
// overlap; the filter tail of the last sample is not flushed.
// The paper gives 41 taps and the shaping role. Running the filter on the
// interpolated stream follows the paper's rate plot, where the sample rate
// rises fourfold at the filter output; the coefficient format, rounding and
// the unflushed tail are this design's choice.
module fir_filter #(
  parameter int unsigned TAPS      = radio_pkg::FIR_TAPS,
  parameter int unsigned COEF_W    = 16,
  parameter int unsigned COEF_FRAC = 15
) (
  input logic              clk,
  input logic              rst_n,
  input logic              en,
  input logic [2:0]        up,
  input logic              coef_we,
  input logic [5:0]        coef_addr,
  input logic [COEF_W-1:0] coef_wdata,
  axis_if.snk              s,
  axis_if.src              m
);
  import radio_pkg::*;

  logic signed [COEF_W-1:0] coef [TAPS];
  iq_t   sr      [TAPS];
  iq_t   sr_next [TAPS];
  iq_t   in_smp;
  iq_t   y;
  logic  [2:0] zeros_left;
  logic        pend_last;
  logic        ov, ol;
  iq_t         od;
  logic        can_step, step_in, step_zero, out_last;
  logic signed [47:0] acc_i, acc_q;

  assign can_step  = !ov || m.ready;
  assign step_zero = (zeros_left != 0) && can_step;
  assign step_in   = s.valid && can_step && (zeros_left == 0);
  assign in_smp    = step_in ? iq_t'(s.data) : '0;
  assign out_last  = step_in ? (s.last && up <= 3'd1) : (pend_last && zeros_left == 3'd1);

  always_comb begin
    sr_next[0] = in_smp;
    for (int k = 1; k < TAPS; k++) sr_next[k] = sr[k-1];
    acc_i = 48'sd0;
    acc_q = 48'sd0;
    for (int k = 0; k < TAPS; k++) begin
      acc_i += 48'(coef[k] * sr_next[k].i);
      acc_q += 48'(coef[k] * sr_next[k].q);
    end
    y.i = sat16((acc_i + (48'sd1 <<< (COEF_FRAC - 1))) >>> COEF_FRAC);
    y.q = sat16((acc_q + (48'sd1 <<< (COEF_FRAC - 1))) >>> COEF_FRAC);
  end

  assign s.ready = en ? (can_step && zeros_left == 0) : m.ready;
  assign m.valid = en ? ov : s.valid;
  assign m.data  = en ? od : s.data;
  assign m.last  = en ? ol : s.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) coef[k] <= '0;
    end else if (coef_we && coef_addr < 6'(TAPS)) begin
      coef[coef_addr] <= coef_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) sr[k] <= '0;
      zeros_left <= '0;
      pend_last  <= 1'b0;
      ov <= 1'b0;
      ol <= 1'b0;
      od <= '0;
    end else if (en) begin
      if (step_in || step_zero) begin
        for (int k = 0; k < TAPS; k++) sr[k] <= out_last ? '0 : sr_next[k];
        ov <= 1'b1;
        od <= y;
        ol <= out_last;
        if (step_in) begin
          zeros_left <= (up <= 3'd1) ? 3'd0 : up - 3'd1;
          pend_last  <= s.last;
        end else begin
          zeros_left <= zeros_left - 3'd1;
        end
      end else if (m.ready) begin
        ov <= 1'b0;
      end
    end
  end
endmodule
