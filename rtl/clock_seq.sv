// clock_seq: block 2 ("Clock"), the GFSK sequence generator. For every input
// bit it emits sps phase indices that walk round a circle of 2^PHASE_BITS
// positions: counter-clockwise (phase + step) for a 1, clockwise
// (phase - step) for a 0. The phase carries over from symbol to symbol, so a
// mapper table of cos/sin values turns the indices into a continuous-phase
// FSK waveform. Each output word holds the phase after the step. One word
// leaves per cycle; the next bit is accepted in the cycle the last phase of
// the current one leaves. The phase restarts at 0 on reset, clr and after a
// packet's last word. en low bypasses the block.
// The paper gives only "generates (counter)clockwise series of symbols";
// which direction a 1 takes, the phase resolution and the step size are
// this design's choice (step 1 on 16 positions with sps 4 gives a quarter
// turn per bit, modulation index 0.5).
module clock_seq #(
  parameter int unsigned PHASE_BITS = 4
) (
  input logic       clk,
  input logic       rst_n,
  input logic       en,
  input logic       clr,
  input logic [2:0] sps,
  input logic [PHASE_BITS-1:0] step,
  axis_if.snk       s,
  axis_if.src       m
);
  logic [PHASE_BITS-1:0] phase;
  logic                  bit_q;
  logic                  last_q;
  logic                  full;
  logic [2:0]            cnt;
  logic [2:0]            final_idx;
  logic                  final_out;
  logic [PHASE_BITS-1:0] next_phase;
  logic                  s_rdy_int;

  assign final_idx  = (sps == 0) ? 3'd0 : sps - 3'd1;
  assign final_out  = (cnt == final_idx);
  assign next_phase = bit_q ? phase + step : phase - step;
  assign s_rdy_int  = !full || (m.ready && final_out);

  assign s.ready = en ? s_rdy_int : m.ready;
  assign m.valid = en ? full : s.valid;
  assign m.data  = en ? {{(32-PHASE_BITS){1'b0}}, next_phase} : s.data;
  assign m.last  = en ? (last_q && final_out) : s.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase  <= '0;
      full   <= 1'b0;
      cnt    <= '0;
      bit_q  <= 1'b0;
      last_q <= 1'b0;
    end else if (clr) begin
      phase <= '0;
      full  <= 1'b0;
      cnt   <= '0;
    end else if (en) begin
      if (full && m.ready) begin
        phase <= (last_q && final_out) ? '0 : next_phase;
        cnt   <= final_out ? 3'd0 : cnt + 3'd1;
        if (final_out) full <= 1'b0;
      end
      if (s.valid && s_rdy_int) begin
        bit_q  <= s.data[0];
        last_q <= s.last;
        full   <= 1'b1;
        cnt    <= '0;
      end
    end
  end
endmodule
