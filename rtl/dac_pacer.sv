// dac_pacer: the digital side of the DAC. It takes one sample from the ring
// buffer every `div` clock cycles, the DAC sample period, and presents it on
// dac_data with a one-cycle dac_strobe. A start pulse arms it; it begins
// converting once the ring holds `prefill` samples or a whole packet, so the
// ring can absorb jitter in CPU response time. If the ring is empty at a
// sample instant before the packet's last sample has gone, that is an
// underrun: a zero sample is converted, the sticky underrun flag is set and
// underrun_cnt counts it. running is high from start until the packet ends.
// Taking the sample with last ends the packet:
// a one-cycle done pulse, and the pacer returns to idle.
// The paper names DAC underrun as the failure that makes a buffer size
// unusable for real time; the pacing, prefill and zero-on-underrun rules
// are this design's choice.
module dac_pacer #(
  parameter int unsigned LEVEL_W = 11
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [15:0]        div,
  input  logic [LEVEL_W-1:0] prefill,
  input  logic [LEVEL_W-1:0] level,
  input  logic [LEVEL_W-1:0] lasts_held,
  axis_if.snk                s,
  output radio_pkg::iq_t     dac_data,
  output logic               dac_strobe,
  output logic               running,
  output logic               done,
  output logic               underrun,
  output logic [15:0]        underrun_cnt
);
  import radio_pkg::*;

  typedef enum logic [1:0] {IDLE, ARMED, RUN} state_e;
  state_e      state;
  logic [15:0] tick_cnt;
  logic        tick;

  assign tick    = (state == RUN) && (tick_cnt == 0);
  assign s.ready = tick;
  assign running = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= IDLE;
      tick_cnt     <= '0;
      dac_data     <= '0;
      dac_strobe   <= 1'b0;
      done         <= 1'b0;
      underrun     <= 1'b0;
      underrun_cnt <= '0;
    end else begin
      dac_strobe <= 1'b0;
      done       <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state        <= ARMED;
          underrun     <= 1'b0;
          underrun_cnt <= '0;
        end
        ARMED: if (level >= prefill || lasts_held != 0) begin
          state    <= RUN;
          tick_cnt <= '0;
        end
        RUN: begin
          tick_cnt <= (tick_cnt + 16'd1 >= div) ? 16'd0 : tick_cnt + 16'd1;
          if (tick) begin
            dac_strobe <= 1'b1;
            if (s.valid) begin
              dac_data <= iq_t'(s.data);
              if (s.last) begin
                done  <= 1'b1;
                state <= IDLE;
              end
            end else begin
              dac_data     <= '0;
              underrun     <= 1'b1;
              underrun_cnt <= underrun_cnt + 16'd1;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
