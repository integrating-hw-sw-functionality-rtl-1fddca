// iq_mapper: block 5 ("Mapper"), symbol to complex sample. The low four bits
// of each input word index a 16-entry table of complex samples {I, Q}; the
// entry leaves as the output word. The table is rewritten by the CPU to
// select the constellation: QPSK from a chip pair, BPSK from one chip, or
// the cos/sin values of the GFSK phase indices produced by the Clock block.
// At reset it holds QPSK: I = +A when bit 0 is 1, else -A; Q likewise from
// bit 1, A = 23170 (0.707 of full scale). The data path is combinational and
// valid/ready pass straight through; en low bypasses the block.
// The paper gives the function; the table form, its reset contents and the
// amplitude are this design's choice.
module iq_mapper #(
  parameter int unsigned ENTRIES = 16
) (
  input logic        clk,
  input logic        rst_n,
  input logic        en,
  input logic        tbl_we,
  input logic [3:0]  tbl_addr,
  input logic [31:0] tbl_wdata,
  axis_if.snk        s,
  axis_if.src        m
);
  import radio_pkg::*;

  localparam logic signed [SAMPLE_W-1:0] AMP = 16'sd23170;

  iq_t lut [ENTRIES];

  assign m.valid = s.valid;
  assign s.ready = m.ready;
  assign m.last  = s.last;
  assign m.data  = en ? lut[s.data[3:0]] : s.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < ENTRIES; k++) begin
        lut[k].i <= k[0] ? AMP : -AMP;
        lut[k].q <= k[1] ? AMP : -AMP;
      end
    end else if (tbl_we) begin
      lut[tbl_addr] <= tbl_wdata;
    end
  end
endmodule
