// tb_dac_model: checks that the behavioural DAC converts on strobe only,
// with vout = code / 32768 of full scale for both channels, holds between
// strobes, and counts conversions.
module tb_dac_model;
  import radio_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, strobe = 1'b0;
  always #5 clk = ~clk;
  iq_t code;
  real vi, vq;
  int unsigned conv;
  int checks = 0, failures = 0;

  dac_model #(.VFS(2.0)) dut (.clk, .rst_n, .strobe, .code, .vout_i(vi), .vout_q(vq), .conversions(conv));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic bit near(input real a, input real b);
    return (a - b < 1.0e-9) && (b - a < 1.0e-9);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    code = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 50; k++) begin
      int ci, cq;
      ci = $urandom_range(65535) - 32768;
      cq = $urandom_range(65535) - 32768;
      @(negedge clk); code.i = 16'(ci); code.q = 16'(cq); strobe = 1'b1;
      @(negedge clk); strobe = 1'b0;
      check(near(vi, 2.0 * ci / 32768.0) && near(vq, 2.0 * cq / 32768.0),
            $sformatf("code %0d,%0d gave %f,%f", ci, cq, vi, vq));
      code.i = ~code.i;
      @(negedge clk);
      check(near(vi, 2.0 * ci / 32768.0), "held without strobe");
    end
    check(conv == 50, $sformatf("conversions %0d", conv));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
