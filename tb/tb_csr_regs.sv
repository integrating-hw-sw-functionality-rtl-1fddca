// tb_csr_regs: checks the register block: reset values (2450 MHz O-QPSK
// chain), write and read-back of every configuration register and the
// matching cfg fields, the one-cycle start pulse, the table write strobes and
// addresses, status words, the sticky done flag and its clearing, and the
// interrupt as the OR of interposer interrupts and the enabled done flag.
module tb_csr_regs;
  import radio_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [9:0]  addr;
  logic        wr, rd;
  logic [31:0] wdata, rdata;
  cfg_t        cfg;
  logic        start, chip_we, map_we, coef_we, pkt_we;
  logic [7:0]  tbl_addr;
  logic [31:0] tbl_wdata;
  logic        busy, done, underrun, sel_rd_pkt_last, irq;
  logic [15:0] underrun_cnt;
  logic [8:0]  ip_rd_ready, ip_wr_free, ip_irq, sel_rd_count;

  csr_regs dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic bus_write(input int a, input logic [31:0] d);
    @(negedge clk); addr = 10'(a); wdata = d; wr = 1'b1;
    @(negedge clk); wr = 1'b0;
  endtask

  task automatic bus_read(input int a, output logic [31:0] d);
    @(negedge clk); addr = 10'(a); rd = 1'b1;
    @(negedge clk); rd = 1'b0; d = rdata;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int starts = 0;
  always @(posedge clk) if (start) starts++;

  initial begin
    logic [31:0] v;
    int a_list [16] = '{2, 3, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 14, 15, 16, 17};
    logic [31:0] m_list [16] = '{32'h1ff, 32'h1ff, 32'h1ff, 32'h81ff_01ff, 32'h1ff, 32'hf0f, 32'h1ff, 32'h1,
                                 32'h1ff, 32'hf07, 32'h13f, 32'h7, 32'hffff, 32'hf, 32'hffff, 32'h7ff};
    addr = '0; wr = 0; rd = 0; wdata = '0;
    busy = 0; done = 0; underrun = 0; underrun_cnt = '0; sel_rd_pkt_last = 0;
    ip_rd_ready = '0; ip_wr_free = '0; ip_irq = '0; sel_rd_count = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(cfg.block_en == 9'b1_1111_0001 && cfg.chip_len == 32 && cfg.chip_pair && cfg.fir_up == 4
          && cfg.off_n == 2 && cfg.pn9_seed == 9'h1ff && cfg.ip_rd_en == 0 && cfg.ip_wr_en == 0,
          "reset configuration");
    // every configuration register
    foreach (a_list[k]) begin
      logic [31:0] w;
      w = $urandom & m_list[k];
      bus_write(a_list[k], w);
      bus_read(a_list[k], v);
      check(v == w, $sformatf("reg %h wrote %h read %h", a_list[k], w, v));
      case (a_list[k])
        2:  check(cfg.block_en == w[8:0], "block_en field");
        3:  check(cfg.ip_rd_en == w[8:0], "ip_rd_en field");
        4:  check(cfg.ip_wr_en == w[8:0], "ip_wr_en field");
        5:  check(cfg.rd_irq_en == w[8:0] && cfg.wr_irq_en == w[24:16] && cfg.done_irq_en == w[31], "irq_en fields");
        7:  check(cfg.rd_sel == w[3:0] && cfg.wr_sel == w[11:8], "dma_sel fields");
        12: check(cfg.chip_len == w[5:0] && cfg.chip_pair == w[8], "chip fields");
        14: check(cfg.zpad_n == w[7:0] && cfg.zpad_m == w[15:8], "zpad fields");
        16: check(cfg.dac_div == w[15:0], "dac_div field");
        default: ;
      endcase
    end
    // start pulse
    bus_write(0, 1);
    repeat (3) @(posedge clk);
    check(starts == 1, $sformatf("one start pulse, saw %0d", starts));
    // table strobes
    @(negedge clk); addr = 10'h045; wdata = 32'hdead_beef; wr = 1;
    #1 check(chip_we && !map_we && !coef_we && !pkt_we && tbl_addr == 5 && tbl_wdata == 32'hdead_beef, "chip table write");
    addr = 10'h05c; #1 check(map_we && !chip_we && tbl_addr[3:0] == 12, "mapper table write");
    addr = 10'h0a8; #1 check(coef_we && !map_we && tbl_addr == 40, "coefficient write");
    addr = 10'h0a9; #1 check(!coef_we, "no coefficient beyond 40");
    addr = 10'h1c3; #1 check(pkt_we && !coef_we && tbl_addr == 8'hc3, "packet byte write");
    @(negedge clk); wr = 0;
    // status and interrupts
    ip_rd_ready = 9'h005; ip_wr_free = 9'h100; sel_rd_count = 9'd77; sel_rd_pkt_last = 1;
    busy = 1; underrun = 1; underrun_cnt = 16'd3;
    bus_read(18, v); check(v == {7'd0, 9'h100, 7'd0, 9'h005}, "IP_STATUS");
    bus_read(19, v); check(v == {15'd0, 1'b1, 7'd0, 9'd77}, "SEL_STATUS");
    bus_read(1, v);  check(v == {16'd3, 13'd0, 1'b1, 1'b0, 1'b1}, "STATUS");
    bus_write(5, 32'h0);
    check(!irq, "no irq");
    ip_irq = 9'h010; #1 check(irq, "interposer irq");
    ip_irq = '0;
    @(negedge clk); done = 1; @(negedge clk); done = 0;
    #1 check(!irq, "done irq masked");
    bus_write(5, 32'h8000_0000);
    #1 check(irq, "done irq enabled");
    bus_read(1, v); check(v[1], "done flag sticky");
    bus_read(20, v); check(v[31], "IRQ_STATUS done");
    bus_write(1, 32'h2);
    #1 check(!irq, "done flag cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
