// tb_dma_router: checks that the DMA read stream shows exactly the selected
// interposer's read port and returns ready only to it, that the write stream
// reaches only the selected interposer, and that a select of 9 or more
// connects nothing, over random port values and all selects.
module tb_dma_router;
  localparam int N = 9;
  int checks = 0, failures = 0;

  logic [3:0]  rd_sel, wr_sel;
  logic [31:0] ip_rd_data [N];
  logic [N-1:0] ip_rd_valid, ip_rd_ready, ip_rd_last, ip_rd_pkt_last;
  logic [31:0] ip_wr_data;
  logic [N-1:0] ip_wr_valid, ip_wr_ready;
  logic ip_wr_last, ip_wr_pkt_last;
  logic [31:0] dma_rd_data, dma_wr_data;
  logic dma_rd_valid, dma_rd_ready, dma_rd_last, dma_rd_pkt_last;
  logic dma_wr_valid, dma_wr_ready, dma_wr_last, dma_wr_pkt_last;

  dma_router #(.N(N), .W(32)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      rd_sel = 4'($urandom_range(15));
      wr_sel = 4'($urandom_range(15));
      foreach (ip_rd_data[k]) ip_rd_data[k] = $urandom;
      ip_rd_valid = N'($urandom); ip_rd_last = N'($urandom); ip_rd_pkt_last = N'($urandom);
      ip_wr_ready = N'($urandom);
      dma_rd_ready = 1'($urandom);
      dma_wr_data = $urandom; dma_wr_valid = 1'($urandom);
      dma_wr_last = 1'($urandom); dma_wr_pkt_last = 1'($urandom);
      #1;
      if (rd_sel < N) begin
        check(dma_rd_data == ip_rd_data[rd_sel] && dma_rd_valid == ip_rd_valid[rd_sel] &&
              dma_rd_last == ip_rd_last[rd_sel] && dma_rd_pkt_last == ip_rd_pkt_last[rd_sel],
              $sformatf("read mux sel %0d", rd_sel));
        check(ip_rd_ready == (N'(dma_rd_ready) << rd_sel), "read ready to selected only");
      end else begin
        check(!dma_rd_valid && ip_rd_ready == '0, "read unselected");
      end
      if (wr_sel < N) begin
        check(ip_wr_valid == (N'(dma_wr_valid) << wr_sel), "write valid to selected only");
        check(dma_wr_ready == ip_wr_ready[wr_sel], "write ready from selected");
      end else begin
        check(ip_wr_valid == '0 && !dma_wr_ready, "write unselected");
      end
      check(ip_wr_data == dma_wr_data && ip_wr_last == dma_wr_last && ip_wr_pkt_last == dma_wr_pkt_last,
            "write data broadcast");
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
