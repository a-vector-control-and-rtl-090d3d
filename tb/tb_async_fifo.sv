// tb_async_fifo: a writer on a 10 ns clock and a reader on a 13.3 ns clock,
// both with random stalls, pass 2000 numbered words; checks order and
// content, that nothing is lost or duplicated, and that full was reached.
module tb_async_fifo;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0, wr_en = 0, rd_en = 0;
  logic [63:0] wdata = '0, rdata;
  logic full, empty;
  int checks = 0, failures = 0, nrd = 0, nfull = 0;

  async_fifo #(.DW(64), .AW(4)) dut (.*);
  always #5 wclk = ~wclk;
  always #6.65 rclk = ~rclk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nw = 0;
    #30 wrst_n = 1; rrst_n = 1;
    while (nw < 2000) begin
      @(negedge wclk);
      if (full) nfull++;
      wr_en = !full && ($urandom_range(9) < 8);
      wdata = {32'hA5A5_0000 + 32'(nw), 32'(nw)};
      @(posedge wclk);
      if (wr_en) nw++;
    end
    @(negedge wclk); wr_en = 0;
  end

  initial begin
    #30;
    while (nrd < 2000) begin
      @(negedge rclk);
      rd_en = !empty && ($urandom_range(9) < (nrd < 1000 ? 3 : 9));
      if (rd_en) begin
        checks++;
        if (rdata !== {32'hA5A5_0000 + 32'(nrd), 32'(nrd)}) begin
          failures++; if (failures < 6) $display("word %0d got %h", nrd, rdata);
        end
        nrd++;
      end
      @(posedge rclk);
    end
    @(negedge rclk); rd_en = 0;
    repeat (10) @(posedge rclk);
    checks += 2;
    if (!empty) begin failures++; $display("extra words"); end
    if (nfull == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
