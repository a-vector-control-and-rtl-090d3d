// tb_sync_fifo: random pushes and pops against a queue model, checking the
// head word, empty/full/count every clock, then fills the FIFO past full to
// check that the extra word is dropped and `overflow` is set.
module tb_sync_fifo;
  localparam int D = 16;
  logic clk = 0, rst_n = 0, clr = 0, wr_en = 0, rd_en = 0;
  logic [40:0] wdata = '0, rdata;
  logic empty, full, overflow;
  logic [4:0] count;
  logic [40:0] q [$];
  int checks = 0, failures = 0;

  sync_fifo #(.DW(41), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 3000; n++) begin
      logic w, r;
      logic [40:0] d;
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D) || int'(count) != q.size() ||
          (q.size() > 0 && rdata !== q[0])) begin
        failures++; if (failures < 8) $display("n=%0d state mismatch size %0d count %0d", n, q.size(), count);
      end
      w = ($urandom_range(99) < (n < 1500 ? 60 : 40)) && q.size() < D;
      r = ($urandom_range(99) < 50) && q.size() > 0;
      d = {9'($urandom), $urandom};
      wr_en = w; rd_en = r; wdata = d;
      @(posedge clk);
      if (r) void'(q.pop_front());
      if (w) q.push_back(d);
      #1 wr_en = 0; rd_en = 0;
    end
    checks++; if (overflow) failures++;
    // overflow
    while (q.size() < D) begin
      @(negedge clk); wr_en = 1; wdata = 41'(q.size()); @(posedge clk); q.push_back(41'(q.size())); #1 wr_en = 0;
    end
    @(negedge clk); wr_en = 1; wdata = '1; @(posedge clk); #1 wr_en = 0;
    @(negedge clk);
    checks += 2;
    if (!overflow || !full) begin failures++; $display("overflow not flagged"); end
    if (rdata !== q[0]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
