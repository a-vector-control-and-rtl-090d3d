// tb_cw_averager: four channels of random samples, accumulated every 6th
// clock and dumped every 16th accumulation (the /60 and /960 ratio scaled
// down by ten). Reads the RAM after each update and checks every channel
// against the floor of the mean of the 16 samples the TB itself recorded.
module tb_cw_averager;
  import llrf_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, enable = 0, acc_en = 0, dump = 0;
  logic signed [N-1:0][BB_W-1:0] ch = '0;
  logic [1:0] raddr = '0;
  logic [BB_W-1:0] rdata;
  logic updated;
  int checks = 0, failures = 0, nupd = 0;
  longint sums [N];
  longint expv [N];

  cw_averager #(.N_CH(N)) dut (.*, .rclk(clk));
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1; enable <= 1;
    for (int blk = 0; blk < 5; blk++) begin
      foreach (sums[c]) sums[c] = 0;
      for (int a = 0; a < 16; a++) begin
        repeat (5) @(posedge clk);
        for (int c = 0; c < N; c++) begin
          logic signed [BB_W-1:0] v;
          v = BB_W'($urandom);
          ch[c] <= v;
          sums[c] += longint'(v);
        end
        acc_en <= 1; dump <= (a == 15);
        @(posedge clk);
        acc_en <= 0; dump <= 0;
      end
      foreach (expv[c]) expv[c] = sums[c] >>> 4;
      @(posedge clk);
      while (!updated) @(posedge clk);
      nupd++;
      for (int c = 0; c < N; c++) begin
        raddr <= 2'(c);
        @(posedge clk); @(posedge clk); #1;
        checks++;
        if (longint'($signed(rdata)) != expv[c]) begin
          failures++; $display("blk %0d ch %0d avg %0d exp %0d", blk, c, $signed(rdata), expv[c]);
        end
      end
    end
    checks++; if (nupd != 5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
