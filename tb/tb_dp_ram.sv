// tb_dp_ram: writes random words at random addresses on the write clock and
// reads them back on an unrelated read clock, checking data and the
// one-cycle read latency.
module tb_dp_ram;
  localparam int DEPTH = 101;
  logic wclk = 0, rclk = 0, we = 0;
  logic [6:0] waddr = '0, raddr = '0;
  logic [17:0] wdata = '0, rdata;
  logic [17:0] model [DEPTH];
  int checks = 0, failures = 0;

  dp_ram #(.DW(18), .DEPTH(DEPTH)) dut (.*);
  always #5 wclk = ~wclk;
  always #7 rclk = ~rclk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [17:0] d;
    int a;
    for (int k = 0; k < DEPTH + 300; k++) begin
      a = (k < DEPTH) ? k : $urandom_range(DEPTH-1);
      d = 18'($urandom);
      @(posedge wclk); we <= 1; waddr <= 7'(a); wdata <= d;
      model[a] = d;
    end
    @(posedge wclk); we <= 0;
    for (int k = 0; k < 300; k++) begin
      a = $urandom_range(DEPTH-1);
      @(posedge rclk); raddr <= 7'(a);
      @(posedge rclk); #1;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("addr %0d got %h exp %h", a, rdata, model[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
