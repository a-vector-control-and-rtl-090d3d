// tb_cavity_simulator: applies a step to I (and a negative step to Q) and
// compares the output every clock with the first-order response
// y(n) = X (1 - (1 - k/2^24)^n), for two bandwidth settings, then checks the
// decay after the drive is removed.
module tb_cavity_simulator;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [15:0] k = 16'd4096;
  logic signed [BB_W-1:0] x_i = '0, x_q = '0, y_i, y_q;
  int checks = 0, failures = 0;

  cavity_simulator dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input real x0, input real y0, input real xin, input int kk, input int n);
    real a;
    a = real'(kk) / 16777216.0;
    for (int t = 1; t <= n; t++) begin
      real e;
      @(negedge clk);
      e = xin + (y0 - xin) * ((1.0 - a) ** t);
      checks++;
      if (real'(y_i) > e + 2.0 || real'(y_i) < e - 3.0 || real'(y_q) > -e + 3.0 || real'(y_q) < -e - 2.0) begin
        failures++;
        if (failures < 10) $display("t=%0d y=%0d,%0d expected %f", t, y_i, y_q, e);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    x_i <= 16'sd20000; x_q <= -16'sd20000; k <= 16'd4096;
    run(20000.0, 0.0, 20000.0, 4096, 20000);          // tau = 4096 clocks
    @(negedge clk); #0;
    begin
      real y0;
      y0 = real'(y_i);
      x_i <= 0; x_q <= 0; k <= 16'd16384;
      run(0.0, y0, 0.0, 16384, 5000);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
