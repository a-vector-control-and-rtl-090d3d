// tb_notch_filter: with the coefficients of a notch at 0.8 MHz (fs = 62.52
// MHz, r = 0.998), measures the steady-state output amplitude for a tone at
// the notch frequency (must be below 2 % of the input), at 0.1 MHz and at
// 5 MHz (must pass within 5 %), and for a DC input (gain 1 within 0.5 %).
// I carries cos and Q sin of the same tone, as a complex base-band tone would.
module tb_notch_filter;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic signed [NC_W-1:0] b0 = 26'sd16754050, b1 = -26'sd33399874, a1 = -26'sd33379163, a2 = 26'sd16710174;
  logic signed [BB_W-1:0] x_i = '0, x_q = '0, y_i, y_q;
  int checks = 0, failures = 0;
  real PI = 3.14159265358979;
  real FS = 1313.0 / 21.0 * 1.0e6;

  notch_filter dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // run a tone, return the peak output over the last 2000 samples
  task automatic tone(input real f, input real amp, output real peak);
    peak = 0.0;
    for (int n = 0; n < 12000; n++) begin
      real th;
      th = 2.0 * PI * f / FS * real'(n);
      @(posedge clk);
      x_i <= BB_W'($rtoi(amp * $cos(th)));
      x_q <= BB_W'($rtoi(amp * $sin(th)));
      if (n >= 10000) begin
        if (real'(y_i) > peak) peak = real'(y_i);
        if (-real'(y_i) > peak) peak = -real'(y_i);
      end
    end
  endtask

  initial begin
    real pk;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    tone(0.8e6, 10000.0, pk);
    checks++; if (pk > 200.0) begin failures++; $display("notch leaves %f", pk); end
    tone(0.1e6, 10000.0, pk);
    checks++; if (pk < 9500.0 || pk > 10500.0) begin failures++; $display("0.1 MHz gives %f", pk); end
    tone(5.0e6, 10000.0, pk);
    checks++; if (pk < 9500.0 || pk > 10500.0) begin failures++; $display("5 MHz gives %f", pk); end
    tone(0.0, 10000.0, pk);
    checks++; if (pk < 9950.0 || pk > 10050.0) begin failures++; $display("DC gives %f", pk); end
    checks++; if (y_q > 16'sd50 || y_q < -16'sd50) begin failures++; $display("Q at DC %0d", y_q); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
