// tb_ddc_channel: feeds a 13 MHz IF tone (21/101 cycles per sample) of
// amplitude A and phase phi, with unit-magnitude NCO tables, and checks that
// after the filters settle I = A cos(phi) and Q = A sin(phi) to within 0.5 %
// of A, for several amplitudes and phases. Also checks the latency: a
// step of the input appears at the output exactly 4 clocks later.
module tb_ddc_channel;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic signed [ADC_W-1:0] x = '0;
  logic signed [TAB_W-1:0] cos_v = '0, sin_v = '0;
  logic signed [BB_W-1:0] i_out, q_out;
  int checks = 0, failures = 0;
  real PI = 3.14159265358979;
  int nsamp = 0;   // running sample index of the IF tone

  function automatic real absr(input real v); return v < 0 ? -v : v; endfunction

  ddc_channel dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_tone(input real amp, input real phi, input int ncyc);
    for (int n = 0; n < ncyc; n++) begin
      real th;
      th = 2.0 * PI * 21.0 * real'(nsamp % 101) / 101.0;
      nsamp++;
      @(posedge clk);
      x     <= ADC_W'($rtoi(amp * $cos(th + phi)));
      cos_v <= TAB_W'($rtoi(65535.0 * $cos(th)));
      sin_v <= TAB_W'($rtoi(65535.0 * $sin(th)));
    end
  endtask

  initial begin
    real amps [3] = '{6000.0, 2500.0, 8000.0};
    real phis [3] = '{0.3, -2.0, 1.2};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // latency: with x held at zero the output stays zero; with constant
    // table (cos = 1) and a step of x the first non-zero output is 4 clocks later
    @(posedge clk); cos_v <= 18'sd65535; sin_v <= '0; x <= '0;
    repeat (30) @(posedge clk);
    checks++; if (i_out != 0) failures++;
    @(negedge clk);
    x <= 14'sd4000;
    begin
      int lat = 0;
      do begin @(posedge clk); lat++; @(negedge clk); end while (i_out == 0 && lat < 20);
      checks++;
      if (lat != 4) begin failures++; $display("latency %0d, expected 4", lat); end
    end
    for (int k = 0; k < 3; k++) begin
      real ei, eq;
      run_tone(amps[k], phis[k], 400);
      ei = amps[k] * $cos(phis[k]);
      eq = amps[k] * $sin(phis[k]);
      for (int s = 0; s < 101; s++) begin
        run_tone(amps[k], phis[k], 1);
        checks += 2;
        if (absr(real'(i_out) - ei) > 0.005 * amps[k] || absr(real'(q_out) - eq) > 0.005 * amps[k]) begin
          failures++;
          if (failures < 10) $display("tone %0d: I=%0d Q=%0d expected %f %f", k, i_out, q_out, ei, eq);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
