// tb_downconverter: three channels (reference + two probes) with IF tones of
// different amplitude and phase. The host writes each channel's NCO tables
// on its own clock with gain g and phase psi, so the expected base band is
// A*g*exp(j(phi - psi)). Checks every channel to 0.5 % of full scale and the
// vector sum of channels 1..2, divided by 2, both against the analytic value
// and exactly against the channel outputs of the previous clock.
module tb_downconverter;
  import llrf_pkg::*;
  localparam int NCH = 3;
  logic clk = 0, wclk = 0, rst_n = 0;
  logic signed [NCH-1:0][ADC_W-1:0] samples = '0;
  logic tab_we = 0;
  logic [6:0] tab_sel = '0, tab_addr = '0;
  logic [TAB_W-1:0] tab_wdata = '0;
  logic signed [NCH-1:0][BB_W-1:0] bb_i, bb_q;
  logic signed [BB_W-1:0] vs_i, vs_q;
  int checks = 0, failures = 0;
  real PI = 3.14159265358979;
  real amp [NCH] = '{5000.0, 4000.0, 6000.0};
  real phi [NCH] = '{0.5, -1.0, 2.0};
  real gain[NCH] = '{1.0, 1.5, 0.5};
  real psi [NCH] = '{0.5, 0.0, 1.0};
  int nsamp = 1;   // the DUT table index leads the sample register by one clock

  downconverter #(.N_CH(NCH), .N_CAV(2), .VS_SHIFT(1)) dut (.*);
  always #5 clk = ~clk;
  always #3 wclk = ~wclk;

  function automatic real absr(input real v); return v < 0 ? -v : v; endfunction

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // IF stimulus; the NCO index starts at 0 after reset, as does nsamp
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCH; c++)
      samples[c] <= ADC_W'($rtoi(amp[c] * $cos(2.0 * PI * 21.0 * real'(nsamp % 101) / 101.0 + phi[c])));
    nsamp <= nsamp + 1;
  end

  initial begin
    // tables: cos table 2c, sin table 2c+1
    for (int c = 0; c < NCH; c++)
      for (int t = 0; t < 2; t++)
        for (int n = 0; n < 101; n++) begin
          real th;
          th = 2.0 * PI * 21.0 * real'(n) / 101.0 + psi[c];
          @(posedge wclk);
          tab_we <= 1; tab_sel <= 7'(2*c + t); tab_addr <= 7'(n);
          tab_wdata <= TAB_W'($rtoi(65535.0 * gain[c] * (t == 0 ? $cos(th) : $sin(th))));
        end
    @(posedge wclk); tab_we <= 0;
    @(posedge clk); rst_n <= 1;
    repeat (400) @(posedge clk);
    for (int s = 0; s < 202; s++) begin
      logic signed [BB_W+1:0] si, sq;
      @(negedge clk);
      si = (BB_W+2)'($signed(bb_i[1])) + (BB_W+2)'($signed(bb_i[2]));
      sq = (BB_W+2)'($signed(bb_q[1])) + (BB_W+2)'($signed(bb_q[2]));
      for (int c = 0; c < NCH; c++) begin
        real ei, eq;
        ei = amp[c] * gain[c] * $cos(phi[c] - psi[c]);
        eq = amp[c] * gain[c] * $sin(phi[c] - psi[c]);
        checks++;
        if (absr(real'($signed(bb_i[c])) - ei) > 80.0 || absr(real'($signed(bb_q[c])) - eq) > 80.0) begin
          failures++;
          if (failures < 8) $display("ch%0d %0d %0d exp %f %f", c, bb_i[c], bb_q[c], ei, eq);
        end
      end
      @(negedge clk);
      checks++;
      if (vs_i != BB_W'(si >>> 1) && vs_i != BB_W'((si >>> 1) + 1) && vs_i != BB_W'((si >>> 1) - 1)) begin
        // the sum registered at the edge between the two samples; channel
        // outputs move by at most a few LSB per clock
        failures++; $display("vs_i %0d expected %0d", vs_i, si >>> 1);
      end
      begin
        real evi, evq;
        evi = (amp[1]*gain[1]*$cos(phi[1]-psi[1]) + amp[2]*gain[2]*$cos(phi[2]-psi[2])) / 2.0;
        evq = (amp[1]*gain[1]*$sin(phi[1]-psi[1]) + amp[2]*gain[2]*$sin(phi[2]-psi[2])) / 2.0;
        checks++;
        if (absr(real'(vs_i) - evi) > 80.0 || absr(real'(vs_q) - evq) > 80.0) begin
          failures++; $display("vector sum %0d %0d exp %f %f", vs_i, vs_q, evi, evq);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
