// tb_upconverter: loads cosine/sine tables with gain g and phase psi and
// drives constant complex base-band values. Checks every DAC word against
// (I cos - Q sin)/4 and (I sin + Q cos)/4 of the table entry two clocks
// earlier (within 1 LSB), and saturation of a large input.
module tb_upconverter;
  import llrf_pkg::*;
  logic clk = 0, wclk = 0, rst_n = 0;
  logic signed [BB_W-1:0] u_i = '0, u_q = '0;
  logic tab_we = 0, tab_sel = 0;
  logic [6:0] tab_addr = '0;
  logic [TAB_W-1:0] tab_wdata = '0;
  logic signed [DAC_W-1:0] dac_a, dac_b;
  int checks = 0, failures = 0, nsat = 0;
  real PI = 3.14159265358979;
  int ct [101], st [101];
  int idx = 0;

  upconverter dut (.*);
  always #5 clk = ~clk;
  always #3 wclk = ~wclk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 101; n++) begin
      real th;
      th = 2.0 * PI * 21.0 * real'(n) / 101.0 + 0.7;
      ct[n] = $rtoi(1.3 * 65536.0 * $cos(th));
      st[n] = $rtoi(1.3 * 65536.0 * $sin(th));
    end
    for (int t = 0; t < 2; t++)
      for (int n = 0; n < 101; n++) begin
        @(posedge wclk);
        tab_we <= 1; tab_sel <= t[0]; tab_addr <= 7'(n);
        tab_wdata <= TAB_W'(t == 0 ? ct[n] : st[n]);
      end
    @(posedge wclk); tab_we <= 0;
    @(negedge clk); rst_n <= 1;   // index 0 from the next edge
    for (int k = 0; k < 3; k++) begin
      int ui, uq;
      ui = (k == 0) ? 20000 : (k == 1) ? -15000 : 32767;
      uq = (k == 0) ? -9000 : (k == 1) ? 25000 : 32767;
      u_i <= BB_W'(ui); u_q <= BB_W'(uq);
      for (int n = 0; n < 303; n++) begin
        @(posedge clk);   // edge number idx+1 since reset
        idx++;
        @(negedge clk);
        if (n >= 3) begin
          int j;
          longint ea, eb;
          j = (idx - 2) % 101;          // table entry read two edges ago
          ea = (longint'(ui) * ct[j] - longint'(uq) * st[j]) >>> 18;
          eb = (longint'(ui) * st[j] + longint'(uq) * ct[j]) >>> 18;
          if (ea > 8191) begin ea = 8191; nsat++; end
          if (ea < -8192) begin ea = -8192; nsat++; end
          if (eb > 8191) begin eb = 8191; nsat++; end
          if (eb < -8192) begin eb = -8192; nsat++; end
          checks += 2;
          if (longint'(dac_a) != ea) begin failures++; if (failures < 8) $display("n=%0d a %0d exp %0d", n, dac_a, ea); end
          if (longint'(dac_b) != eb) begin failures++; if (failures < 8) $display("n=%0d b %0d exp %0d", n, dac_b, eb); end
        end
      end
    end
    checks++; if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
