// tb_adc_capture: drives the 14-bit channel with random samples and the four
// LVDS ADCs with random 12-bit words (one frame per GlobalClock period, bit
// clock 12x and offset so that no edges coincide). Checks that channel 0 is
// the 14-bit input one clock later, and that channels 1..32 present every
// serial word, times 4, in order, each for exactly one clock.
module tb_adc_capture;
  import llrf_pkg::*;
  logic clk = 0, bit_clk = 0, rst_n = 0, frame = 0;
  logic signed [ADC_W-1:0] adc14 = '0;
  logic [3:0][7:0] lvds_d = '0;
  logic signed [32:0][ADC_W-1:0] samples;
  int checks = 0, failures = 0;
  logic [31:0][11:0] sent [$];
  logic [31:0][11:0] seen [$];

  adc_capture dut (.*);
  always #12 clk = ~clk;                    // period 24
  initial begin #1; forever #1 bit_clk = ~bit_clk; end  // period 2, offset 1

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // serial stimulus
  initial begin
    logic [31:0][11:0] w;
    #100; rst_n = 1;
    @(posedge bit_clk);
    for (int f = 0; f < 60; f++) begin
      for (int c = 0; c < 32; c++) w[c] = 12'($urandom);
      sent.push_back(w);
      for (int b = 11; b >= 0; b--) begin
        frame <= (b == 11);
        for (int c = 0; c < 32; c++) lvds_d[c/8][c%8] <= w[c][b];
        @(posedge bit_clk);
      end
    end
  end

  // 14-bit channel and sample collection
  initial begin
    logic signed [ADC_W-1:0] prev;
    logic [31:0][11:0] s;
    #100;
    for (int k = 0; k < 70; k++) begin
      @(posedge clk);
      prev = adc14;
      adc14 <= ADC_W'($urandom);
      @(negedge clk);
      if (k > 1) begin
        checks++;
        if (samples[0] !== prev) begin failures++; $display("ch0 %h exp %h", samples[0], prev); end
      end
      for (int c = 0; c < 32; c++) begin
        s[c] = samples[c+1][13:2];
        if (samples[c+1][1:0] != 2'b00) begin failures++; checks++; end
      end
      seen.push_back(s);
    end
    // find the first sent word, then every later clock must show the next one
    begin
      int off = -1;
      foreach (seen[i]) if (off < 0 && seen[i] == sent[0]) off = i;
      checks++;
      if (off < 0) begin failures++; $display("first word never seen"); end
      else
        for (int f = 0; f < 55 && off + f < seen.size(); f++) begin
          checks++;
          if (seen[off+f] !== sent[f]) begin failures++; $display("frame %0d mismatch", f); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
