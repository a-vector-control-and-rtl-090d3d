// tb_lvds_deser: serialises random 12-bit words on eight lanes, MSB first
// with the frame marker on the MSB, and checks every parallel word and that
// word_valid comes once per 12-bit frame.
module tb_lvds_deser;
  logic bit_clk = 0, rst_n = 0, frame = 0;
  logic [7:0] lvds_d = '0;
  logic [7:0][11:0] word;
  logic word_valid;
  int checks = 0, failures = 0, nvalid = 0;
  logic [7:0][11:0] sent [$];

  lvds_deser dut (.*);
  always #1 bit_clk = ~bit_clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge bit_clk) if (rst_n && word_valid) begin
    logic [7:0][11:0] exp;
    nvalid++;
    exp = sent.pop_front();
    checks++;
    if (word !== exp) begin failures++; $display("word %h expected %h", word, exp); end
  end

  initial begin
    logic [7:0][11:0] w;
    repeat (3) @(posedge bit_clk);
    rst_n <= 1;
    repeat (2) @(posedge bit_clk);
    for (int f = 0; f < 200; f++) begin
      for (int l = 0; l < 8; l++) w[l] = 12'($urandom);
      sent.push_back(w);
      for (int b = 11; b >= 0; b--) begin
        frame <= (b == 11);
        for (int l = 0; l < 8; l++) lvds_d[l] <= w[l][b];
        @(posedge bit_clk);
      end
    end
    frame <= 0;
    repeat (5) @(posedge bit_clk);
    checks++;
    if (nvalid != 200) begin failures++; $display("valid count %0d", nvalid); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
