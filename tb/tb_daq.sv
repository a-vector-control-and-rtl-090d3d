// tb_daq: acquisition with 4 slow and 2 fast channels and a depth of 6
// samples. Clock enables come every 30 (2 MS/s) and 60 (1 MS/s) clocks as
// from the clock divider; channel values encode their sample number. The
// SDRAM side accepts words with random stalls. Checks that exactly
// 2*6*(2 + 2) words are written, each at the address the interleave format
// gives with the right value, that `done` pulses once, and then a
// diagnostic run of 50 raw samples at full rate to addresses 0..49.
module tb_daq;
  import llrf_pkg::*;
  localparam int NS = 4, NF = 2, D = 6;
  logic clk = 0, clk2x = 0, rst_n = 0, trigger = 0, en_2m = 0, en_1m = 0, diag_mode = 0;
  logic [MEM_AW-1:0] diag_depth = 25'd50;
  logic signed [NS-1:0][BB_W-1:0] slow = '0;
  logic signed [NF-1:0][BB_W-1:0] fast = '0;
  logic signed [BB_W-1:0] raw = '0;
  logic busy, done, m_valid, m_pop = 0, overflow;
  logic [MEM_AW-1:0] m_addr;
  logic [MEM_DW-1:0] m_data;
  int checks = 0, failures = 0, ndone = 0, nwr = 0;
  int t = 0, n1 = 0, n2 = 0, nraw = 0;
  logic [MEM_DW-1:0] mem [int];

  daq #(.N_SLOW(NS), .N_FAST(NF), .DEPTH(D)) dut (.*);
  initial forever begin #10 clk = ~clk; end        // period 20
  initial forever begin #5 clk2x = ~clk2x; end     // period 10, edges aligned

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // enables and channel values (clk domain)
  always @(posedge clk) begin
    t <= trigger ? 1 : t + 1;
    en_2m <= !trigger && ((t + 1) % 30 == 0);
    en_1m <= !trigger && ((t + 1) % 60 == 0);
    if (en_1m) n1 <= n1 + 1;
    if (en_2m) n2 <= n2 + 1;
    for (int c = 0; c < NS; c++) slow[c] <= BB_W'(1000 * (en_1m ? n1 + 1 : n1) + c);
    for (int f = 0; f < NF; f++) fast[f] <= BB_W'(20000 + 100 * (en_2m ? n2 + 1 : n2) + f);
    raw <= BB_W'(nraw);
    nraw <= nraw + 1;
    if (rst_n && done) ndone++;
  end

  // SDRAM side
  always @(posedge clk2x) if (rst_n) begin
    if (m_valid && m_pop) begin mem[int'(m_addr)] = m_data; nwr++; end
    m_pop <= ($urandom_range(9) < 7);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (17) @(posedge clk);
    // n1/n2 count the enables since the trigger; the first frame is the first 1 MS/s edge
    trigger <= 1; n1 <= 0; n2 <= 0;
    @(posedge clk); trigger <= 0;
    repeat (60 * (D + 2)) @(posedge clk);
    repeat (200) @(posedge clk2x);
    checks += 2;
    if (nwr != 2 * D * (NF + NS/2)) begin failures++; $display("%0d words written", nwr); end
    if (ndone != 1) begin failures++; $display("done %0d", ndone); end
    // slow sample n was latched at the (n+1)th 1 MS/s edge -> value 1000*n + c
    // (values set before the first edge carry n1 = 0)
    for (int n = 0; n < D; n++)
      for (int w = 0; w < NS; w++) begin
        int a;
        a = n * (2*NF + NS) + ((w < NS/2) ? NF + w : 2*NF + NS/2 + (w - NS/2));
        checks++;
        if (!mem.exists(a) || mem[a] != MEM_DW'(1000 * n + w)) begin
          failures++; $display("slow n=%0d w=%0d at %0d: %0d", n, w, a, mem.exists(a) ? int'(mem[a]) : -1);
        end
      end
    // fast sample m: latched at 2 MS/s edge number (m + 2) since the trigger,
    // since acquisition starts at the second 2 MS/s edge (first 1 MS/s edge)
    for (int m = 0; m < 2 * D; m++)
      for (int f = 0; f < NF; f++) begin
        int a;
        a = m * (NF + NS/2) + f;
        checks++;
        if (!mem.exists(a) || mem[a] != MEM_DW'(20000 + 100 * (m + 1) + f)) begin
          failures++; $display("fast m=%0d f=%0d at %0d: %0d", m, f, a, mem.exists(a) ? int'(mem[a]) : -1);
        end
      end
    // diagnostic mode: consecutive raw samples at consecutive addresses
    mem.delete(); nwr = 0;
    diag_mode <= 1;
    @(posedge clk); trigger <= 1; @(posedge clk); trigger <= 0; diag_mode <= 0;
    repeat (200) @(posedge clk);
    checks++;
    if (nwr != 50) begin failures++; $display("diag wrote %0d", nwr); end
    for (int a = 1; a < 50; a++) begin
      checks++;
      if (!mem.exists(a) || !mem.exists(a-1) || mem[a] != mem[a-1] + 1'b1) begin
        failures++; if (failures < 10) $display("diag word %0d", a);
      end
    end
    checks++; if (overflow) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
