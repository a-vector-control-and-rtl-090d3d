// tb_serial_port_ctrl: a small configuration (4 slow words, 2 fast words,
// 3 samples starting at sample 1, 4 words per sample) against a memory model
// that acknowledges reads after a random delay and returns 3*addr+7. The
// serial clock runs unrelated to the memory clock. The TB deserialises the
// four lanes using sfs, and checks the number of words received, that word
// 4j+k arrived on lane k in the order of the acquisition layout, and that the
// reads went to the addresses of that layout. A second start repeats it.
module tb_serial_port_ctrl;
  import llrf_pkg::*;
  localparam int NS = 4, NF = 2, NSAMP = 3, NW = 4, S0 = 1;
  localparam int TOTAL = NSAMP * NW;
  logic clk = 0, sclk = 0, rst_n = 0, srst_n = 0, start = 0;
  logic busy, rd_req, rd_ack = 0, sfs;
  logic [MEM_AW-1:0] rd_addr;
  logic [MEM_DW-1:0] rd_data = '0;
  logic [3:0] sd;
  int checks = 0, failures = 0, nrx = 0, nreads = 0, wait_c = 0;
  int exp_addr [TOTAL];
  logic [MEM_DW-1:0] rx [$];

  serial_port_ctrl #(.N_SLOW(NS), .N_FAST(NF), .N_SAMP(NSAMP), .N_WORDS(NW), .SAMP0(S0)) dut (.*);
  always #4 clk = ~clk;
  always #10.7 sclk = ~sclk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // expected addresses in stream order
  initial
    for (int n = 0; n < NSAMP; n++)
      for (int w = 0; w < NW; w++)
        exp_addr[n*NW + w] = (n + S0) * (2*NF + NS) + ((w < NS/2) ? NF + w : 2*NF + NS/2 + w - NS/2);

  // memory model
  always @(posedge clk) if (rst_n) begin
    rd_ack <= 0;
    if (rd_req && !rd_ack) begin
      if (wait_c == 0) wait_c <= 1 + $urandom_range(3);
      else if (wait_c == 1) begin
        rd_ack <= 1; rd_data <= MEM_DW'(3 * int'(rd_addr) + 7); wait_c <= 0;
        checks++;
        if (int'(rd_addr) != exp_addr[nreads % TOTAL]) begin
          failures++; $display("read %0d at %0d, expected %0d", nreads, rd_addr, exp_addr[nreads % TOTAL]);
        end
        nreads++;
      end else wait_c <= wait_c - 1;
    end
  end

  // deserialiser
  int bitn = -1;
  logic [3:0][MEM_DW-1:0] sr;
  always @(posedge sclk) if (srst_n) begin
    if (sfs) begin
      for (int l = 0; l < 4; l++) sr[l] = {15'd0, sd[l]};
      bitn = 1;
    end else if (bitn > 0) begin
      for (int l = 0; l < 4; l++) sr[l] = {sr[l][MEM_DW-2:0], sd[l]};
      bitn++;
    end
    if (bitn == MEM_DW) begin
      for (int l = 0; l < 4; l++) rx.push_back(sr[l]);
      bitn = -1;
    end
  end

  task automatic run_one(input int pass);
    rx.delete();
    @(posedge clk); start <= 1;
    repeat (3) @(posedge clk); start <= 0;
    @(posedge clk);
    checks++; if (!busy) begin failures++; $display("not busy"); end
    while (busy) @(posedge clk);
    repeat (40 * MEM_DW) @(posedge sclk);
    checks++;
    if (rx.size() != TOTAL) begin failures++; $display("pass %0d: %0d words", pass, rx.size()); end
    for (int i = 0; i < TOTAL && i < rx.size(); i++) begin
      checks++;
      if (rx[i] != MEM_DW'(3 * exp_addr[i] + 7)) begin
        failures++; $display("pass %0d word %0d: %0d", pass, i, rx[i]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1; srst_n <= 1;
    repeat (5) @(posedge clk);
    run_one(0);
    run_one(1);
    checks++; if (nreads != 2 * TOTAL) begin failures++; $display("%0d reads", nreads); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
