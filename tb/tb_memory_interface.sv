// tb_memory_interface: an acquisition stream of 200 writes, a host doing
// writes and read-backs and a serial reader all compete for a memory model
// that grants at random and returns read data three clocks after a read is
// granted. Checks that every read returns the word last written there (from
// the model's contents), that the acquisition always wins when it is
// requesting and no read is outstanding, and that all 200 stream words land.
module tb_memory_interface;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic d_valid = 0, d_pop;
  logic [MEM_AW-1:0] d_addr = '0, h_addr = '0, s_addr = '0, mem_addr;
  logic [MEM_DW-1:0] d_data = '0, h_wdata = '0, h_rdata, s_rdata, mem_wdata, mem_rdata = '0;
  logic h_req = 0, h_we = 0, h_ack, s_req = 0, s_ack;
  logic mem_req, mem_we, mem_gnt = 0, mem_rvalid = 0;
  logic [MEM_DW-1:0] mem [int];
  int checks = 0, failures = 0, nd = 0, nh = 0, ns = 0, rd_wait = -1;
  logic [MEM_AW-1:0] rd_a;

  memory_interface dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // memory model
  always @(posedge clk) if (rst_n) begin
    mem_rvalid <= 0;
    if (rd_wait > 0) rd_wait <= rd_wait - 1;
    if (rd_wait == 0) begin
      mem_rvalid <= 1; mem_rdata <= mem.exists(int'(rd_a)) ? mem[int'(rd_a)] : 16'hdead; rd_wait <= -1;
    end
    if (mem_req && mem_gnt) begin
      if (mem_we) mem[int'(mem_addr)] = mem_wdata;
      else begin rd_a <= mem_addr; rd_wait <= 2; end
    end
    mem_gnt <= ($urandom_range(3) != 0);
  end

  // priority check
  always @(negedge clk) if (rst_n && d_valid && rd_wait < 0 && !mem_rvalid) begin
    checks++;
    if (!(mem_req && mem_we && mem_addr == d_addr)) begin failures++; $display("stream not first"); end
  end

  // acquisition stream: addresses 0..199, data = addr ^ 16'h5a5a
  int nxt = 0;
  always @(posedge clk) if (rst_n) begin
    if (d_valid && d_pop) nd++;
    if (!d_valid || d_pop) begin
      if (nxt < 200 && $urandom_range(3) == 0) begin
        d_valid <= 1; d_addr <= MEM_AW'(nxt); d_data <= MEM_DW'(nxt ^ 'h5a5a); nxt++;
      end else d_valid <= 0;
    end
  end

  // host: write then read back addresses 1000 + k
  initial begin
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int k = 0; k < 30; k++) begin
      @(posedge clk); h_req <= 1; h_we <= 1; h_addr <= MEM_AW'(1000 + k); h_wdata <= MEM_DW'(7 * k + 3);
      do @(posedge clk); while (!h_ack);
      h_req <= 0;
      @(posedge clk); h_req <= 1; h_we <= 0;
      do @(posedge clk); while (!h_ack);
      checks++;
      if (h_rdata != MEM_DW'(7 * k + 3)) begin failures++; $display("host read %0d", h_rdata); end
      nh++;
      h_req <= 0;
    end
  end

  // serial: reads acquisition addresses 0..49 after they have been written
  initial begin
    repeat (400) @(posedge clk);
    for (int k = 0; k < 50; k++) begin
      s_req <= 1; s_addr <= MEM_AW'(k);
      do @(posedge clk); while (!s_ack);
      checks++;
      if (s_rdata != MEM_DW'(k ^ 'h5a5a)) begin failures++; $display("serial read %0d: %h", k, s_rdata); end
      ns++;
      s_req <= 0;
      @(posedge clk);
    end
    while (nd < 200 && nxt < 1000000) @(posedge clk);
    repeat (10) @(posedge clk);
    checks += 3;
    if (nd != 200) begin failures++; $display("stream wrote %0d", nd); end
    if (nh != 30) begin failures++; $display("host did %0d", nh); end
    for (int a = 0; a < 200; a++) if (!mem.exists(a) || mem[a] != MEM_DW'(a ^ 'h5a5a)) begin failures++; break; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
