// tb_parallel_port: host bus transactions against the port. Checks the
// reset values and write/read-back of the control registers, that NCO and
// SP/FF table writes produce one strobe each with the decoded table, entry
// and data, that an SDRAM window access reaches the memory side and returns
// its data, and that a CW-memory read returns the word of the addressed
// channel from a RAM model with one clock of latency.
module tb_parallel_port;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic h_req = 0, h_we = 0, h_ack;
  logic [27:0] h_addr = '0;
  logic [31:0] h_wdata = '0, h_rdata;
  llrf_regs_t regs;
  logic nco_we, spff_we, m_req, m_we, m_ack = 0;
  logic [6:0] nco_sel, nco_addr, cw_raddr;
  logic [TAB_W-1:0] nco_wdata;
  logic [1:0] spff_sel;
  logic [12:0] spff_addr;
  logic [BB_W-1:0] spff_wdata, cw_rdata = '0;
  logic [MEM_AW-1:0] m_addr;
  logic [MEM_DW-1:0] m_wdata, m_rdata = '0;
  int checks = 0, failures = 0, n_nco = 0, n_spff = 0;
  logic [6:0] l_sel, l_addr; logic [TAB_W-1:0] l_wd;
  logic [1:0] s_sel; logic [12:0] s_addr; logic [15:0] s_wd;

  parallel_port dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // CW RAM model (word c = 100 * c - 3000) and memory responder
  always @(posedge clk) begin
    cw_rdata <= BB_W'(100 * int'(cw_raddr) - 3000);
    m_ack <= 0;
    if (m_req && !m_ack && $urandom_range(2) == 0) begin
      m_ack <= 1; m_rdata <= m_we ? 16'h0 : MEM_DW'(m_addr[15:0] ^ 16'h1234);
    end
    if (rst_n && nco_we)  begin n_nco++;  l_sel <= nco_sel; l_addr <= nco_addr; l_wd <= nco_wdata; end
    if (rst_n && spff_we) begin n_spff++; s_sel <= spff_sel; s_addr <= spff_addr; s_wd <= spff_wdata; end
  end

  task automatic bus(input logic we, input logic [27:0] a, input logic [31:0] d, output logic [31:0] r);
    @(posedge clk); h_req <= 1; h_we <= we; h_addr <= a; h_wdata <= d;
    do @(posedge clk); while (!h_ack);
    r = h_rdata;
    h_req <= 0;
    @(posedge clk);
  endtask

  initial begin
    logic [31:0] r;
    repeat (3) @(posedge clk); rst_n <= 1;
    bus(0, 28'h0000002, 0, r); checks++; if (r != 32'd7200) begin failures++; $display("kp reset %0d", r); end
    bus(0, 28'h0000009, 0, r); checks++; if (r != 32'd337) begin failures++; $display("cav_k reset %0d", r); end
    bus(1, 28'h0000000, 32'h3, r);
    bus(1, 28'h0000003, 32'd999, r);
    bus(1, 28'h0000006, 32'h03ffff00, r);  // negative 26-bit value
    bus(0, 28'h0000000, 0, r); checks++; if (r != 32'h3 || !regs.cw_mode || !regs.loop_closed) failures++;
    bus(0, 28'h0000003, 0, r); checks++; if (r != 32'd999 || regs.ki != 16'd999) failures++;
    bus(0, 28'h0000006, 0, r); checks++; if (r != 32'hffffff00 || regs.nb1 != 26'h3ffff00) begin failures++; $display("nb1 %h", r); end
    // NCO table write: table 67, entry 100
    bus(1, {4'd1, 10'd0, 7'd67, 7'd100}, 32'h2abcd, r);
    checks++; if (n_nco != 1 || l_sel != 7'd67 || l_addr != 7'd100 || l_wd != 18'h2abcd) begin failures++; $display("nco write %0d %0d %0d %h", n_nco, l_sel, l_addr, l_wd); end
    // SP/FF table write: table 3 (FF Q), entry 8000
    bus(1, {4'd2, 9'd0, 2'd3, 13'd8000}, 32'hbeef, r);
    checks++; if (n_spff != 1 || s_sel != 2'd3 || s_addr != 13'd8000 || s_wd != 16'hbeef) begin failures++; $display("spff write %0d %0d %0d %h", n_spff, s_sel, s_addr, s_wd); end
    // SDRAM read through the window
    bus(0, {1'b1, 2'b0, 25'h1_5555}, 0, r);
    checks++; if (r != {16'd0, 16'h5555 ^ 16'h1234}) begin failures++; $display("sdram read %h", r); end
    bus(1, {1'b1, 2'b0, 25'h00042}, 32'h7777, r);
    checks++; if (n_nco != 1 || n_spff != 1) failures++;
    // CW average read, channel 45 -> 1500
    bus(0, {4'd3, 17'd0, 7'd45}, 0, r);
    checks++; if (r != 32'd1500) begin failures++; $display("cw read %0d", $signed(r)); end
    bus(0, {4'd3, 17'd0, 7'd2}, 0, r);
    checks++; if ($signed(r) != -2800) begin failures++; $display("cw read %0d", $signed(r)); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
