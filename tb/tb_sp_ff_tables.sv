// tb_sp_ff_tables: fills four 32-entry tables with distinct random words,
// starts a pulse and steps the address every 15 clocks. Checks each table
// output at every step, that `active` lasts exactly 32 x 15 clocks, that
// `done` pulses once, and that CW mode holds entry 0 with `active` high.
module tb_sp_ff_tables;
  import llrf_pkg::*;
  localparam int D = 32;
  logic clk = 0, wclk = 0, rst_n = 0, start = 0, step = 0, cw_mode = 0;
  logic tab_we = 0;
  logic [1:0] tab_sel = '0;
  logic [4:0] tab_addr = '0;
  logic [BB_W-1:0] tab_wdata = '0;
  logic signed [BB_W-1:0] sp_i, sp_q, ff_i, ff_q;
  logic [4:0] addr;
  logic [4:0] last = 5'(D - 1);   // RF pulse over the whole table
  logic active, done;
  logic [BB_W-1:0] model [4][D];
  int checks = 0, failures = 0, act_cycles = 0, ndone = 0, div = 0;

  sp_ff_tables #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;
  always #4 wclk = ~wclk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    if (rst_n && active && !cw_mode) act_cycles++;
    if (rst_n && done) ndone++;
    div   <= (start || div == 14) ? 0 : div + 1;
    step  <= !start && (div == 13);
  end

  initial begin
    for (int t = 0; t < 4; t++)
      for (int a = 0; a < D; a++) begin
        logic [BB_W-1:0] d;
        d = BB_W'($urandom);
        @(posedge wclk);
        tab_we <= 1; tab_sel <= 2'(t); tab_addr <= 5'(a); tab_wdata <= d;
        model[t][a] = d;
      end
    @(posedge wclk); tab_we <= 0;
    @(posedge clk); rst_n <= 1;
    repeat (5) @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    for (int a = 0; a < D; a++) begin
      repeat (8) @(posedge clk);   // middle of the step interval
      @(negedge clk);
      checks++;
      if (addr != 5'(a) || sp_i !== model[0][a] || sp_q !== model[1][a] ||
          ff_i !== model[2][a] || ff_q !== model[3][a]) begin
        failures++; if (failures < 6) $display("entry %0d wrong (addr %0d)", a, addr);
      end
      repeat (7) @(posedge clk);
    end
    repeat (40) @(posedge clk);
    checks += 2;
    if (act_cycles != D * 15) begin failures++; $display("active %0d cycles", act_cycles); end
    if (ndone != 1) begin failures++; $display("done %0d times", ndone); end
    cw_mode <= 1;
    repeat (100) @(posedge clk);
    @(negedge clk);
    checks++;
    if (!active || addr != 0 || sp_i !== model[0][0]) begin failures++; $display("CW mode wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
