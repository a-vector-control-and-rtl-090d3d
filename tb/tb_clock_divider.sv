// tb_clock_divider: after a sync, checks over two full /960 periods that
// each enable fires exactly on the cycles where (cycles since sync) is a
// multiple of its ratio, and counts the enables against the expected rate.
module tb_clock_divider;
  logic clk = 0, rst_n = 0, sync = 0;
  logic en_spff, en_2m, en_1m, en_cw;
  int checks = 0, failures = 0;
  int n_spff = 0, n_2m = 0, n_1m = 0, n_cw = 0;

  clock_divider dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (137) @(posedge clk);      // arbitrary phase, then resynchronise
    sync <= 1;
    @(posedge clk);
    sync <= 0;
    for (int t = 1; t <= 1920; t++) begin
      @(negedge clk);
      if (en_spff !== (t % 15 == 0))  begin failures++; $display("spff wrong at %0d", t); end
      if (en_2m   !== (t % 30 == 0))  begin failures++; $display("2m wrong at %0d", t); end
      if (en_1m   !== (t % 60 == 0))  begin failures++; $display("1m wrong at %0d", t); end
      if (en_cw   !== (t % 960 == 0)) begin failures++; $display("cw wrong at %0d", t); end
      checks += 4;
      n_spff += int'(en_spff); n_2m += int'(en_2m); n_1m += int'(en_1m); n_cw += int'(en_cw);
      @(posedge clk);
    end
    checks++;
    if (n_spff != 128 || n_2m != 64 || n_1m != 32 || n_cw != 2) begin
      failures++; $display("counts %0d %0d %0d %0d", n_spff, n_2m, n_1m, n_cw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
