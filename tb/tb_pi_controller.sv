// tb_pi_controller: drives random set-point, vector sum and feed-forward
// values and compares err and u every clock with a cycle model of the
// controller law written from its specification (64-bit integers):
//   e = sat16(sp - vs);  u = sat16(ff + floor(kp*e/16) + floor(s/4096));
//   s <= clamp(s + ki*e - floor(s*kpole/2^24)).
// Then checks the gating: feed-forward only with the loop open, zero output
// when not active, and the integrator ramp for a constant error with no leak.
module tb_pi_controller;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, active = 0, fb = 0;
  logic signed [BB_W-1:0] sp_i = '0, sp_q = '0, ff_i = '0, ff_q = '0, vs_i = '0, vs_q = '0;
  logic [15:0] kp = 16'd7200, ki = 16'd1311, kpole = 16'd506;
  logic signed [BB_W-1:0] err_i, err_q, u_i, u_q;
  int checks = 0, failures = 0;

  pi_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint sat16(input longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction
  function automatic longint fdiv(input longint v, input int sh);  // floor(v / 2^sh)
    return v >>> sh;
  endfunction

  // model state (I branch only; Q uses the same law and is checked by symmetry below)
  longint m_e = 0, m_s = 0, m_ff = 0, m_u = 0;
  longint SMAX = longint'(1) <<< 29;
  bit     m_act = 0;

  always @(posedge clk) if (rst_n) begin
    longint ns;
    // stage 2 uses the stage-1 values from before this edge
    if (active && fb) begin
      ns = m_s + m_e * longint'(ki) - fdiv(m_s * longint'(kpole), 24);
      ns = ns > SMAX ? SMAX : (ns < -SMAX ? -SMAX : ns);
    end else ns = 0;
    if (!m_act) m_u = 0;
    else if (!fb) m_u = m_ff;
    else m_u = sat16(m_ff + fdiv(m_e * longint'(kp), 4) + fdiv(m_s, 12));
    m_s  = ns;
    m_e  = sat16(longint'(sp_i) - longint'(vs_i));
    m_ff = ff_i;
    m_act = active;
  end

  task automatic compare(input string what);
    @(negedge clk);
    checks += 3;
    if (longint'(err_i) != m_e) begin failures++; if (failures < 10) $display("%s err %0d exp %0d", what, err_i, m_e); end
    if (longint'(u_i) != m_u)   begin failures++; if (failures < 10) $display("%s u %0d exp %0d", what, u_i, m_u); end
    if (err_q != err_i || u_q != u_i) begin failures++; if (failures < 10) $display("%s I/Q differ", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    active <= 1; fb <= 1;
    // random closed-loop operation, I and Q driven alike
    for (int n = 0; n < 3000; n++) begin
      logic signed [BB_W-1:0] a, b, c;
      a = BB_W'($urandom_range(20000)) - 16'sd10000;
      b = a + BB_W'($urandom_range(400)) - 16'sd200;
      c = BB_W'($urandom_range(4000)) - 16'sd2000;
      @(posedge clk);
      sp_i <= a; sp_q <= a; vs_i <= b; vs_q <= b; ff_i <= c; ff_q <= c;
      if (n == 1500) kpole <= 16'd20000;
      compare("random");
    end
    // loop open: feed-forward only
    @(posedge clk); fb <= 0; ff_i <= 16'sd1234; ff_q <= 16'sd1234;
    repeat (5) compare("open");
    checks++; if (u_i != 16'sd1234) failures++;
    // not active: no drive
    @(posedge clk); active <= 0;
    repeat (5) compare("inactive");
    checks++; if (u_i != 0) failures++;
    // integrator ramp: constant error 100, kp = 0, no leak -> +100*ki/4096 per clock
    @(posedge clk); active <= 1; fb <= 1; kp <= 0; kpole <= 0; ki <= 16'd4096;
    sp_i <= 16'sd100; sp_q <= 16'sd100; vs_i <= 0; vs_q <= 0; ff_i <= 0; ff_q <= 0;
    repeat (10) @(posedge clk);
    begin
      logic signed [BB_W-1:0] u0;
      @(negedge clk); u0 = u_i;
      repeat (20) @(posedge clk);
      @(negedge clk);
      checks++;
      if (u_i - u0 != 16'sd2000) begin failures++; $display("ramp %0d, expected 2000", u_i - u0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
