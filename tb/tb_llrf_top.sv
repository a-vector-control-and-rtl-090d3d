// tb_llrf_top: end-to-end test of the full-size FPGA (8192-entry tables,
// 2048-sample acquisition, no parameter overrides). The bench closes the
// RF loop the way the cavity-simulator test does: the simulator output on
// DAC 2 is fed back, as a 12-bit IF signal, into the 24 probe channels of
// the LVDS ADCs (serialised at 12 bits per GlobalClock, bit clock offset);
// DAC 0 (the drive) feeds the other 8 LVDS channels and a fixed 13 MHz tone
// the 14-bit reference channel. A model of the SDRAM controller grants at
// random, stores words and returns reads three clocks after the grant.
// Sequence and checks:
//   1. register reset values and write/read-back over the host bus;
//   2. all 70 NCO tables loaded with unit cosine/sine;
//   3. CW mode, loop open, fast simulator: the loop phase and gain are
//      measured at the vector sum and the simulator upconverter tables are
//      rewritten to cancel the phase (as the loop-phase calibration does);
//   4. CW averages: host reads of the CW memory match the live baseband;
//   5. set-point/feed-forward tables loaded (feed-forward 80 % of the need);
//      a closed-loop pulse with the published simulator (200 Hz): exactly
//      2*2048*41 acquisition words at distinct addresses, the stored vector
//      sum reaches the set-point and the stored error is small at the end;
//   6. the serial transfer that follows carries the 64-sample subset, which
//      must equal the words the acquisition stored at those addresses;
//   7. host reads of SDRAM through the window;
//   8. a pulse whose RF ends at 1.2 ms while the acquisition runs to 2 ms:
//      the drive is stored as zero after the end and the simulated cavity
//      field decays with its own time constant;
//   9. a diagnostic run storing the raw reference ADC at full rate.
// Each mechanism is counted and the test fails if any count is zero.
module tb_llrf_top;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int  NWORDS = 2 * 2048 * 41;
  localparam int  SPV = 3000;     // set-point (vector-sum units)

  logic clk = 0, clk2x = 0, sclk = 0, bit_clk = 0, rst_n = 0, trigger = 0;
  logic signed [ADC_W-1:0] adc14 = '0;
  logic adc_frame = 0;
  logic [3:0][7:0] lvds_d = '0;
  logic signed [3:0][DAC_W-1:0] dac;
  logic h_req = 0, h_we = 0, h_ack;
  logic [27:0] h_addr = '0;
  logic [31:0] h_wdata = '0, h_rdata;
  logic mem_req, mem_we, mem_gnt = 0, mem_rvalid = 0;
  logic [MEM_AW-1:0] mem_addr;
  logic [MEM_DW-1:0] mem_wdata, mem_rdata = '0;
  logic [3:0] ser_d;
  logic ser_fs, pulse_active, daq_busy, daq_done, daq_overflow, ser_busy, cw_updated;

  llrf_top dut (.*);

  // clk 24 ns, clk2x 12 ns aligned, bit clock 2 ns offset by 1 ns, sclk unrelated
  initial forever #12 clk = ~clk;
  initial forever #6 clk2x = ~clk2x;
  initial begin #1; forever #1 bit_clk = ~bit_clk; end
  initial forever #10.65 sclk = ~sclk;

  int checks = 0, failures = 0;
  int n_reg = 0, n_nco = 0, n_spff = 0, n_cal = 0, n_cw = 0, n_cwrd = 0, n_pulse = 0;
  int n_decay = 0, n_daqw = 0, n_done = 0, n_loop = 0, n_ser = 0, n_serw = 0, n_hmem = 0, n_diag = 0;

  initial begin
    #40ms; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ---------------- ADC stimulus ----------------
  int nref = 0;
  always @(posedge clk) begin
    adc14 <= ADC_W'($rtoi(6000.0 * $cos(2.0 * PI * 21.0 * real'(nref) / 101.0)));
    nref  <= (nref + 1) % 101;
  end

  int bcnt = 0;
  logic [31:0][11:0] sword;
  always @(posedge bit_clk) begin
    if (bcnt == 0)
      for (int c = 0; c < 32; c++)
        sword[c] = (c < N_CAV) ? 12'(dac[2] >>> 2) : 12'(dac[0] >>> 2);
    adc_frame <= (bcnt == 0);
    for (int c = 0; c < 32; c++) lvds_d[c/8][c%8] <= sword[c][11 - bcnt];
    bcnt = (bcnt + 1) % 12;
  end

  // ---------------- SDRAM controller model ----------------
  logic [MEM_DW-1:0] mem [0:(1<<18)-1];
  bit                wr  [0:(1<<18)-1];
  int rd_wait = -1, nwr = 0, ndup = 0;
  logic [MEM_AW-1:0] rd_a;
  always @(posedge clk2x) if (rst_n) begin
    mem_rvalid <= 0;
    if (rd_wait > 0) rd_wait <= rd_wait - 1;
    if (rd_wait == 0) begin mem_rvalid <= 1; mem_rdata <= mem[18'(rd_a)]; rd_wait <= -1; end
    if (mem_req && mem_gnt) begin
      if (mem_we) begin
        if (wr[18'(mem_addr)]) ndup++;
        mem[18'(mem_addr)] = mem_wdata; wr[18'(mem_addr)] = 1; nwr++;
      end else begin rd_a <= mem_addr; rd_wait <= 2; end
    end
    mem_gnt <= ($urandom_range(7) != 0);
  end

  // ---------------- serial receiver ----------------
  int bitn = -1;
  logic [3:0][MEM_DW-1:0] sr;
  logic [MEM_DW-1:0] ser_rx [$];
  always @(posedge sclk) if (rst_n) begin
    if (ser_fs) begin
      for (int l = 0; l < 4; l++) sr[l] = {15'd0, ser_d[l]};
      bitn = 1; n_ser++;
    end else if (bitn > 0) begin
      for (int l = 0; l < 4; l++) sr[l] = {sr[l][MEM_DW-2:0], ser_d[l]};
      bitn++;
    end
    if (bitn == MEM_DW) begin
      for (int l = 0; l < 4; l++) ser_rx.push_back(sr[l]);
      bitn = -1;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (daq_done) n_done++;
    if (cw_updated) n_cw++;
  end

  // ---------------- host bus ----------------
  task automatic bus(input logic we, input logic [27:0] a, input logic [31:0] d, output logic [31:0] r);
    @(posedge clk2x); h_req <= 1; h_we <= we; h_addr <= a; h_wdata <= d;
    do @(posedge clk2x); while (!h_ack);
    r = h_rdata;
    h_req <= 0;
    @(posedge clk2x);
  endtask

  task automatic wreg(input int n, input logic [31:0] d);
    logic [31:0] r;
    bus(1, 28'(n), d, r);
  endtask

  task automatic nco_table(input int t, input real gain, input real ph);
    logic [31:0] r;
    for (int e = 0; e < NCO_LEN; e++) begin
      real th;
      th = 2.0 * PI * 21.0 * real'(e) / 101.0 + ph;
      bus(1, {4'd1, 10'd0, 7'(t), 7'(e)}, 32'(TAB_W'($rtoi(65535.0 * gain *
          ((t % 2 == 0) ? $cos(th) : $sin(th))))), r);
      n_nco++;
    end
  endtask

  task automatic spff(input int t, input int e, input int v);
    logic [31:0] r;
    bus(1, {4'd2, 9'd0, 2'(t), 13'(e)}, 32'(16'(v)), r);
    n_spff++;
  endtask

  function automatic real vs_mag();
    return $sqrt(real'(dut.vs_i) ** 2 + real'(dut.vs_q) ** 2);
  endfunction

  initial begin
    logic [31:0] r;
    real th, m, th2, ffv, d2;
    int mx, seen_vs;
    repeat (4) @(posedge clk); rst_n <= 1;
    repeat (4) @(posedge clk);

    // 1. registers
    bus(0, 28'd2, 0, r); check(r == 32'd7200, "kp reset"); n_reg++;
    bus(0, 28'd9, 0, r); check(r == 32'd337, "cav_k reset"); n_reg++;
    wreg(9, 32'd65535); bus(0, 28'd9, 0, r); check(r == 32'd65535, "cav_k write"); n_reg++;
    wreg(0, 32'b001);                        // CW mode, loop open

    // 2. NCO tables: downconverter 0..65, upconverters 66..69
    for (int t = 0; t < 2 * N_ADC + 4; t++) nco_table(t, 1.0, 0.0);

    // 3. loop phase calibration (CW mode uses table entry 0)
    spff(0, 0, 0); spff(1, 0, 0); spff(2, 0, 8000); spff(3, 0, 0);
    repeat (4000) @(posedge clk);
    th = $atan2(real'(dut.vs_q), real'(dut.vs_i));
    m  = vs_mag() / 8000.0;
    $display("loop phase %0.1f deg, gain %0.4f", th * 180.0 / PI, m);
    check(m > 0.05, "loop gain");
    nco_table(68, 1.0, -th); nco_table(69, 1.0, -th);
    repeat (4000) @(posedge clk);
    th2 = $atan2(real'(dut.vs_q), real'(dut.vs_i));
    if (th2 > 0.2 || th2 < -0.2) begin             // the other rotation sense
      nco_table(68, 1.0, th); nco_table(69, 1.0, th);
      repeat (4000) @(posedge clk);
      th2 = $atan2(real'(dut.vs_q), real'(dut.vs_i));
    end
    $display("after calibration %0.1f deg", th2 * 180.0 / PI);
    check(th2 < 0.05 && th2 > -0.05, "calibrated phase");
    check(vs_mag() / 8000.0 > 0.9 * m && vs_mag() / 8000.0 < 1.1 * m, "calibrated gain");
    n_cal++;

    // 4. CW averages: channel 0 (reference I/Q) and channel 1 (probe 1 I)
    begin
      int c0;
      c0 = n_cw;
      while (n_cw < c0 + 2) @(posedge clk);
      for (int c = 0; c < 3; c++) begin
        int live;
        live = (c == 0) ? int'(dut.bb_i[0]) : (c == 1) ? int'(dut.bb_q[0]) : int'(dut.bb_i[1]);
        bus(0, {4'd3, 17'd0, 7'(c)}, 0, r);
        check($signed(r) - live <= 3 && live - $signed(r) <= 3, $sformatf("cw ch %0d %0d live %0d", c, $signed(r), live));
        n_cwrd++;
      end
    end

    // 5. pulse tables and a closed-loop pulse
    ffv = 0.8 * real'(SPV) / m;
    for (int e = 0; e < 8192; e++) begin
      spff(0, e, SPV); spff(1, e, 0); spff(2, e, $rtoi(ffv)); spff(3, e, 0);
    end
    wreg(9, 32'd337);
    wreg(0, 32'b010);                        // pulsed, loop closed
    repeat (10) @(posedge clk);
    for (int a = 0; a < (1<<18); a++) wr[a] = 0;
    nwr = 0;
    @(posedge clk); trigger <= 1; @(posedge clk); trigger <= 0;
    @(posedge clk); check(pulse_active, "pulse active");
    while (pulse_active) @(posedge clk);
    n_pulse++;
    while (n_done == 0) @(posedge clk);
    repeat (100) @(posedge clk);
    check(nwr == NWORDS, $sformatf("acquisition wrote %0d", nwr));
    check(ndup == 0, "duplicate addresses");
    mx = 0;
    for (int a = 0; a < NWORDS; a++) if (wr[a]) mx++;
    check(mx == NWORDS, "address range covered");
    check(!daq_overflow, "overflow");
    n_daqw = nwr;
    // last fast sample: vector sum (words 0,1) and error (words 4,5)
    begin
      int b, vi, vq, ei, eq, hi;
      b  = 41 * 4095;
      vi = int'($signed(mem[b])); vq = int'($signed(mem[b+1]));
      ei = int'($signed(mem[b+4])); eq = int'($signed(mem[b+5]));
      $display("end of pulse: vs %0d %0d, error %0d %0d", vi, vq, ei, eq);
      check(vi > SPV - SPV/20 && vi < SPV + SPV/20, "vector sum at set-point");
      check(ei < SPV/50 && ei > -SPV/50 && eq < SPV/50 && eq > -SPV/50, "small error");
      // the set-point word (2, 3) must be the table value
      check(int'($signed(mem[b+2])) == SPV && mem[b+3] == 0, "set-point stored");
      // error reduced from the open-loop 20 % shortfall
      hi = 0;
      for (int k = 100; k < 4096; k += 500) begin
        int e;
        e = int'($signed(mem[41*k + 4]));
        if (e > hi) hi = e;
      end
      check(hi < SPV / 5, "error bounded during the pulse");
      if (vi > SPV - SPV/20 && ei < SPV/50) n_loop++;
    end

    // 6. serial transfer of samples 0..63, words 0..49
    while (ser_busy) @(posedge clk);
    repeat (20 * 16) @(posedge sclk);
    check(ser_rx.size() == 3200, $sformatf("serial words %0d", ser_rx.size()));
    for (int i = 0; i < 3200 && i < ser_rx.size(); i++) begin
      int n, w, a;
      n = i / 50; w = i % 50;
      a = (w < 25) ? n * 82 + 16 + w : n * 82 + 41 + 16 + (w - 25);
      if (ser_rx[i] == mem[a]) n_serw++;
    end
    check(n_serw == 3200, $sformatf("serial words matching %0d", n_serw));
    // the reference I of sample 10 was stored by the acquisition
    seen_vs = int'($signed(mem[10 * 82 + 16]));
    check(seen_vs != 0, "reference stored");

    // 7. host reads of SDRAM
    for (int k = 0; k < 4; k++) begin
      int a;
      a = $urandom_range(NWORDS - 1);
      bus(0, {1'b1, 2'b0, 25'(a)}, 0, r);
      check(r[15:0] == mem[a], "host SDRAM read");
      n_hmem++;
    end

    // 8. RF pulse ending at table entry 5000 (1.2 ms) while the acquisition
    //    runs on: the stored drive must be zero afterwards and the stored
    //    cavity field must decay freely (tau = 2^24/337/fs = 0.8 ms)
    bus(0, 28'd11, 0, r); check(r == 32'd8191, "rf_last reset"); n_reg++;
    wreg(11, 32'd5000);
    begin
      int d0;
      real c1, c2, ratio;
      d0 = n_done;
      @(posedge clk); trigger <= 1; @(posedge clk); trigger <= 0;
      while (n_done == d0) @(posedge clk);
      repeat (100) @(posedge clk);
      // fast sample m is 30 clocks; the RF ends about 75000 clocks in (m ~ 2500)
      c1 = real'($signed(mem[41*2600 + 12]));
      c2 = real'($signed(mem[41*4095 + 12]));
      ratio = c2 / c1;
      $display("after RF end: drive %0d, cavity %0.0f -> %0.0f (ratio %0.3f, expected %0.3f)",
               $signed(mem[41*3000 + 10]), c1, c2, ratio, $exp(-1495.0 * 30.0 * 337.0 / 16777216.0));
      begin
        int di, dq, v;
        di = int'($signed(mem[41*3000 + 10])); dq = int'($signed(mem[41*3000 + 11]));
        v  = int'($signed(mem[41*2000 + 0]));
        check(di <= 2 && di >= -2 && dq <= 2 && dq >= -2, $sformatf("drive off after the RF pulse %0d %0d", di, dq));
        check(v > SPV - SPV/100 && v < SPV + SPV/100, $sformatf("vector sum before the RF end %0d", v));
      end
      check(c1 > 0.5 * SPV / m && ratio > 0.35 && ratio < 0.47, "free cavity decay");
      if (ratio > 0.35 && ratio < 0.47) n_decay++;
    end
    wreg(11, 32'd8191);

    // 9. diagnostic run: raw reference ADC, 1010 words
    wreg(1, 32'd0); wreg(10, 32'd1010); wreg(0, 32'b110);
    for (int a = 0; a < 2048; a++) wr[a] = 0;
    nwr = 0;
    @(posedge clk); trigger <= 1; @(posedge clk); trigger <= 0;
    repeat (1500) @(posedge clk);
    check(nwr == 1010, $sformatf("diagnostic words %0d", nwr));
    for (int a = 0; a + 101 < 1010; a++) begin
      checks++;
      if (!wr[a] || mem[a] != mem[a + 101]) failures++;
      else n_diag++;
    end
    mx = 0;
    for (int a = 0; a < 1010; a++) if ($signed(mem[a]) > mx) mx = $signed(mem[a]);
    check(mx > 5900 && mx <= 6000, $sformatf("diagnostic peak %0d", mx));

    // mechanism counts
    $display("reg %0d nco %0d spff %0d cal %0d cw %0d cwrd %0d pulse %0d daq %0d done %0d",
             n_reg, n_nco, n_spff, n_cal, n_cw, n_cwrd, n_pulse, n_daqw, n_done);
    $display("loop %0d ser %0d serw %0d hmem %0d decay %0d diag %0d", n_loop, n_ser, n_serw, n_hmem, n_decay, n_diag);
    check(n_reg > 0 && n_nco > 0 && n_spff > 0 && n_cal > 0 && n_cw > 0 && n_cwrd > 0, "mechanisms A");
    check(n_pulse > 0 && n_daqw > 0 && n_done > 0 && n_loop > 0 && n_ser > 0 && n_serw > 0, "mechanisms B");
    check(n_hmem > 0 && n_decay > 0 && n_diag > 0, "mechanisms C");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
