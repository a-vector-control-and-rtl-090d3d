// llrf_top: FPGA of one multi-cavity field control module (MFC) of the
// 24-cavity LLRF system. The signal path, all in the GlobalClock (clk = fs =
// 1313/21 MHz) domain:
//   adc_capture -> downconverter (33 channels, NCO tables, vector sum of
//   channels 1..24) -> pi_controller (set-point/feed-forward tables from
//   sp_ff_tables) -> fixed notch (7pi/9 mode) -> variable notch (8pi/9
//   mode) -> upconverter 0 -> DAC 0/1 (drive to the transmitter)
//   and the same drive -> cavity_simulator -> upconverter 1 -> DAC 2/3.
// clock_divider makes the fs/15, fs/30, fs/60 and fs/960 enables, restarted
// by the pulse trigger. The acquisition (daq) stores 25 complex inputs
// (reference = channel 0, probes 1..24) at fs/60 and 8 complex tap signals at
// fs/30 into SDRAM through memory_interface, at SdramClock (clk2x = 2 fs,
// same PLL as clk). In CW mode cw_averager keeps per-channel averages
// instead. After each acquisition serial_port_ctrl sends the first 64
// samples of reference and probe I/Q to the DSP on four lanes clocked by
// SerialClock (sclk). The host reaches registers, tables, CW averages and
// SDRAM through parallel_port.
// The eight fast (2 MS/s) tap signals, I and Q each: 0 vector sum,
// 1 set-point, 2 error, 3 PI output, 4 fixed-notch output, 5 drive
// (variable-notch output), 6 cavity simulator, 7 feed-forward.
// Diagnostic channel select: 0..32 raw ADC channel, 33..36 DAC 0..3.
// Host registers are written between pulses and used in the clk domain
// without synchronisers (they are static while they are used).
// The SDRAM controller, PLLs, converters and DSP are outside this module: the
// SDRAM controller's word port (mem_*) and the clocks are ports.
module llrf_top
  import llrf_pkg::*;
#(
  parameter int unsigned SPFF_DEPTH = 8192,
  parameter int unsigned DAQ_DEPTH  = 2048
) (
  input  logic                        clk,
  input  logic                        clk2x,
  input  logic                        sclk,
  input  logic                        bit_clk,
  input  logic                        rst_n,
  input  logic                        trigger,
  // ADCs
  input  logic signed [ADC_W-1:0]     adc14,
  input  logic                        adc_frame,
  input  logic [3:0][7:0]             lvds_d,
  // DACs
  output logic signed [3:0][DAC_W-1:0] dac,
  // host bus (from the VXI interface chip)
  input  logic                        h_req,
  input  logic                        h_we,
  input  logic [27:0]                 h_addr,
  input  logic [31:0]                 h_wdata,
  output logic                        h_ack,
  output logic [31:0]                 h_rdata,
  // SDRAM controller word port
  output logic                        mem_req,
  output logic                        mem_we,
  output logic [MEM_AW-1:0]           mem_addr,
  output logic [MEM_DW-1:0]           mem_wdata,
  input  logic                        mem_gnt,
  input  logic                        mem_rvalid,
  input  logic [MEM_DW-1:0]           mem_rdata,
  // serial ports to the DSP
  output logic [3:0]                  ser_d,
  output logic                        ser_fs,
  // status
  output logic                        pulse_active,
  output logic                        daq_busy,
  output logic                        daq_done,
  output logic                        daq_overflow,
  output logic                        ser_busy,
  output logic                        cw_updated
);
  // fixed notch at the 7pi/9 mode, ~2.9 MHz below the pi mode, r = 0.998
  localparam coef_t FN_B0 = 26'sd16744457,  FN_B1 = -26'sd32076832;
  localparam coef_t FN_A1 = -26'sd32075308, FN_A2 = 26'sd16710174;

  llrf_regs_t regs;

  // ---------------- clocks and tables ----------------
  logic en_spff, en_2m, en_1m, en_cw;
  clock_divider u_div (.clk, .rst_n, .sync(trigger), .en_spff, .en_2m, .en_1m, .en_cw);

  logic              nco_we, spff_we;
  logic [6:0]        nco_sel, nco_addr;
  logic [TAB_W-1:0]  nco_wdata;
  logic [1:0]        spff_sel;
  logic [12:0]       spff_addr;
  logic [BB_W-1:0]   spff_wdata;

  // ---------------- signal processing ----------------
  logic signed [N_ADC-1:0][ADC_W-1:0] samples;
  adc_capture u_adc (.clk, .bit_clk, .rst_n, .adc14, .frame(adc_frame), .lvds_d, .samples);

  bb_t [N_ADC-1:0] bb_i, bb_q;
  bb_t vs_i, vs_q;
  downconverter #(.N_CH(N_ADC), .N_CAV(N_CAV)) u_ddc (
    .clk, .rst_n, .samples, .wclk(clk2x),
    .tab_we(nco_we && nco_sel < 7'(2*N_ADC)), .tab_sel(nco_sel), .tab_addr(nco_addr),
    .tab_wdata(nco_wdata), .bb_i, .bb_q, .vs_i, .vs_q);

  bb_t sp_i, sp_q, ff_i, ff_q;
  logic [$clog2(SPFF_DEPTH)-1:0] sp_addr;
  logic sp_done;
  sp_ff_tables #(.DEPTH(SPFF_DEPTH)) u_tab (
    .clk, .rst_n, .start(trigger && !regs.cw_mode), .step(en_spff), .cw_mode(regs.cw_mode),
    .last(regs.rf_last[$clog2(SPFF_DEPTH)-1:0]),
    .wclk(clk2x), .tab_we(spff_we), .tab_sel(spff_sel),
    .tab_addr(spff_addr[$clog2(SPFF_DEPTH)-1:0]), .tab_wdata(spff_wdata),
    .sp_i, .sp_q, .ff_i, .ff_q, .addr(sp_addr), .active(pulse_active), .done(sp_done));

  bb_t err_i, err_q, u_i, u_q;
  pi_controller u_pi (
    .clk, .rst_n, .active(pulse_active), .fb(regs.loop_closed),
    .sp_i, .sp_q, .ff_i, .ff_q, .vs_i, .vs_q,
    .kp(regs.kp), .ki(regs.ki), .kpole(regs.kpole),
    .err_i, .err_q, .u_i, .u_q);

  bb_t n1_i, n1_q, drv_i, drv_q;
  notch_filter u_notch_fixed (
    .clk, .rst_n, .b0(FN_B0), .b1(FN_B1), .a1(FN_A1), .a2(FN_A2),
    .x_i(u_i), .x_q(u_q), .y_i(n1_i), .y_q(n1_q));
  notch_filter u_notch_var (
    .clk, .rst_n, .b0(regs.nb0), .b1(regs.nb1), .a1(regs.na1), .a2(regs.na2),
    .x_i(n1_i), .x_q(n1_q), .y_i(drv_i), .y_q(drv_q));

  upconverter u_up_drive (
    .clk, .rst_n, .u_i(drv_i), .u_q(drv_q), .wclk(clk2x),
    .tab_we(nco_we && nco_sel[6:1] == 6'(N_ADC)), .tab_sel(nco_sel[0]),
    .tab_addr(nco_addr), .tab_wdata(nco_wdata), .dac_a(dac[0]), .dac_b(dac[1]));

  bb_t cav_i, cav_q;
  cavity_simulator u_cav (.clk, .rst_n, .k(regs.cav_k), .x_i(drv_i), .x_q(drv_q),
                          .y_i(cav_i), .y_q(cav_q));

  upconverter u_up_sim (
    .clk, .rst_n, .u_i(cav_i), .u_q(cav_q), .wclk(clk2x),
    .tab_we(nco_we && nco_sel[6:1] == 6'(N_ADC + 1)), .tab_sel(nco_sel[0]),
    .tab_addr(nco_addr), .tab_wdata(nco_wdata), .dac_a(dac[2]), .dac_b(dac[3]));

  // ---------------- acquisition ----------------
  bb_t [N_SLOW-1:0] slow;
  bb_t [N_FAST-1:0] fast;
  bb_t              raw;
  always_comb begin
    for (int c = 0; c < N_SLOW/2; c++) begin
      slow[2*c]   = bb_i[c];
      slow[2*c+1] = bb_q[c];
    end
    fast = {ff_q, ff_i, cav_q, cav_i, drv_q, drv_i, n1_q, n1_i,
            u_q, u_i, err_q, err_i, sp_q, sp_i, vs_q, vs_i};
    if (32'(regs.diag_sel) < N_ADC) raw = BB_W'($signed(samples[regs.diag_sel]));
    else if (32'(regs.diag_sel) < N_ADC + 4) raw = BB_W'($signed(dac[32'(regs.diag_sel) - N_ADC]));
    else raw = '0;
  end

  logic              d_valid, d_pop;
  logic [MEM_AW-1:0] d_addr;
  logic [MEM_DW-1:0] d_data;
  daq #(.N_SLOW(N_SLOW), .N_FAST(N_FAST), .DEPTH(DAQ_DEPTH)) u_daq (
    .clk, .clk2x, .rst_n, .trigger(trigger && !regs.cw_mode), .en_2m, .en_1m,
    .diag_mode(regs.diag_mode), .diag_depth(regs.diag_depth),
    .slow, .fast, .raw, .busy(daq_busy), .done(daq_done),
    .m_valid(d_valid), .m_addr(d_addr), .m_data(d_data), .m_pop(d_pop),
    .overflow(daq_overflow));

  logic [6:0]      cw_raddr;
  logic [BB_W-1:0] cw_rdata;
  cw_averager #(.N_CH(N_DAQ)) u_cw (
    .clk, .rst_n, .enable(regs.cw_mode), .acc_en(en_1m), .dump(en_cw),
    .ch({fast, slow}), .rclk(clk2x), .raddr(cw_raddr[$clog2(N_DAQ)-1:0]), .rdata(cw_rdata),
    .updated(cw_updated));

  // ---------------- host and memory ----------------
  logic              hm_req, hm_we, hm_ack, s_req, s_ack;
  logic [MEM_AW-1:0] hm_addr, s_addr;
  logic [MEM_DW-1:0] hm_wdata, hm_rdata, s_rdata;

  parallel_port u_pp (
    .clk(clk2x), .rst_n, .h_req, .h_we, .h_addr, .h_wdata, .h_ack, .h_rdata, .regs,
    .nco_we, .nco_sel, .nco_addr, .nco_wdata, .spff_we, .spff_sel, .spff_addr, .spff_wdata,
    .cw_raddr, .cw_rdata,
    .m_req(hm_req), .m_we(hm_we), .m_addr(hm_addr), .m_wdata(hm_wdata),
    .m_ack(hm_ack), .m_rdata(hm_rdata));

  memory_interface u_mi (
    .clk(clk2x), .rst_n,
    .d_valid, .d_addr, .d_data, .d_pop,
    .h_req(hm_req), .h_we(hm_we), .h_addr(hm_addr), .h_wdata(hm_wdata),
    .h_ack(hm_ack), .h_rdata(hm_rdata),
    .s_req, .s_addr, .s_ack, .s_rdata,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata);

  serial_port_ctrl #(.N_SLOW(N_SLOW), .N_FAST(N_FAST)) u_ser (
    .clk(clk2x), .rst_n, .start(daq_done && !regs.diag_mode), .busy(ser_busy),
    .rd_req(s_req), .rd_addr(s_addr), .rd_ack(s_ack), .rd_data(s_rdata),
    .sclk, .srst_n(rst_n), .sd(ser_d), .sfs(ser_fs));
endmodule
