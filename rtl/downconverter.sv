// downconverter: digital downconversion of all ADC channels to base band,
// plus the vector sum of the cavity probes.
// A single NCO index steps 0..NCO_LEN-1 once per clock. With a 13 MHz IF
// sampled at fs = 1313/21 MHz the IF advances 21/101 of a cycle per sample,
// so a 101-entry table spans exactly 21 IF periods and is simply replayed.
// Every channel has its own cosine table (number 2c) and sine table (2c+1),
// 101 x 18 bits in 2.16 format, written by the host; the table contents set
// the channel's gain (0..~2) and phase rotation, which is how the probes are
// calibrated before they are summed and how LO drift is corrected. Each
// channel is a ddc_channel (mixer, CIC, FIR). The vector sum adds base-band
// channels 1..N_CAV (channel 0 is the reference), divides by 2^VS_SHIFT and
// saturates to 16 bits.
// Follows the published design: 66 x 101 tables, 18-bit 2.16 entries,
// CIC + FIR, summed probes. Channel numbering, the vector-sum scaling and the
// table write interface are choices of this design.
// Timing: table read 1 cycle, ddc_channel 4 cycles, vector sum 1 cycle more.
// Table writes come from the host clock domain (wclk) between pulses.
module downconverter
  import llrf_pkg::*;
#(
  parameter int unsigned N_CH     = 33,
  parameter int unsigned NCO_LEN  = 101,
  parameter int unsigned N_CAV    = 24,
  parameter int unsigned VS_SHIFT = 5,
  parameter int unsigned CIC_M    = 12
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic signed [N_CH-1:0][ADC_W-1:0] samples,
  // host table write port
  input  logic                              wclk,
  input  logic                              tab_we,
  input  logic [6:0]                        tab_sel,
  input  logic [6:0]                        tab_addr,
  input  logic [TAB_W-1:0]                  tab_wdata,
  // results
  output logic signed [N_CH-1:0][BB_W-1:0]  bb_i,
  output logic signed [N_CH-1:0][BB_W-1:0]  bb_q,
  output logic signed [BB_W-1:0]            vs_i,
  output logic signed [BB_W-1:0]            vs_q
);
  localparam int unsigned TAW = $clog2(NCO_LEN);

  logic [TAW-1:0] idx;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                idx <= '0;
    else if (32'(idx) == NCO_LEN-1) idx <= '0;
    else                       idx <= idx + 1'b1;

  logic signed [N_CH-1:0][ADC_W-1:0] samples_d;  // aligned with table output
  always_ff @(posedge clk) samples_d <= samples;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic signed [TAB_W-1:0] cv, sv;
    dp_ram #(.DW(TAB_W), .DEPTH(NCO_LEN)) u_cos (
      .wclk, .we(tab_we && tab_sel == 7'(2*c)), .waddr(tab_addr[TAW-1:0]), .wdata(tab_wdata),
      .rclk(clk), .raddr(idx), .rdata(cv));
    dp_ram #(.DW(TAB_W), .DEPTH(NCO_LEN)) u_sin (
      .wclk, .we(tab_we && tab_sel == 7'(2*c+1)), .waddr(tab_addr[TAW-1:0]), .wdata(tab_wdata),
      .rclk(clk), .raddr(idx), .rdata(sv));
    ddc_channel #(.CIC_M(CIC_M)) u_ddc (
      .clk, .rst_n, .x(samples_d[c]), .cos_v(cv), .sin_v(sv),
      .i_out(bb_i[c]), .q_out(bb_q[c]));
  end

  // vector sum of the cavity probe channels 1..N_CAV
  logic signed [BB_W+7:0] sum_i, sum_q;
  always_comb begin
    sum_i = '0; sum_q = '0;
    for (int c = 1; c <= N_CAV; c++) begin
      sum_i += (BB_W+8)'($signed(bb_i[c]));
      sum_q += (BB_W+8)'($signed(bb_q[c]));
    end
  end

  function automatic logic signed [BB_W-1:0] sat(input logic signed [BB_W+7:0] v);
    if (v > (BB_W+8)'(32767))       return 16'sh7fff;
    else if (v < -(BB_W+8)'(32768)) return 16'sh8000;
    else                            return v[BB_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin vs_i <= '0; vs_q <= '0; end
    else begin
      vs_i <= sat(sum_i >>> VS_SHIFT);
      vs_q <= sat(sum_q >>> VS_SHIFT);
    end

  initial assert (N_CAV < N_CH && N_CH * 2 <= 128) else $error("bad channel counts");
endmodule
