// upconverter: complex upconversion of the base-band drive to the 13 MHz IF.
// Two host-written 101 x 18-bit tables (cosine and sine, 2.16 format, so
// they also set the magnitude and phase of the output, as in the
// downconverter) are replayed with an index stepping once per clock. The two
// 14-bit DAC words are
//   dac_a = (I cos - Q sin) / 2^18,   dac_b = (I sin + Q cos) / 2^18,
// saturated, two's complement. The design has two upconverters: one for the
// controller drive and one for the cavity simulator.
// Published: complex upconversion, 101-entry NCO tables with magnitude and
// phase control, 14-bit DACs. Scaling and DAC coding are this design's.
// Timing: table read 1 cycle, product 1 cycle; dac_* are 2 clocks after u_*.
module upconverter
  import llrf_pkg::*;
#(
  parameter int unsigned NCO_LEN = 101
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [BB_W-1:0]  u_i, u_q,
  input  logic                    wclk,
  input  logic                    tab_we,
  input  logic                    tab_sel,   // 0: cosine, 1: sine
  input  logic [6:0]              tab_addr,
  input  logic [TAB_W-1:0]        tab_wdata,
  output logic signed [DAC_W-1:0] dac_a, dac_b
);
  localparam int unsigned TAW = $clog2(NCO_LEN);

  logic [TAW-1:0] idx;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                idx <= '0;
    else if (32'(idx) == NCO_LEN-1) idx <= '0;
    else                       idx <= idx + 1'b1;

  logic signed [TAB_W-1:0] cv, sv;
  dp_ram #(.DW(TAB_W), .DEPTH(NCO_LEN)) u_cos (
    .wclk, .we(tab_we && !tab_sel), .waddr(tab_addr[TAW-1:0]), .wdata(tab_wdata),
    .rclk(clk), .raddr(idx), .rdata(cv));
  dp_ram #(.DW(TAB_W), .DEPTH(NCO_LEN)) u_sin (
    .wclk, .we(tab_we && tab_sel), .waddr(tab_addr[TAW-1:0]), .wdata(tab_wdata),
    .rclk(clk), .raddr(idx), .rdata(sv));

  logic signed [BB_W-1:0] ui_d, uq_d;
  always_ff @(posedge clk) begin ui_d <= u_i; uq_d <= u_q; end

  function automatic logic signed [DAC_W-1:0] sat(input logic signed [47:0] v);
    if (v > 48'sd8191)       return 14'sh1fff;
    else if (v < -48'sd8192) return 14'sh2000;
    else                     return v[DAC_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin dac_a <= '0; dac_b <= '0; end
    else begin
      dac_a <= sat((48'(ui_d) * 48'(cv) - 48'(uq_d) * 48'(sv)) >>> 18);
      dac_b <= sat((48'(ui_d) * 48'(sv) + 48'(uq_d) * 48'(cv)) >>> 18);
    end
endmodule
