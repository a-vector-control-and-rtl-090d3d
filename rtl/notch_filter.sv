// notch_filter: second-order IIR notch applied separately to the I and Q
// drive signals, used to suppress the 8pi/9 and 7pi/9 passband modes of the
// 9-cell cavities, which appear at base band as tones at the mode offset f0.
//   y(n) = b0 (x(n) + x(n-2)) + b1 x(n-1) - a1 y(n-1) - a2 y(n-2)
// For a notch at w0 = 2 pi f0 / fs with pole radius r:
//   b1 = -2 cos(w0) b0, a1 = -2 r cos(w0), a2 = r^2,
//   b0 = (1 + a1 + a2) / (2 - 2 cos w0) for unity gain at DC.
// Coefficients are Q2.24 (26-bit signed; 16 fraction bits limit the notch
// depth to about -25 dB for a narrow notch); the state keeps COEF_FRAC extra
// fraction bits so the recursion does not lose resolution. The design uses
// two instances: one with fixed coefficients and one whose coefficients are
// host registers. The two-notch arrangement is published; the filter form,
// formats and the mode offsets are choices of this design.
// Timing: one sample per clock, output registered (1 cycle latency).
module notch_filter
  import llrf_pkg::*;
#(
  parameter int unsigned COEF_FRAC = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [NC_W-1:0]  b0, b1, a1, a2,
  input  logic signed [BB_W-1:0]  x_i, x_q,
  output logic signed [BB_W-1:0]  y_i, y_q
);
  localparam int unsigned YW = BB_W + COEF_FRAC + 4;  // y state, COEF_FRAC fraction bits

  logic signed [BB_W-1:0] x1_i, x2_i, x1_q, x2_q;
  logic signed [YW-1:0]   y1_i, y2_i, y1_q, y2_q;

  function automatic logic signed [YW-1:0] step(
      input logic signed [BB_W-1:0] x, input logic signed [BB_W-1:0] x1,
      input logic signed [BB_W-1:0] x2, input logic signed [YW-1:0] y1,
      input logic signed [YW-1:0] y2, input logic signed [NC_W-1:0] cb0,
      input logic signed [NC_W-1:0] cb1, input logic signed [NC_W-1:0] ca1,
      input logic signed [NC_W-1:0] ca2);
    logic signed [95:0] acc;
    logic signed [95:0] lim;
    acc = 96'(cb0) * (96'(x) + 96'(x2)) + 96'(cb1) * 96'(x1)
        - ((96'(ca1) * 96'(y1) + 96'(ca2) * 96'(y2)) >>> COEF_FRAC);
    lim = 96'(32767) <<< COEF_FRAC;
    if (acc > lim)       return YW'(lim);
    else if (acc < -lim) return YW'(-lim);
    else                 return acc[YW-1:0];
  endfunction

  logic signed [YW-1:0] yn_i, yn_q;
  assign yn_i = step(x_i, x1_i, x2_i, y1_i, y2_i, b0, b1, a1, a2);
  assign yn_q = step(x_q, x1_q, x2_q, y1_q, y2_q, b0, b1, a1, a2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x1_i <= '0; x2_i <= '0; x1_q <= '0; x2_q <= '0;
      y1_i <= '0; y2_i <= '0; y1_q <= '0; y2_q <= '0;
      y_i <= '0; y_q <= '0;
    end else begin
      x1_i <= x_i; x2_i <= x1_i; x1_q <= x_q; x2_q <= x1_q;
      y1_i <= yn_i; y2_i <= y1_i; y1_q <= yn_q; y2_q <= y1_q;
      y_i  <= BB_W'(yn_i >>> COEF_FRAC);
      y_q  <= BB_W'(yn_q >>> COEF_FRAC);
    end
  end
endmodule
