// pi_controller: the I/Q feedback controller. The error e = set-point -
// vector sum is formed for I and Q (saturated to 16 bits). The drive is
//   u = ff + fb * ( kp*e / 2^KP_FRAC  +  s / 2^KI_FRAC )
// where the integrator state s follows s <= s + ki*e - kpole*s / 2^POLE_FRAC.
// The leak term kpole moves the integrator pole from DC to
// kpole/2^POLE_FRAC * fs / (2 pi), which is the "pole placement" of the
// controller. With fs = 62.52 MHz the quoted closed-loop setting (Kp ~450,
// Ki = 2e7 rad/s, pole 300 Hz) is kp = 7200, ki = 1311, kpole = 506.
// `active` gates the whole output (no drive between pulses); `fb` closes the
// loop. The integrator is held at zero unless active && fb, and clamped to
// +-2^(KI_FRAC+17) to stop wind-up.
// The PI law with user gains, a pole and feed-forward are published; the
// number formats and the gating are choices of this design.
// Timing: err_* one clock after the inputs, u_* two clocks after.
module pi_controller
  import llrf_pkg::*;
#(
  parameter int unsigned KP_FRAC   = 4,
  parameter int unsigned KI_FRAC   = 12,
  parameter int unsigned POLE_FRAC = 24
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   active,
  input  logic                   fb,
  input  logic signed [BB_W-1:0] sp_i, sp_q, ff_i, ff_q, vs_i, vs_q,
  input  logic [15:0]            kp, ki, kpole,
  output logic signed [BB_W-1:0] err_i, err_q,
  output logic signed [BB_W-1:0] u_i, u_q
);
  localparam int unsigned SW = 48;
  localparam logic signed [SW-1:0] SMAX = SW'(1) <<< (KI_FRAC + 17);

  function automatic logic signed [BB_W-1:0] sat(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return v[BB_W-1:0];
  endfunction

  function automatic logic signed [SW-1:0] integ(input logic signed [SW-1:0] s,
                                                 input logic signed [BB_W-1:0] e,
                                                 input logic [15:0] gi, input logic [15:0] gp);
    logic signed [63:0] n;
    n = 64'(s) + 64'(e) * $signed({48'd0, gi})
        - ((64'(s) * $signed({48'd0, gp})) >>> POLE_FRAC);
    if (n > 64'(SMAX))       return SMAX;
    else if (n < -64'(SMAX)) return -SMAX;
    else                     return n[SW-1:0];
  endfunction

  logic signed [SW-1:0]   s_i, s_q;
  logic signed [BB_W-1:0] ff_i_d, ff_q_d;
  logic                   run, act_d;

  assign run = active && fb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err_i <= '0; err_q <= '0; u_i <= '0; u_q <= '0;
      s_i <= '0; s_q <= '0; ff_i_d <= '0; ff_q_d <= '0; act_d <= 1'b0;
    end else begin
      // stage 1: error
      err_i  <= sat(64'(sp_i) - 64'(vs_i));
      err_q  <= sat(64'(sp_q) - 64'(vs_q));
      ff_i_d <= ff_i;
      ff_q_d <= ff_q;
      act_d  <= active;
      // stage 2: integrator and output
      if (run) begin
        s_i <= integ(s_i, err_i, ki, kpole);
        s_q <= integ(s_q, err_q, ki, kpole);
      end else begin
        s_i <= '0; s_q <= '0;
      end
      if (!act_d) begin
        u_i <= '0; u_q <= '0;
      end else if (!fb) begin
        u_i <= ff_i_d; u_q <= ff_q_d;
      end else begin
        u_i <= sat(64'(ff_i_d) + ((64'(err_i) * $signed({48'd0, kp})) >>> KP_FRAC)
                   + (64'(s_i) >>> KI_FRAC));
        u_q <= sat(64'(ff_q_d) + ((64'(err_q) * $signed({48'd0, kp})) >>> KP_FRAC)
                   + (64'(s_q) >>> KI_FRAC));
      end
    end
  end
endmodule
