// cavity_simulator: base-band model of a superconducting cavity for closed
// loop tests without RF. Each of I and Q is a first-order low-pass
//   y <= y + k * (x - y) / 2^K_FRAC
// whose half bandwidth is f_half = k / 2^K_FRAC * fs / (2 pi); the 200 Hz
// half bandwidth used in the closed-loop tests is k = 337 at fs = 62.52 MHz.
// k is a host register, so the bandwidth is variable. The state keeps
// K_FRAC fraction bits. The published part is a variable-bandwidth base-band
// simulator driven by the controller output; the first-order form (no
// detuning) is this design's choice.
// Timing: one sample per clock, output registered.
module cavity_simulator
  import llrf_pkg::*;
#(
  parameter int unsigned K_FRAC = 24
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [15:0]            k,
  input  logic signed [BB_W-1:0] x_i, x_q,
  output logic signed [BB_W-1:0] y_i, y_q
);
  localparam int unsigned SW = BB_W + K_FRAC + 1;
  logic signed [SW-1:0] s_i, s_q;

  function automatic logic signed [SW-1:0] upd(input logic signed [SW-1:0] s,
                                               input logic signed [BB_W-1:0] x,
                                               input logic [15:0] kk);
    logic signed [SW+17:0] d;
    d = ((SW+18)'(x) <<< K_FRAC) - (SW+18)'(s);       // (x - y) with K_FRAC fraction bits
    return s + SW'((d * $signed({2'b00, kk})) >>> K_FRAC);
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin s_i <= '0; s_q <= '0; end
    else begin
      s_i <= upd(s_i, x_i, k);
      s_q <= upd(s_q, x_q, k);
    end

  assign y_i = BB_W'(s_i >>> K_FRAC);
  assign y_q = BB_W'(s_q >>> K_FRAC);
endmodule
