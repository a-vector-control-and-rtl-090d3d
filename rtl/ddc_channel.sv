// ddc_channel: one channel of the digital downconverter. The IF sample x is
// multiplied by the cosine and sine NCO table values (18-bit, 2.16 format,
// so the table sets both magnitude, 0..~2, and phase of the channel); the
// products I = x*cos and Q = -x*sin are scaled by 2 so that a table of unit
// magnitude returns the IF amplitude. Both branches are then low-pass
// filtered by a single-stage CIC (a non-decimating moving sum of CIC_M
// samples, normalised by 1/CIC_M) followed by the 3-tap FIR [1 2 1]/4, which
// together remove the 2 x IF mixing product.
// The mixer, the table format and the CIC + 3-tap FIR structure are the
// published ones; CIC_M = 12 (its 5th null at 5/12 fs sits on the 42/101 fs
// mixing product of a 13 MHz IF sampled at 1313/21 MHz), the FIR taps and the
// scaling are choices of this design.
// Timing: fully pipelined, one sample per clock, 4 cycles from x to i_out.
module ddc_channel
  import llrf_pkg::*;
#(
  parameter int unsigned CIC_M = 12
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [ADC_W-1:0]  x,
  input  logic signed [TAB_W-1:0]  cos_v,
  input  logic signed [TAB_W-1:0]  sin_v,
  output logic signed [BB_W-1:0]   i_out,
  output logic signed [BB_W-1:0]   q_out
);
  localparam int unsigned SUM_W = BB_W + $clog2(CIC_M) + 1;
  localparam logic signed [17:0] NORM = 18'(($rtoi(65536.0 / CIC_M + 0.5)));

  function automatic logic signed [BB_W-1:0] sat(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[BB_W-1:0];
  endfunction

  logic signed [BB_W-1:0]  pi_r, pq_r;                 // mixer outputs
  logic signed [BB_W-1:0]  dl_i [CIC_M], dl_q [CIC_M];  // CIC delay line
  logic signed [SUM_W-1:0] acc_i, acc_q;                // CIC moving sums
  logic signed [BB_W-1:0]  n_i, n_q, n_i1, n_q1, n_i2, n_q2; // normalised + FIR taps

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pi_r <= '0; pq_r <= '0; acc_i <= '0; acc_q <= '0;
      n_i <= '0; n_q <= '0; n_i1 <= '0; n_q1 <= '0; n_i2 <= '0; n_q2 <= '0;
      i_out <= '0; q_out <= '0;
      for (int k = 0; k < CIC_M; k++) begin dl_i[k] <= '0; dl_q[k] <= '0; end
    end else begin
      // mixer: (x * c) / 2^15, saturated
      pi_r <= sat((48'(x) * 48'(cos_v)) >>> 15);
      pq_r <= sat(-((48'(x) * 48'(sin_v)) >>> 15));
      // single-stage CIC: acc(n) = acc(n-1) + p(n) - p(n-M)
      dl_i[0] <= pi_r; dl_q[0] <= pq_r;
      for (int k = 1; k < CIC_M; k++) begin dl_i[k] <= dl_i[k-1]; dl_q[k] <= dl_q[k-1]; end
      acc_i <= acc_i + SUM_W'(pi_r) - SUM_W'(dl_i[CIC_M-1]);
      acc_q <= acc_q + SUM_W'(pq_r) - SUM_W'(dl_q[CIC_M-1]);
      // normalise by 1/M
      n_i <= sat((48'(acc_i) * 48'(NORM)) >>> 16);
      n_q <= sat((48'(acc_q) * 48'(NORM)) >>> 16);
      n_i1 <= n_i; n_i2 <= n_i1;
      n_q1 <= n_q; n_q2 <= n_q1;
      // 3-tap FIR [1 2 1]/4
      i_out <= sat((48'(n_i) + 48'(n_i1) + 48'(n_i1) + 48'(n_i2)) >>> 2);
      q_out <= sat((48'(n_q) + 48'(n_q1) + 48'(n_q1) + 48'(n_q2)) >>> 2);
    end
  end
endmodule
