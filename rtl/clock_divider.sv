// clock_divider: the decimated clocks of the FPGA, produced as one-cycle
// enables in the GlobalClock (fs) domain: fs/15 steps the set-point and
// feed-forward tables, fs/30 and fs/60 latch the 2 MS/s and 1 MS/s
// acquisition channels, fs/960 dumps the CW averages. The four ratios follow
// the published clock divider; deriving all of them from a single modulo-960
// counter (so every enable of a slower clock coincides with one of each faster
// clock) and restarting it with `sync` (the pulse trigger) are choices of this
// design. After sync the first enable of each output comes DIV cycles later.
module clock_divider #(
  parameter int unsigned DIV_SPFF = 15,
  parameter int unsigned DIV_2M   = 30,
  parameter int unsigned DIV_1M   = 60,
  parameter int unsigned DIV_CW   = 960
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sync,
  output logic en_spff,
  output logic en_2m,
  output logic en_1m,
  output logic en_cw
);
  logic [$clog2(DIV_CW)-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                cnt <= '0;
    else if (sync)             cnt <= '0;
    else if (32'(cnt) == DIV_CW-1) cnt <= '0;
    else                       cnt <= cnt + 1'b1;

  // cnt counts 0..DIV_CW-1; an enable fires on the last cycle of its period
  always_comb begin
    en_spff = !sync && ((32'(cnt) + 1) % DIV_SPFF == 0);
    en_2m   = !sync && ((32'(cnt) + 1) % DIV_2M   == 0);
    en_1m   = !sync && ((32'(cnt) + 1) % DIV_1M   == 0);
    en_cw   = !sync && (32'(cnt) == DIV_CW - 1);
  end

  initial begin
    assert (DIV_CW % DIV_1M == 0 && DIV_1M % DIV_2M == 0 && DIV_CW % DIV_SPFF == 0)
      else $error("divider ratios must nest");
  end
endmodule
