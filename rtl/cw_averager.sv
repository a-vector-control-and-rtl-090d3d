// cw_averager: CW-mode acquisition. In CW operation there is no pulse to
// record, so every acquisition channel is averaged and the averages are kept
// in a small dual-port RAM that the host reads at any time.
// On each acc_en (the 1 MS/s enable, fs/60) all N_CH channels are added to
// their accumulators. On dump (CW_Avg_Clock, fs/960, coincident with an
// acc_en) the sums including that sample are divided by N_AVG = 16 (960/60),
// copied to a holding register and the accumulators restart; the held
// averages are then written into the RAM, one channel per clock, which takes
// N_CH cycles, well inside the 960-cycle dump period. The host reads word c
// (channel c) through the second port in its own clock domain.
// Published: averaged data per channel in dual-port FPGA memory, CW_Avg_Clock
// = fs/960. The plain mean over 16 samples is this design's choice.
module cw_averager
  import llrf_pkg::*;
#(
  parameter int unsigned N_CH  = 66,
  parameter int unsigned N_AVG = 16,
  localparam int unsigned AW   = $clog2(N_CH)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            enable,
  input  logic                            acc_en,
  input  logic                            dump,
  input  logic signed [N_CH-1:0][BB_W-1:0] ch,
  input  logic                            rclk,
  input  logic [AW-1:0]                   raddr,
  output logic [BB_W-1:0]                 rdata,
  output logic                            updated   // pulses when a new set is written
);
  localparam int unsigned SW = BB_W + $clog2(N_AVG) + 1;
  localparam int unsigned SH = $clog2(N_AVG);

  logic signed [N_CH-1:0][SW-1:0]   acc;
  logic signed [N_CH-1:0][BB_W-1:0] hold;
  logic [AW-1:0]                    wcnt;
  logic                             writing;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; hold <= '0; wcnt <= '0; writing <= 1'b0; updated <= 1'b0;
    end else begin
      updated <= 1'b0;
      if (!enable) acc <= '0;
      else if (acc_en) begin
        for (int c = 0; c < N_CH; c++) begin
          if (dump) begin
            hold[c] <= BB_W'(($signed(acc[c]) + SW'($signed(ch[c]))) >>> SH);
            acc[c]  <= '0;
          end else
            acc[c]  <= $signed(acc[c]) + SW'($signed(ch[c]));
        end
        if (dump) begin writing <= 1'b1; wcnt <= '0; end
      end
      if (writing) begin
        if (wcnt == AW'(N_CH-1)) begin writing <= 1'b0; updated <= 1'b1; end
        wcnt <= wcnt + 1'b1;
      end
    end
  end

  dp_ram #(.DW(BB_W), .DEPTH(N_CH)) u_ram (
    .wclk(clk), .we(writing), .waddr(wcnt), .wdata(hold[wcnt]),
    .rclk, .raddr, .rdata);

  initial assert (N_AVG == (1 << SH)) else $error("N_AVG must be a power of two");
endmodule
