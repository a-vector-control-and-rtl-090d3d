// adc_capture: front end of the FPGA. It latches the single 14-bit ADC
// channel and receives the four 8-channel 12-bit LVDS ADCs (through
// lvds_deser), then presents all 33 channels as 14-bit two's-complement
// samples on one GlobalClock edge. Channel 0 is the 14-bit input, channels
// 1..32 are the LVDS channels in receiver order. The 12-bit samples are
// multiplied by 4 so all channels share one full scale (the two LSBs of
// channels 1..32 are therefore always zero).
// Timing: the LVDS bit clock is assumed phase-locked to GlobalClock at 12x
// (both come from the LO), so the deserializer words, stable for a whole
// frame, are registered directly. `samples` is one register stage after the
// 14-bit input and after a deserializer word is complete.
// The 1 + 4x8 channel organisation is the published one; the channel order
// and the scaling are choices of this design.
module adc_capture
  import llrf_pkg::*;
#(
  parameter int unsigned N_DESER = 4,
  parameter int unsigned N_LANES = 8,
  localparam int unsigned N_CH   = 1 + N_DESER * N_LANES
) (
  input  logic                               clk,
  input  logic                               bit_clk,
  input  logic                               rst_n,
  input  logic signed [ADC_W-1:0]            adc14,
  input  logic                               frame,
  input  logic [N_DESER-1:0][N_LANES-1:0]    lvds_d,
  output logic signed [N_CH-1:0][ADC_W-1:0]  samples
);
  logic [N_DESER-1:0][N_LANES-1:0][11:0] words;

  for (genvar d = 0; d < N_DESER; d++) begin : g_rx
    lvds_deser #(.N_LANES(N_LANES), .BITS(12)) u_rx (
      .bit_clk, .rst_n, .frame, .lvds_d(lvds_d[d]),
      .word(words[d]), .word_valid()
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) samples <= '0;
    else begin
      samples[0] <= adc14;
      for (int d = 0; d < N_DESER; d++)
        for (int l = 0; l < N_LANES; l++)
          samples[1 + d*N_LANES + l] <= {words[d][l], 2'b00};
    end
  end
endmodule
