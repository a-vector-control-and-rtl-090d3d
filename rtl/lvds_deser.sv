// lvds_deser: serial-to-parallel receiver for one 8-channel, 12-bit ADC with
// serial LVDS outputs (one data lane per channel). Each lane carries one bit
// per bit_clk cycle, MSB first; `frame` is high together with the MSB of
// every sample. The bits of each lane are shifted into a register and, when
// the last (LSB) bit has arrived, all lanes are copied to `word` and
// word_valid pulses for one bit_clk cycle. `word` then holds for a whole
// frame (BITS bit_clk cycles), long enough for the GlobalClock domain to
// register it. The channel count and sample width are the published ones;
// the single-data-rate, frame-marked serial format is this design's choice.
module lvds_deser #(
  parameter int unsigned N_LANES = 8,
  parameter int unsigned BITS    = 12
) (
  input  logic                        bit_clk,
  input  logic                        rst_n,
  input  logic                        frame,
  input  logic [N_LANES-1:0]          lvds_d,
  output logic [N_LANES-1:0][BITS-1:0] word,
  output logic                        word_valid
);
  logic [N_LANES-1:0][BITS-1:0] shreg;
  logic [$clog2(BITS+1)-1:0]    nbits;   // bits received in this frame

  always_ff @(posedge bit_clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg      <= '0;
      nbits      <= '0;
      word       <= '0;
      word_valid <= 1'b0;
    end else begin
      word_valid <= 1'b0;
      for (int l = 0; l < N_LANES; l++)
        shreg[l] <= {shreg[l][BITS-2:0], lvds_d[l]};
      if (frame) nbits <= 1;
      else if (nbits != 0 && 32'(nbits) < BITS) nbits <= nbits + 1'b1;
      // the LSB arrives when BITS-1 bits are already in
      if (!frame && 32'(nbits) == BITS-1) begin
        for (int l = 0; l < N_LANES; l++)
          word[l] <= {shreg[l][BITS-2:0], lvds_d[l]};
        word_valid <= 1'b1;
        nbits      <= '0;
      end
    end
  end
endmodule
