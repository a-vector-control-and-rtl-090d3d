// sync_fifo: single-clock FIFO between the acquisition serializer and the
// memory interface. Push with wr_en when !full, pop with rd_en when !empty;
// rdata shows the head entry (first-word fall-through). A push while full is
// dropped and sets the sticky `overflow` flag, cleared by clr. Depth and
// width are choices of this design (the published design only says the data
// pass through a FIFO before the SDRAM).
module sync_fifo #(
  parameter int unsigned DW    = 41,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          wr_en,
  input  logic [DW-1:0] wdata,
  input  logic          rd_en,
  output logic [DW-1:0] rdata,
  output logic          empty,
  output logic          full,
  output logic [AW:0]   count,
  output logic          overflow
);
  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign rdata = mem[rp];

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  always_ff @(posedge clk) if (do_wr) mem[wp] <= wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0; overflow <= 1'b0;
    end else if (clr) begin
      wp <= '0; rp <= '0; count <= '0; overflow <= 1'b0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (wr_en && full) overflow <= 1'b1;
    end
  end

  // a pop of an empty FIFO is a protocol error of the reader
  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("sync_fifo: read while empty");
endmodule
