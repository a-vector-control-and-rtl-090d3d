// async_fifo: dual-clock FIFO with Gray-coded pointers, carrying data from
// the SdramClock domain to the independent SerialClock domain of the serial
// port controller (SerialClock comes from its own PLL on a separate crystal,
// so the two clocks are unrelated). Each pointer is passed to the other
// domain through two flip-flops; `full` and `empty` are therefore
// conservative. rdata shows the head entry (first-word fall-through).
module async_fifo #(
  parameter int unsigned DW = 64,
  parameter int unsigned AW = 4
) (
  input  logic          wclk,
  input  logic          wrst_n,
  input  logic          wr_en,
  input  logic [DW-1:0] wdata,
  output logic          full,
  input  logic          rclk,
  input  logic          rrst_n,
  input  logic          rd_en,
  output logic [DW-1:0] rdata,
  output logic          empty
);
  logic [DW-1:0] mem [2**AW];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] b2g(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  wire [AW:0] wbin_n = wbin + (AW+1)'(wr_en && !full);
  always_ff @(posedge wclk) if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;
  always_ff @(posedge wclk or negedge wrst_n)
    if (!wrst_n) begin wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0; end
    else begin
      wbin <= wbin_n; wgray <= b2g(wbin_n);
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
    end
  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  // read side
  wire [AW:0] rbin_n = rbin + (AW+1)'(rd_en && !empty);
  always_ff @(posedge rclk or negedge rrst_n)
    if (!rrst_n) begin rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0; end
    else begin
      rbin <= rbin_n; rgray <= b2g(rbin_n);
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
    end
  assign empty = (rgray == wgray_r2);
  assign rdata = mem[rbin[AW-1:0]];
endmodule
