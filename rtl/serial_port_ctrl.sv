// serial_port_ctrl: after each pulse, sends a 64-sample subset of the
// reference and cavity-probe I/Q data to the DSP (which uses it to measure
// the LO phase drift) over four serial lanes.
// SdramClock side: a rising edge of `start` (end of acquisition) starts a
// read of N_SAMP slow samples, beginning at sample SAMP0, each of N_WORDS
// words (reference I/Q and probe I/Q), through the memory interface. The
// SDRAM address of word w of slow sample n follows the acquisition layout:
//   n*(2*N_FAST + N_SLOW) + N_FAST + w                    (w <  N_SLOW/2)
//   n*(2*N_FAST + N_SLOW) + 2*N_FAST + N_SLOW/2 + w - N_SLOW/2  (otherwise)
// Every four words read form one entry of an async_fifo into the SerialClock
// domain. SerialClock side: each entry is shifted out MSB first, word 4j+k of
// the stream on lane k, 16 bits per word, with `sfs` high during the first
// bit (MSB) of each word group. 3200 words take 800 words per lane, about
// 0.27 ms at 46.9 Mb/s.
// Published: four serial ports of ~50 Mb/s from a separate serial clock, a
// 64-sample subset of reference and probe I/Q sent after each pulse. Word
// order, framing and the subset's position are this design's choices.
module serial_port_ctrl
  import llrf_pkg::*;
#(
  parameter int unsigned N_SLOW  = 50,
  parameter int unsigned N_FAST  = 16,
  parameter int unsigned N_SAMP  = 64,
  parameter int unsigned N_WORDS = 50,
  parameter int unsigned SAMP0   = 0,
  parameter int unsigned N_LANES = 4
) (
  input  logic                clk,      // SdramClock
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                rd_req,
  output logic [MEM_AW-1:0]   rd_addr,
  input  logic                rd_ack,
  input  logic [MEM_DW-1:0]   rd_data,
  input  logic                sclk,     // SerialClock
  input  logic                srst_n,
  output logic [N_LANES-1:0]  sd,
  output logic                sfs
);
  localparam int unsigned HALF   = N_SLOW / 2;
  localparam int unsigned STRIDE = 2 * N_FAST + N_SLOW;
  localparam int unsigned TOTAL  = N_SAMP * N_WORDS;

  // ---------------- SdramClock side ----------------
  logic                               start_q;
  logic [$clog2(N_SAMP+1)-1:0]        n;
  logic [$clog2(N_WORDS+1)-1:0]       w;
  logic [$clog2(N_LANES)-1:0]         lane;
  logic [N_LANES-1:0][MEM_DW-1:0]     pack;
  logic                               push, pend, f_full, wrote;
  logic [$clog2(TOTAL+1)-1:0]         nread;

  function automatic logic [MEM_AW-1:0] addr_of(input int unsigned sn, input int unsigned sw);
    if (sw < HALF) return MEM_AW'(sn * STRIDE + N_FAST + sw);
    else           return MEM_AW'(sn * STRIDE + 2 * N_FAST + HALF + (sw - HALF));
  endfunction

  assign rd_addr = addr_of(32'(n) + SAMP0, 32'(w));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q <= 1'b0; busy <= 1'b0; rd_req <= 1'b0; n <= '0; w <= '0; lane <= '0;
      pack <= '0; push <= 1'b0; nread <= '0;
    end else begin
      start_q <= start;
      push    <= 1'b0;
      if (start && !start_q && !busy) begin
        busy <= 1'b1; rd_req <= 1'b1; n <= '0; w <= '0; lane <= '0; nread <= '0;
      end else if (busy) begin
        if (rd_req && rd_ack) begin
          pack[lane] <= rd_data;
          nread      <= nread + 1'b1;
          if (32'(w) == N_WORDS-1) begin w <= '0; n <= n + 1'b1; end
          else w <= w + 1'b1;
          if (32'(lane) == N_LANES-1) begin
            lane <= '0; push <= 1'b1; rd_req <= 1'b0;   // wait for the FIFO push
          end else lane <= lane + 1'b1;
        end
        if (wrote) begin
          if (32'(nread) == TOTAL) busy <= 1'b0;
          else rd_req <= 1'b1;
        end
      end
    end
  end

  // hold the push until the FIFO has room
  assign wrote = (push || pend) && !f_full;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pend <= 1'b0;
    else pend <= (push || pend) && f_full;

  logic [N_LANES*MEM_DW-1:0] f_rdata;
  logic                      f_empty, f_pop;
  async_fifo #(.DW(N_LANES*MEM_DW), .AW(4)) u_fifo (
    .wclk(clk), .wrst_n(rst_n), .wr_en(wrote), .wdata(pack), .full(f_full),
    .rclk(sclk), .rrst_n(srst_n), .rd_en(f_pop), .rdata(f_rdata), .empty(f_empty));

  // ---------------- SerialClock side ----------------
  logic [N_LANES-1:0][MEM_DW-1:0] sh;
  logic [4:0]                     bitc;   // bits left in the current group

  assign f_pop = (bitc == 0) && !f_empty;

  always_ff @(posedge sclk or negedge srst_n) begin
    if (!srst_n) begin
      sh <= '0; bitc <= '0; sd <= '0; sfs <= 1'b0;
    end else begin
      sfs <= 1'b0;
      if (f_pop) begin
        for (int l = 0; l < N_LANES; l++) begin
          sd[l] <= f_rdata[l*MEM_DW + MEM_DW-1];
          sh[l] <= {f_rdata[l*MEM_DW +: MEM_DW-1], 1'b0};
        end
        sfs  <= 1'b1;
        bitc <= 5'(MEM_DW - 1);
      end else if (bitc != 0) begin
        for (int l = 0; l < N_LANES; l++) begin
          sd[l] <= sh[l][MEM_DW-1];
          sh[l] <= {sh[l][MEM_DW-2:0], 1'b0};
        end
        bitc <= bitc - 1'b1;
      end else sd <= '0;
    end
  end

  initial assert (TOTAL % N_LANES == 0) else $error("word count must fill all lanes");
endmodule
