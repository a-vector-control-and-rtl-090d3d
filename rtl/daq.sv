// daq: pulse waveform acquisition into the external SDRAM.
// GlobalClock (clk, fs) side: the pulse trigger arms the acquisition, which
// begins at the next 1 MS/s enable (en_1m, fs/60). On every 2 MS/s enable
// (en_2m, fs/30) the N_FAST fast channels (vector sum and tap points) are
// latched, and on every 1 MS/s enable also the N_SLOW slow channels
// (reference and probe I/Q), all on the same clock edge. Each latch toggles
// `tick`. SdramClock (clk2x, 2 fs) side: every tick starts one frame that is
// written, one word per clk2x cycle, into a FIFO together with its SDRAM
// address. A frame is the N_FAST fast words followed by one half of the slow
// words (first half in frames that start a 1 MS/s period, second half in the
// others), so one 1 MS/s sample period stores 2*N_FAST + N_SLOW = 82 words
// in 2*(N_FAST + N_SLOW/2) = 82 consecutive addresses, and a frame (41
// words) always finishes within the 60 clk2x cycles before the next one.
// Word w of slow sample n is at 82n + 16 + w (w < 25) or 82n + 41 + 16 +
// (w - 25); fast word f of 2 MS/s sample m is at 41m + f. After 2*DEPTH
// frames the acquisition stops and `done` pulses (clk domain).
// Diagnostic mode stores the selected raw channel once per clk for
// diag_depth samples from address 0.
// Published: trigger start, common latch edge, fs/60 and fs/30 rates, the
// 50 + 16 channels, FIFO before SDRAM, transfer clock 2fs, interleaved
// storage, ~2k samples per channel, diagnostic mode up to 32 MS. The exact
// frame layout is this design's choice. clk and clk2x must come from the same
// PLL (edges aligned), which is why a toggle and one register suffice to pass
// ticks across.
module daq
  import llrf_pkg::*;
#(
  parameter int unsigned N_SLOW     = 50,
  parameter int unsigned N_FAST     = 16,
  parameter int unsigned DEPTH      = 2048,
  parameter int unsigned FIFO_DEPTH = 256
) (
  input  logic                          clk,
  input  logic                          clk2x,
  input  logic                          rst_n,
  // GlobalClock domain
  input  logic                          trigger,
  input  logic                          en_2m,
  input  logic                          en_1m,
  input  logic                          diag_mode,
  input  logic [MEM_AW-1:0]             diag_depth,
  input  logic signed [N_SLOW-1:0][BB_W-1:0] slow,
  input  logic signed [N_FAST-1:0][BB_W-1:0] fast,
  input  logic signed [BB_W-1:0]        raw,
  output logic                          busy,
  output logic                          done,
  // SdramClock domain: write stream to the memory interface
  output logic                          m_valid,
  output logic [MEM_AW-1:0]             m_addr,
  output logic [MEM_DW-1:0]             m_data,
  input  logic                          m_pop,
  output logic                          overflow
);
  localparam int unsigned HALF  = N_SLOW / 2;
  localparam int unsigned FRAME = N_FAST + HALF;
  localparam int unsigned FW    = $clog2(FRAME + 1);

  // ---------------- GlobalClock side ----------------
  logic                    armed, diag_l, half_l, tick;
  logic [MEM_AW-1:0]       nframes;   // frames (or diagnostic words) latched
  logic signed [N_SLOW-1:0][BB_W-1:0] slow_l;
  logic signed [N_FAST-1:0][BB_W-1:0] fast_l;
  logic signed [BB_W-1:0]  raw_l;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed <= 1'b0; busy <= 1'b0; done <= 1'b0; diag_l <= 1'b0; half_l <= 1'b0;
      tick <= 1'b0; nframes <= '0; slow_l <= '0; fast_l <= '0; raw_l <= '0;
    end else begin
      done <= 1'b0;
      if (trigger) begin
        armed <= 1'b1; busy <= 1'b0; nframes <= '0; diag_l <= diag_mode;
      end else if (armed) begin
        if (!busy && diag_l) busy <= 1'b1;
        if (diag_l ? busy : (en_2m && (busy || en_1m))) begin
          if (!diag_l) begin
            busy    <= 1'b1;             // the first frame starts on a 1 MS/s edge
            fast_l  <= fast;
            if (en_1m) slow_l <= slow;
            half_l  <= !en_1m;
          end
          raw_l   <= raw;
          tick    <= ~tick;
          nframes <= nframes + 1'b1;
          if (nframes == (diag_l ? diag_depth - 1'b1 : MEM_AW'(2*DEPTH - 1))) begin
            busy <= 1'b0; armed <= 1'b0; done <= 1'b1;
          end
        end
      end
    end
  end

  // ---------------- SdramClock side ----------------
  logic              tick_q, tick_qq, in_frame, go;
  logic [FW-1:0]     widx;
  logic [MEM_AW-1:0] wptr;
  logic              f_wr;
  logic [MEM_AW+MEM_DW-1:0] f_wdata, f_rdata;

  assign go = (tick_q != tick_qq);

  always_ff @(posedge clk2x or negedge rst_n) begin
    if (!rst_n) begin
      tick_q <= 1'b0; tick_qq <= 1'b0; in_frame <= 1'b0; widx <= '0; wptr <= '0;
    end else begin
      tick_q  <= tick;
      tick_qq <= tick_q;
      if (trigger) wptr <= '0;         // trigger is a clk pulse: seen on two clk2x edges
      if (go) begin
        in_frame <= !diag_l;
        widx     <= '0;
      end else if (in_frame) begin
        if (widx == FW'(FRAME-1)) in_frame <= 1'b0;
        widx <= widx + 1'b1;
      end
      if (f_wr) wptr <= wptr + 1'b1;
    end
  end

  always_comb begin
    f_wr    = in_frame || (go && diag_l);
    f_wdata = '0;
    if (go && diag_l)
      f_wdata = {wptr, raw_l};
    else if (in_frame) begin
      if (32'(widx) < N_FAST) f_wdata = {wptr, fast_l[widx]};
      else                    f_wdata = {wptr, slow_l[32'(widx) - N_FAST + (half_l ? HALF : 0)]};
    end
  end

  logic f_empty, f_full;
  logic [$clog2(FIFO_DEPTH):0] f_count;
  sync_fifo #(.DW(MEM_AW+MEM_DW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk2x), .rst_n, .clr(1'b0), .wr_en(f_wr), .wdata(f_wdata),
    .rd_en(m_pop && !f_empty), .rdata(f_rdata), .empty(f_empty), .full(f_full),
    .count(f_count), .overflow(overflow));

  assign m_valid = !f_empty;
  assign {m_addr, m_data} = f_rdata;
endmodule
