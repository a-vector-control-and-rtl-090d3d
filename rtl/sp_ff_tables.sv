// sp_ff_tables: the four set-point and feed-forward tables (SP I, SP Q,
// FF I, FF Q), each DEPTH x 16 bits, written by the host between pulses and
// played out during the pulse. `start` (the pulse trigger) restarts playback
// at entry 0 and raises `active`; the address then advances on every `step`
// enable (SP_FF_Table_Clock, fs/15), so 8192 entries last 8192*15/fs =
// 1.97 ms. The RF pulse ends after entry `last` (a host register; 8191 plays
// the whole table, a smaller value ends the drive early so the acquisition,
// which runs for its own fixed length, records the free cavity decay). After
// entry `last` `active` falls and `done` pulses for one cycle. In CW mode the address stays at 0 and `active`
// stays high, so the loop regulates to a constant set-point.
// Table size, width and the /15 table clock are the published ones; the CW
// behaviour and the control signals are choices of this design.
// Timing: outputs are registered RAM reads, valid one clock after the address.
module sp_ff_tables
  import llrf_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 step,
  input  logic                 cw_mode,
  input  logic [AW-1:0]        last,     // last entry of the RF pulse
  input  logic                 wclk,
  input  logic                 tab_we,
  input  logic [1:0]           tab_sel,
  input  logic [AW-1:0]        tab_addr,
  input  logic [BB_W-1:0]      tab_wdata,
  output logic signed [BB_W-1:0] sp_i, sp_q, ff_i, ff_q,
  output logic [AW-1:0]        addr,
  output logic                 active,
  output logic                 done
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr <= '0; active <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (cw_mode) begin
        addr <= '0; active <= 1'b1;
      end else if (start) begin
        addr <= '0; active <= 1'b1;
      end else if (active && step) begin
        if (addr == last) begin
          active <= 1'b0; done <= 1'b1; addr <= '0;
        end else addr <= addr + 1'b1;
      end
    end
  end

  logic [3:0][BB_W-1:0] rd;
  for (genvar t = 0; t < 4; t++) begin : g_tab
    dp_ram #(.DW(BB_W), .DEPTH(DEPTH)) u_tab (
      .wclk, .we(tab_we && tab_sel == 2'(t)), .waddr(tab_addr), .wdata(tab_wdata),
      .rclk(clk), .raddr(addr), .rdata(rd[t]));
  end
  assign sp_i = rd[0];
  assign sp_q = rd[1];
  assign ff_i = rd[2];
  assign ff_q = rd[3];
endmodule
