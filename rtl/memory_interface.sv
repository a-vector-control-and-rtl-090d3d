// memory_interface: shares the single SDRAM controller port between three
// users: the acquisition write stream (daq), the host parallel port (reads
// and writes of waveform memory) and the serial port controller (reads of
// the data sent to the DSP). Fixed priority: acquisition first, so waveform
// writes are never held up by readers and a reader that starts after a pulse
// can never overtake data still in the FIFO; then the host; then the serial
// port. One read may be outstanding; while it is, no new request is issued.
// SDRAM controller port protocol (SdramClock): the request (mem_req, mem_we,
// mem_addr, mem_wdata) is taken in a cycle with mem_gnt high; read data come
// back later with mem_rvalid. Requester side: d_pop, and h_ack/s_ack, are
// same-cycle acceptance (writes) or data-return (reads) strobes; a requester
// keeps its request until it sees its strobe. h_rdata and s_rdata are
// mem_rdata passed straight through (no register): the data are only valid
// with the owner's ack, so one shared wire serves both readers.
// The block's existence and its three users follow the published block
// diagram; the arbitration and protocol are this design's choices.
module memory_interface
  import llrf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // acquisition write stream
  input  logic               d_valid,
  input  logic [MEM_AW-1:0]  d_addr,
  input  logic [MEM_DW-1:0]  d_data,
  output logic               d_pop,
  // host
  input  logic               h_req,
  input  logic               h_we,
  input  logic [MEM_AW-1:0]  h_addr,
  input  logic [MEM_DW-1:0]  h_wdata,
  output logic               h_ack,
  output logic [MEM_DW-1:0]  h_rdata,
  // serial port (read only)
  input  logic               s_req,
  input  logic [MEM_AW-1:0]  s_addr,
  output logic               s_ack,
  output logic [MEM_DW-1:0]  s_rdata,
  // SDRAM controller
  output logic               mem_req,
  output logic               mem_we,
  output logic [MEM_AW-1:0]  mem_addr,
  output logic [MEM_DW-1:0]  mem_wdata,
  input  logic               mem_gnt,
  input  logic               mem_rvalid,
  input  logic [MEM_DW-1:0]  mem_rdata
);
  typedef enum logic [1:0] {OWN_NONE, OWN_HOST, OWN_SER} owner_e;
  owner_e rd_owner, sel;

  always_comb begin
    sel = OWN_NONE;
    mem_req = 1'b0; mem_we = 1'b0; mem_addr = '0; mem_wdata = '0;
    d_pop = 1'b0;
    if (rd_owner == OWN_NONE) begin
      if (d_valid) begin
        mem_req = 1'b1; mem_we = 1'b1; mem_addr = d_addr; mem_wdata = d_data;
        d_pop = mem_gnt;
      end else if (h_req) begin
        mem_req = 1'b1; mem_we = h_we; mem_addr = h_addr; mem_wdata = h_wdata;
        sel = OWN_HOST;
      end else if (s_req) begin
        mem_req = 1'b1; mem_addr = s_addr;
        sel = OWN_SER;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_owner <= OWN_NONE;
    else if (mem_rvalid) rd_owner <= OWN_NONE;
    else if (mem_req && mem_gnt && !mem_we) rd_owner <= sel;

  assign h_ack   = (sel == OWN_HOST && mem_gnt && mem_we) || (mem_rvalid && rd_owner == OWN_HOST);
  assign s_ack   = mem_rvalid && rd_owner == OWN_SER;
  assign h_rdata = mem_rdata;
  assign s_rdata = mem_rdata;

  assert property (@(posedge clk) disable iff (!rst_n) mem_rvalid |-> rd_owner != OWN_NONE)
    else $error("memory_interface: read data without a read");
endmodule
