// dp_ram: simple dual-port RAM with independent write and read clocks, used
// for the NCO tables, the set-point / feed-forward tables and the CW average
// memory. One write port, one read port with a registered output (read
// latency one rclk cycle). A read of the address being written returns the
// old or the new word depending on clock phase; the design only writes tables
// between pulses, so this never matters.
module dp_ram #(
  parameter int unsigned DW    = 16,
  parameter int unsigned DEPTH = 8192,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          wclk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          rclk,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge wclk)
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;

  always_ff @(posedge rclk)
    rdata <= mem[raddr];
endmodule
