// parallel_port: the 32-bit host port through which the VXI slot-0
// controller (and the DSP) configure the FPGA and read its data between
// pulses. Bus protocol (SdramClock domain, inputs assumed synchronised by the
// VXI interface chip): the host raises h_req with h_we, h_addr (28-bit word
// address) and h_wdata and holds them until h_ack pulses (h_rdata valid in
// that cycle); it must drop h_req for at least one cycle before the next
// access. Address map (see llrf_pkg):
//   h_addr[27] = 1        SDRAM word h_addr[24:0] (16 bits, via memory_interface)
//   region 0 (bits 27:24) control registers 0..11 (llrf_regs_t)
//   region 1              NCO tables, write only: table h_addr[13:7], entry h_addr[6:0]
//   region 2              SP/FF tables, write only: table h_addr[14:13], entry h_addr[12:0]
//   region 3              CW average memory, read only: channel h_addr[6:0]
// Registers reset to the settings of the published closed-loop test
// (Kp ~450, Ki 2e7 rad/s, pole 300 Hz, 200 Hz cavity simulator) in this
// design's number formats, loop open, pulsed mode.
// Published: a 32-bit parallel port through which tables are loaded between
// pulses and waveforms are read. The bus protocol and the map are this
// design's.
module parallel_port
  import llrf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               h_req,
  input  logic               h_we,
  input  logic [27:0]        h_addr,
  input  logic [31:0]        h_wdata,
  output logic               h_ack,
  output logic [31:0]        h_rdata,
  output llrf_regs_t         regs,
  // table writes
  output logic               nco_we,
  output logic [6:0]         nco_sel,
  output logic [6:0]         nco_addr,
  output logic [TAB_W-1:0]   nco_wdata,
  output logic               spff_we,
  output logic [1:0]         spff_sel,
  output logic [12:0]        spff_addr,
  output logic [BB_W-1:0]    spff_wdata,
  // CW average memory read
  output logic [6:0]         cw_raddr,
  input  logic [BB_W-1:0]    cw_rdata,
  // memory interface
  output logic               m_req,
  output logic               m_we,
  output logic [MEM_AW-1:0]  m_addr,
  output logic [MEM_DW-1:0]  m_wdata,
  input  logic               m_ack,
  input  logic [MEM_DW-1:0]  m_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_MEM, S_CW, S_CW2, S_DROP} state_e;
  state_e state;

  localparam llrf_regs_t REG_RESET = '{
    cw_mode: 1'b0, loop_closed: 1'b0, diag_mode: 1'b0, diag_sel: 6'd0,
    kp: 16'd7200, ki: 16'd1311, kpole: 16'd506,
    nb0: 26'sd16754050, nb1: -26'sd33399874, na1: -26'sd33379163, na2: 26'sd16710174,
    cav_k: 16'd337, diag_depth: 25'd0, rf_last: 13'd8191};

  wire [3:0] region = h_addr[27:24];

  function automatic logic [31:0] reg_read(input llrf_regs_t r, input logic [5:0] n);
    case (n)
      6'd0:    return {29'd0, r.diag_mode, r.loop_closed, r.cw_mode};
      6'd1:    return {26'd0, r.diag_sel};
      6'd2:    return {16'd0, r.kp};
      6'd3:    return {16'd0, r.ki};
      6'd4:    return {16'd0, r.kpole};
      6'd5:    return {{6{r.nb0[25]}}, r.nb0};
      6'd6:    return {{6{r.nb1[25]}}, r.nb1};
      6'd7:    return {{6{r.na1[25]}}, r.na1};
      6'd8:    return {{6{r.na2[25]}}, r.na2};
      6'd9:    return {16'd0, r.cav_k};
      6'd10:   return {7'd0, r.diag_depth};
      6'd11:   return {19'd0, r.rf_last};
      default: return 32'd0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; regs <= REG_RESET; h_ack <= 1'b0; h_rdata <= '0;
      nco_we <= 1'b0; spff_we <= 1'b0; m_req <= 1'b0;
      nco_sel <= '0; nco_addr <= '0; nco_wdata <= '0;
      spff_sel <= '0; spff_addr <= '0; spff_wdata <= '0; cw_raddr <= '0;
      m_we <= 1'b0; m_addr <= '0; m_wdata <= '0;
    end else begin
      h_ack <= 1'b0; nco_we <= 1'b0; spff_we <= 1'b0;
      case (state)
        S_IDLE: if (h_req) begin
          if (h_addr[27]) begin
            m_req <= 1'b1; m_we <= h_we; m_addr <= h_addr[MEM_AW-1:0];
            m_wdata <= h_wdata[MEM_DW-1:0];
            state <= S_MEM;
          end else if (region == CW_REGION) begin
            cw_raddr <= h_addr[6:0];
            state <= S_CW;
          end else begin
            h_rdata <= '0;
            if (region == REG_REGION) begin
              if (h_we)
                case (h_addr[5:0])
                  6'd0:  {regs.diag_mode, regs.loop_closed, regs.cw_mode} <= h_wdata[2:0];
                  6'd1:  regs.diag_sel   <= h_wdata[5:0];
                  6'd2:  regs.kp         <= h_wdata[15:0];
                  6'd3:  regs.ki         <= h_wdata[15:0];
                  6'd4:  regs.kpole      <= h_wdata[15:0];
                  6'd5:  regs.nb0        <= h_wdata[25:0];
                  6'd6:  regs.nb1        <= h_wdata[25:0];
                  6'd7:  regs.na1        <= h_wdata[25:0];
                  6'd8:  regs.na2        <= h_wdata[25:0];
                  6'd9:  regs.cav_k      <= h_wdata[15:0];
                  6'd10: regs.diag_depth <= h_wdata[24:0];
                  6'd11: regs.rf_last    <= h_wdata[12:0];
                  default: ;
                endcase
              else h_rdata <= reg_read(regs, h_addr[5:0]);
            end else if (region == NCO_REGION && h_we) begin
              nco_we <= 1'b1; nco_sel <= h_addr[13:7]; nco_addr <= h_addr[6:0];
              nco_wdata <= h_wdata[TAB_W-1:0];
            end else if (region == SPFF_REGION && h_we) begin
              spff_we <= 1'b1; spff_sel <= h_addr[14:13]; spff_addr <= h_addr[12:0];
              spff_wdata <= h_wdata[BB_W-1:0];
            end
            h_ack <= 1'b1;
            state <= S_DROP;
          end
        end
        S_MEM: if (m_ack) begin
          m_req <= 1'b0; h_rdata <= {16'd0, m_rdata}; h_ack <= 1'b1; state <= S_DROP;
        end
        S_CW:  state <= S_CW2;            // RAM address registered, read under way
        S_CW2: begin                      // cw_rdata now holds the addressed word
          h_rdata <= {{16{cw_rdata[15]}}, cw_rdata}; h_ack <= 1'b1; state <= S_DROP;
        end
        S_DROP: if (!h_req) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
