// llrf_pkg: widths, constants and the host register file shared by the
// multi-cavity LLRF controller. Sizes marked "paper" follow the published
// design (33 ADC channels, 101-entry 18-bit NCO tables, 8K x 16 set-point and
// feed-forward tables, 14-bit DACs, 16-bit acquisition words, 32 M-word
// waveform memory); the others are choices of this implementation.
package llrf_pkg;
  // ADC / DSP chain
  localparam int unsigned N_ADC    = 33;   // paper: 33-channel ADC board
  localparam int unsigned ADC_W    = 14;   // internal sample width
  localparam int unsigned NCO_LEN  = 101;  // paper: 101-element tables
  localparam int unsigned TAB_W    = 18;   // paper: 18-bit, 2.16 format
  localparam int unsigned BB_W     = 16;   // base-band width (paper: 16-bit tables/data)
  localparam int unsigned DAC_W    = 14;   // paper: 14-bit DACs
  localparam int unsigned N_CAV    = 24;   // paper: 24 cavity system
  localparam int unsigned SPFF_DEPTH = 8192; // paper: 8k words deep
  // acquisition
  localparam int unsigned N_SLOW   = 50;   // paper: 25 inputs -> 50 I/Q channels
  localparam int unsigned N_FAST   = 16;   // paper: vector sum + 7 taps -> 16 channels
  localparam int unsigned MEM_AW   = 25;   // paper: 32 MS of 16-bit words (64 MB)
  localparam int unsigned MEM_DW   = 16;
  localparam int unsigned N_DAQ    = N_SLOW + N_FAST;

  typedef logic signed [BB_W-1:0]  bb_t;
  localparam int unsigned NC_W = 26;   // notch coefficients, Q2.24
  typedef logic signed [NC_W-1:0]  coef_t;
  typedef logic [MEM_AW-1:0]       maddr_t;

  // Host address map (28-bit word address on the 32-bit parallel port).
  // h_addr[27]    = 1 : SDRAM window, h_addr[24:0] = word address
  // h_addr[27:24] = 0 : control registers, h_addr[5:0] = register number
  // h_addr[27:24] = 1 : NCO tables, h_addr[13:7] = table (0..65 down, 66..69 up),
  //                     h_addr[6:0] = entry
  // h_addr[27:24] = 2 : SP/FF tables, h_addr[14:13] = table (SP I, SP Q, FF I, FF Q)
  // h_addr[27:24] = 3 : CW average memory, h_addr[6:0] = channel
  localparam logic [3:0] REG_REGION  = 4'd0;
  localparam logic [3:0] NCO_REGION  = 4'd1;
  localparam logic [3:0] SPFF_REGION = 4'd2;
  localparam logic [3:0] CW_REGION   = 4'd3;

  typedef struct packed {
    logic        cw_mode;      // reg 0 bit 0 : CW (1) or pulsed (0) operation
    logic        loop_closed;  // reg 0 bit 1 : feedback on
    logic        diag_mode;    // reg 0 bit 2 : diagnostic acquisition
    logic [5:0]  diag_sel;     // reg 1 : 0..32 raw ADC, 33..36 DAC outputs
    logic [15:0] kp;           // reg 2 : proportional gain, 12.4
    logic [15:0] ki;           // reg 3 : integral gain per sample, 4.12
    logic [15:0] kpole;        // reg 4 : integrator leak, 2^-24 units
    logic [25:0] nb0, nb1, na1, na2; // reg 5..8 : variable notch, Q2.24
    logic [15:0] cav_k;        // reg 9 : cavity simulator bandwidth, 2^-24 units
    logic [24:0] diag_depth;   // reg 10 : diagnostic samples
    logic [12:0] rf_last;      // reg 11 : last SP/FF entry of the RF pulse
  } llrf_regs_t;
endpackage
