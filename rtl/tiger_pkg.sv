// tiger_pkg: constants and types shared by the TIGER digital back-end.
//
// Sizes that follow the ASIC description: 64 channels, a 16-bit coarse
// timestamp from a 160 MHz clock counter, 10-bit fine values from the
// Wilkinson ADCs, four TAC / sample-and-hold buffers per branch, 6-bit
// threshold DACs and two serial output links.
//
// The event word layout, the configuration word layout and the SPI
// address map are choices of this implementation; the ASIC description
// gives only the field widths of the time and charge values.
package tiger_pkg;

  localparam int N_CH     = 64;  // channels per chip
  localparam int CH_W     = 6;   // channel index width
  localparam int COARSE_W = 16;  // coarse timestamp width
  localparam int FINE_W   = 10;  // Wilkinson ADC result width
  localparam int N_TAC    = 4;   // TAC / S-H buffers per branch
  localparam int TAC_W    = 2;   // buffer index width
  localparam int VTH_W    = 6;   // threshold DAC code width
  localparam int N_LINKS  = 2;   // serial output links
  localparam int LINK_BPC = 2;   // bits per link per clock (DDR output, 320 Mb/s)
  localparam int CFG_W    = 24;  // data bits of one configuration register
  localparam int EVT_W    = 64;  // event word width (8 bytes on the link)

  // Acquisition mode of a channel.
  typedef enum logic {
    MODE_SH  = 1'b0,  // T-branch timestamp, charge from the E-branch S/H
    MODE_TOT = 1'b1   // T-branch leading edge and E-branch trailing edge
  } acq_mode_e;

  // One digitised hit as pushed from a channel to the global controller.
  typedef struct packed {
    logic [CH_W-1:0]     channel;  // [63:58]
    logic [TAC_W-1:0]    tac;      // [57:56] buffer that held the hit
    logic [COARSE_W-1:0] tcoarse;  // [55:40] coarse time of T trigger
    logic [FINE_W-1:0]   tfine;    // [39:30] T-branch TDC fine value
    logic [COARSE_W-1:0] ecoarse;  // [29:14] coarse time of E-branch end
    logic [FINE_W-1:0]   efine;    // [13:4]  E-branch TDC or S/H value
    logic                mode;     // [3]     1 = ToT, 0 = S/H
    logic                lost;     // [2]     a trigger was lost before this hit
    logic                timeout;  // [1]     ToT end not seen before timeout
    logic                spare;    // [0]     always 0
  } event_t;

  // Per-channel configuration register (CFG_W = 24 bits).
  typedef struct packed {
    logic [7:0]       sh_window;  // [23:16] S/H window length, clock cycles (0 = 1)
    logic             mode;       // [15]    acq_mode_e value
    logic             tp_tdc;     // [14]    test pulse drives the TDC triggers
    logic             tp_fe;      // [13]    test pulse injected into the front-end
    logic             enable;     // [12]    channel enabled
    logic [VTH_W-1:0] vth_t2;     // [11:6]  E-branch threshold DAC code
    logic [VTH_W-1:0] vth_t1;     // [5:0]   T-branch threshold DAC code
  } ch_cfg_t;

  // Global configuration register (CFG_W = 24 bits).
  typedef struct packed {
    logic [13:0]      reserved;   // [23:10]
    logic [5:0]       tp_amp;     // [9:4]   test pulse amplitude code
    logic [1:0]       dac_range;  // [3:2]   threshold DAC range / LSB select
    logic             tx_enable;  // [1]     links send events (else idle commas)
    logic             training;   // [0]     links send the training pattern
  } glb_cfg_t;

  // SPI command byte: bit 7 = write, bits 6:0 = register address.
  localparam logic [6:0] ADDR_GLOBAL = 7'd64;  // channels use addresses 0..63

  // 8B/10B control symbol used for idle, training and alignment.
  localparam logic [7:0] K28_5 = 8'hBC;

endpackage
