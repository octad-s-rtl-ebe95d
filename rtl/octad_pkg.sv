// octad_pkg: sizes, types and the command register map shared by the
// OCTAD-S spectrometer datapath (one FPGA of the 4G4K instrument: 4.096 GS/s,
// 4096-point FFT, 2048 channels, 45-bit accumulator, 16-bit output).
// The FFT length, the 10-bit ADC, the 32-bit power, the 45-bit accumulator,
// the 16-bit output and the 8000 spectra per dump are the paper's numbers.
// Samples per clock, the number of parallel FFT lanes, the coefficient width,
// the header layout and the register map are choices of this design.
package octad_pkg;

  // Window function selection (the four options of the instrument).
  typedef enum logic [1:0] {
    WIN_NONE     = 2'd0,
    WIN_HANNING  = 2'd1,
    WIN_BLACKMAN = 2'd2,
    WIN_CUSTOM   = 2'd3
  } win_sel_e;

  // Command register addresses (word addresses on the command port).
  typedef enum logic [3:0] {
    REG_CTRL     = 4'h0,  // bit 0: run (start/stop)
    REG_WINDOW   = 4'h1,  // [1:0]: win_sel_e
    REG_ACC_LEN  = 4'h2,  // spectra per accumulation (multiple of NUM_FFT)
    REG_GAIN     = 4'h3,  // [5:0]: lowest accumulator bit of the 16-bit output
    REG_TIME_LO  = 4'h4,  // staged low word of the time to load
    REG_TIME_HI  = 4'h5,  // high word; writing it loads the 64-bit time
    REG_CWIN_ADR = 4'h6,  // custom window write address
    REG_CWIN_DAT = 4'h7,  // custom window coefficient; address then increments
    REG_STATUS   = 4'h8   // read only: [0] sticky ADC overflow, [1] buffer overrun,
                          //            [2] accumulator overrun
  } reg_addr_e;

  // Header written in front of every spectrum by the data formatter.
  localparam logic [15:0] HDR_SYNC  = 16'h4F53;  // "OS"
  localparam int unsigned HDR_WORDS = 12;

  // Fixed-point window coefficient: unsigned, 1.0 = 2**16.
  localparam int unsigned COEF_BITS = 17;
  localparam int unsigned COEF_ONE  = 1 << 16;

endpackage
