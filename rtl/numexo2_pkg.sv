// numexo2_pkg: widths, constants and record types shared by the NUMEXO2
// digital signal processing modules.
//
// The board digitises 16 channels with 14-bit ADCs at 200 MS/s. All processing
// runs in one 100 MHz clock domain (the GTS clock), each channel receiving two
// samples per clock. The 48-bit time stamp, the 32-step STOP oversampling, the
// 1024-step dCFD interpolation and the calibration energy of 60000 are the
// published figures; the record layouts below are this design's own choice.
package numexo2_pkg;

  localparam int NCH       = 16;   // channels per board
  localparam int ADC_W     = 14;   // ADC resolution
  localparam int SMP_W     = 16;   // signed sample width inside the DSP
  localparam int TS_W      = 48;   // GTS time stamp
  localparam int EN_W      = 16;   // energy field
  localparam int TSTART_W  = 10;   // dCFD interpolation result, 1/1024 of 10 ns
  localparam int TSTOP_W   = 5;    // STOP position, 1/32 of 10 ns
  localparam int NS_W      = 24;   // time of flight in 1/32 of a 312.5 ps step
  localparam int LINK_W    = 16;   // VIRTEX6 -> VIRTEX5 data path

  localparam logic [EN_W-1:0] CALIB_ENERGY = 16'd60000;  // fictitious energy of calibration events

  // Use of the TRIG_IN front-panel input
  typedef enum logic [1:0] {
    TRIGIN_OFF   = 2'd0,   // ignored
    TRIGIN_GATE  = 2'd1,   // external validation gate for trigger requests
    TRIGIN_CALIB = 2'd2    // rising edge produces calibration events
  } trigin_mode_e;

  // Energy source of a channel (firmware configuration)
  typedef enum logic [1:0] {
    EMODE_TRAPEZOID = 2'd0, // Jordanov trapezoid, HPGe and similar
    EMODE_TAC       = 2'd1, // moving-sum difference on the raw signal (TAC)
    EMODE_CHARGE    = 2'd2  // charge integration at 200 MS/s
  } emode_e;

  // Settings of one channel (written by the board's setup logic)
  typedef struct packed {
    logic [15:0]  trig_alpha;   // differentiator alpha, Q1.15
    logic [15:0]  threshold;    // on S[n], signed
    logic         cfd_en;       // 1: dCFD zero crossing, 0: leading edge
    logic [3:0]   cfd_delay;    // D in 10 ns steps
    logic [3:0]   cfd_frac;     // F in 10 % steps
    logic [10:0]  k;            // trapezoid rise, samples
    logic [10:0]  m;            // trapezoid flat top, samples
    logic [15:0]  trap_alpha;   // pole-zero alpha, 16 fractional bits
    logic [11:0]  q;            // computing delay to the flat-top window
    logic [2:0]   log2n;        // N = 2^log2n averaging samples
    logic [4:0]   e_shift;      // energy scaling
    emode_e       emode;
    logic [7:0]   win;          // charge integration window, clocks
  } ch_cfg_t;

  // Energy record, written once per event into the channel's first FIFO
  typedef struct packed {
    logic            calib;   // calibration event (TRIG_IN)
    logic            dv;      // data valid (1) / data not valid (0)
    logic [EN_W-1:0] energy;
    logic [TS_W-1:0] ts;      // time stamp of the trigger request
  } energy_rec_t;

  // Timing record, written once per event into the channel's second FIFO
  typedef struct packed {
    logic            ok;      // a STOP edge was found inside the range
    logic [NS_W-1:0] ns_x32;  // Ns of the time-of-flight formula, 5 fractional bits
  } tof_rec_t;

  // Entry of the global FIFO
  typedef struct packed {
    logic [3:0]  ch;
    energy_rec_t e;
    tof_rec_t    t;
  } global_rec_t;

endpackage
