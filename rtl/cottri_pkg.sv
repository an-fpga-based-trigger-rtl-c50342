// cottri_pkg: constants and types shared by the COMET Phase-I CDC trigger
// (COTTRI) RTL. Everything runs in one 40 MHz clock domain (25 ns period).
// The RECBE readout boards deliver one 2-bit energy code per wire every
// 100 ns, i.e. one "frame" every FRAME_CLKS clocks. Numbers taken from the
// published system: 40 MHz clock, 100 ns frames, 400 ns integration time,
// 32-bit trigger number, 48 CTH counters per ring, 10 front-end boards,
// hit threshold 32. The 48-channel RECBE width is the board's channel count.
package cottri_pkg;

  localparam int unsigned CLK_NS       = 25;   // 40 MHz system clock
  localparam int unsigned FRAME_NS     = 100;  // RECBE 2-bit word period
  localparam int unsigned FRAME_CLKS   = FRAME_NS / CLK_NS;
  localparam int unsigned INTEG_NS     = 400;  // integration time after CTH trigger
  localparam int unsigned INTEG_FRAMES = INTEG_NS / FRAME_NS;

  localparam int unsigned ADC_BITS     = 10;   // RECBE ADC resolution
  localparam int unsigned CH_PER_RECBE = 48;   // channels per RECBE board
  localparam int unsigned N_FE         = 10;   // COTTRI front-end boards
  localparam int unsigned RECBE_PER_FE = 9;    // "eight or nine" RECBEs per FE
  localparam int unsigned N_CTH        = 48;   // CTH counters per ring (CTH IDs)
  localparam int unsigned N_LAYER_CDC  = 20;   // CDC sense layers 0..19
  localparam int unsigned FIRST_LAYER  = 1;    // innermost layer is ignored
  localparam int unsigned N_LAYER_USED = 16;   // layers 1..16 (three outermost ignored)
  localparam int unsigned TRIG_NUM_BITS = 32;  // trigger number length

  localparam int unsigned CNT_BITS     = $clog2(CH_PER_RECBE + 1);   // per-RECBE count
  localparam int unsigned SUM_BITS     = $clog2(N_FE * RECBE_PER_FE * CH_PER_RECBE + 1);
  localparam int unsigned DEFAULT_HIT_THRESHOLD = 32;

  // 2-bit energy-deposition code sent by the RECBE for each wire.
  typedef enum logic [1:0] {
    E_NONE  = 2'd0,   // below noise threshold: no hit
    E_LOW   = 2'd1,   // small deposit
    E_MIP   = 2'd2,   // minimum-ionising, signal-like
    E_LARGE = 2'd3    // large deposit (protons, heavier particles)
  } ecode_t;

  // Neighbour value injected where a neighbour lies outside the FE.
  localparam ecode_t DUMMY_NEIGHBOR = E_MIP;

endpackage
