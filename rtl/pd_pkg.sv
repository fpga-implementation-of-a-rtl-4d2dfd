// pd_pkg: types and constants shared by the multi-standard packet detector.
//
// The detector is a chain of three stages (energy detection, fine detection by
// sign cross-correlation, standard detection) configured at run time through a
// register file written by a host processor. This package holds the default
// sizes of the chain, the per-standard parameter record handed out by the
// standard detector, and the register address map of the shared register file.
//
// Sizes taken from the detector's reference configuration: 32-bit coefficient
// registers (one bit per preamble sample), three standards compared in
// parallel, preambles up to 64 samples (two 32-sample windowing cores).
// The sample width, energy window depth, energy scaling and the address map are
// this design's own choices.
package pd_pkg;

  // Reference configuration.
  localparam int unsigned CORE_TAPS    = 32;  // samples per windowing core = coefficient register width
  localparam int unsigned NUM_STD      = 3;   // standards compared in parallel
  localparam int unsigned N_CORES      = 2;   // cores per correlator: up to 64-point correlation
  localparam int unsigned SAMPLE_W     = 16;  // signed I and Q sample width
  localparam int unsigned MAX_WIN      = 64;  // deepest energy window
  localparam int unsigned E_SHIFT      = 8;   // per-sample energy is (I^2+Q^2) >> E_SHIFT
  localparam int unsigned LEN_W        = 8;   // width of a correlation length field

  // Parameter set of one standard, selected when that standard is detected.
  typedef struct packed {
    logic [15:0] packet_len;    // samples in the packet, counted from frame start
    logic [15:0] symbol_size;   // OFDM symbol size
    logic [15:0] training_len;  // training period length
  } std_params_t;

  // Register map (32-bit word addresses on the host bus).
  localparam logic [7:0] A_ENERGY_WIN    = 8'h00;  // energy window length N
  localparam logic [7:0] A_ENERGY_THRESH = 8'h01;  // energy threshold
  localparam logic [7:0] A_STD_ENABLE    = 8'h02;  // bit s enables standard s
  localparam logic [7:0] A_STATUS        = 8'h03;  // read: {frame count[15:0], last std}
  localparam logic [7:0] A_STD_BASE      = 8'h10;  // standard s at A_STD_BASE + 16*s
  // Offsets inside one standard's 16-word block.
  localparam logic [3:0] O_CORR_LEN      = 4'h0;   // correlation length (1..N_CORES*CORE_TAPS)
  localparam logic [3:0] O_CORR_THRESH   = 4'h1;   // signed threshold on Re{P}
  localparam logic [3:0] O_PACKET_LEN    = 4'h2;
  localparam logic [3:0] O_SYMBOL_SIZE   = 4'h3;
  localparam logic [3:0] O_TRAINING_LEN  = 4'h4;
  localparam logic [3:0] O_COUNT         = 4'h5;   // read: frames detected for this standard
  localparam logic [3:0] O_COEF_BASE     = 4'h8;   // core c: I at 8+2c, Q at 9+2c

  // Signed width that holds +-2*n for an n-point complex sign correlation.
  function automatic int unsigned corr_width(int unsigned points);
    return $clog2(2 * points + 1) + 1;
  endfunction

endpackage
