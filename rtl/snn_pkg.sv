// snn_pkg: sizes, number formats and the class encoding shared by the
// spiking radioisotope classifier.
//
// The network sizes are those of the four-layer network: a 3238-channel
// energy input, a 1-D convolution with 16 maps and an 8-tap kernel (3231
// positions), a second 1-D convolution with 4 maps and an 8x16 kernel (3224
// positions) and a fully connected layer of 6 output neurons, one per class.
// These give 51696 + 12896 + 6 spiking neurons and 78016 weights (no biases).
// The number formats (8-bit weights, 16-bit membranes) and the leak shift are
// this design's choices; the network only needs low-precision arithmetic.
package snn_pkg;

  // Network geometry
  localparam int unsigned N_IN   = 3238;          // calibrated energy bins
  localparam int unsigned KERNEL = 8;             // taps of both convolutions
  localparam int unsigned C1     = 16;            // maps of convolution 1
  localparam int unsigned C2     = 4;             // maps of convolution 2
  localparam int unsigned N_OUT  = 6;             // output classes
  localparam int unsigned L1     = N_IN - KERNEL + 1;  // 3231
  localparam int unsigned L2     = L1 - KERNEL + 1;    // 3224

  // Number formats
  localparam int unsigned W_W    = 8;             // signed weight width
  localparam int unsigned V_W    = 16;            // signed membrane width
  localparam int unsigned LEAK_SHIFT = 4;         // v -= v >>> 4 each timestep

  // Analogue-to-event front end
  localparam int unsigned AMP_W  = 12;            // sampled pulse amplitude
  localparam int unsigned N_THR  = 3;             // thresholds Thr_1..Thr_3

  // Output classes: five industrial isotopes and background
  typedef enum logic [2:0] {
    CLS_AM241 = 3'd0,
    CLS_BA133 = 3'd1,
    CLS_CO60  = 3'd2,
    CLS_CS137 = 3'd3,
    CLS_EU152 = 3'd4,
    CLS_BKG   = 3'd5
  } iso_class_e;

  // Weight memory selector of the load port
  typedef enum logic [1:0] {
    WSEL_CONV1 = 2'd0,
    WSEL_CONV2 = 2'd1,
    WSEL_DENSE = 2'd2,
    WSEL_RATE  = 2'd3      // Poisson encoder channel rates
  } wsel_e;

  // Event source of the network input
  typedef enum logic [1:0] {
    SRC_EXT     = 2'd0,    // external event port
    SRC_A2E     = 2'd1,    // analogue-to-event converter
    SRC_POISSON = 2'd2     // on-chip histogram-to-spike encoder
  } src_e;

endpackage
