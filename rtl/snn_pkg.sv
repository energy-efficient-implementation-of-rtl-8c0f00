// snn_pkg -- shared constants and types of the spiking-recurrent-cell (SRC) network.
//
// All neuron state is integer, scaled by 1000 (1.0 == 1000). The constants below are the
// ones of the simplified SRC equations: the bias term 3000 (b_h = -6 after factoring out 2),
// the switching threshold V_th = 500 for z_s, and z_s^deep = 100. The state registers are
// 11 bits wide (h and h_s) and z_s is 10 bits wide, as shown for Fht[10:0], Fhst[10:0] and
// Fz[9:0] in the hardware waveforms. The saturation limits +1023/-1024 are those of the
// 11-bit register (the equation text writes +/-1000; the hardware listing clamps at the
// register range, which is what is kept here).
//
// The SpT image word carries the 784 pixel spikes and six side-band bits: u-RESET, u-CMP and
// the 4-bit expected class CMP_VAL. The bit order of the side band inside the word is this
// design's own choice.
package snn_pkg;

  // Image geometry (28 x 28 MNIST pixels)
  localparam int unsigned IMG_ROWS = 28;
  localparam int unsigned IMG_COLS = 28;
  localparam int unsigned N_PIX    = IMG_ROWS * IMG_COLS;   // 784

  // Fixed-point SRC constants (scale 1000)
  localparam int unsigned H_W      = 11;      // width of h and h_s
  localparam int unsigned Z_W      = 10;      // width of z_s
  localparam int          H_MAX    = 1023;    // positive saturation of h
  localparam int          H_MIN    = -1024;   // negative saturation of h
  localparam int          BIAS     = 3000;    // bias term inside the h equation
  localparam int          V_TH     = 500;     // z_s switching threshold on h[t-1]
  localparam int unsigned Z_DEEP   = 100;     // z_s^deep (Zmin)
  localparam int unsigned Z_HYP    = 900;     // reference z_s^hyp (Zmax), set at run time
  localparam int unsigned Z_SHIFT  = 10;      // /1000 approximated by >>10

  // IR weight coding: bit 1 -> +10, bit 0 -> -1
  localparam int          IR_POS   = 10;
  localparam int          IR_NEG   = -1;

  localparam int unsigned N_CLASS  = 10;
  localparam int unsigned CLS_W    = 4;

  // Side band travelling with every image through the levels
  typedef struct packed {
    logic [CLS_W-1:0] cmp_val;   // expected class of the SpT
    logic             ucmp;      // u-CMP: compare at the end of this image
    logic             ureset;    // u-RESET: reset neuron states before this image
  } ctrl_t;

  localparam int unsigned CTRL_W = $bits(ctrl_t);             // 6

  // One stored SpT image: side band above the 784 pixel spikes
  typedef struct packed {
    ctrl_t             ctrl;
    logic [N_PIX-1:0]  pix;
  } spt_word_t;

  localparam int unsigned SPT_W = $bits(spt_word_t);          // 790

endpackage
