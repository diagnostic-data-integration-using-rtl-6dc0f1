// hdi_pkg: sizes and stream types shared by the quantized SXR encoder.
//
// The encoder maps one soft X-ray (SXR) temperature profile to a short
// latent code. A profile has 15 points, each an (impact parameter,
// temperature) pair, so 30 signed 8-bit samples enter the network. The
// network is a binarized multilayer perceptron: an 8-bit input layer followed
// by S x [32,32,16,16] neurons with 1-bit weights and 1-bit activations
// (S = 30), ending in a latent output of 6 values. Every layer is folded by 8
// in both directions (8 neurons, 8 inputs per cycle).
//
// Numbers taken from the paper: 15 positions (30 samples), 8-bit input,
// scale 30 over [32,32,16,16], 1-bit weights and activations, latent size 6,
// folding 8, 64-frame FIFO caches. Own choices: the signed 8-bit sample
// format, the 16-bit code word, the bit meaning of a binary value (1 = +1,
// 0 = -1) and the configuration port layout.
package hdi_pkg;

  // Profile and network shape
  localparam int unsigned IN_W      = 30;   // samples per frame (15 x,y pairs)
  localparam int unsigned IN_BITS   = 8;    // input sample precision
  localparam int unsigned SCALE     = 30;   // scale factor S
  localparam int unsigned LATENT    = 6;    // VAE latent size
  localparam int unsigned FOLD      = 8;    // PE = SIMD = 8
  localparam int unsigned FIFO_FRAMES = 64;
  localparam int unsigned CODE_BITS = 16;   // width of one latent value on the output stream

  // Number of layers and the select code of each on the configuration port
  localparam int unsigned N_LAYERS  = 5;

  // What a configuration write targets inside a layer
  typedef enum logic [0:0] {
    CFG_WEIGHT    = 1'b0,
    CFG_THRESHOLD = 1'b1
  } cfg_kind_e;

  // One write on the configuration port. A weight write fills one SIMD-wide
  // weight word of one PE; a threshold write fills the threshold of one
  // neuron (PE lane `pe`, neuron fold `addr`).
  typedef struct packed {
    logic [2:0]  layer;   // 0..4
    cfg_kind_e   kind;
    logic [3:0]  pe;      // PE lane
    logic [15:0] addr;    // weight word or neuron fold index
    logic [31:0] data;    // weight bits (SIMD LSBs) or signed threshold
  } cfg_write_t;

  function automatic int unsigned cdiv(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
