// hdi_encoder: quantized encoder for SXR temperature profiles, streaming.
//
// This is the real-time filter that sits in the acquisition device. Instead
// of sending a decimated sample to the plasma controller, it sends the
// latent code of a trained variational autoencoder: 6 numbers that sum up
// the shape of the measured temperature profile and stay meaningful when
// some lines of sight are missing.
//
// Data path, one frame at a time, all stages connected by valid/ready
// streams that carry FOLD (= 8) elements per word:
//
//   s_* -> frame FIFO (64 frames) -> NaN mask
//       -> L1: 30 x 8-bit  -> 32*S binary neurons (thresholded) -> Q1
//       -> L2: 32*S -> 32*S binary -> Q2
//       -> L3: 32*S -> 16*S binary -> Q3
//       -> L4: 16*S -> 16*S binary -> Q4
//       -> L5: 16*S -> 6 signed sums (latent mean, no threshold)
//       -> code FIFO (64 codes) -> m_*
//
// Q1..Q4 are one-vector stream FIFOs between the layers. With S = 30 the
// layers have 960, 960, 480, 480 neurons. Every layer works on its own
// frame, so several frames are in flight. A layer needs NF x SF cycles per
// frame (NF = neurons / 8, SF = ceil(inputs / 8)); the slowest, L2, sets
// the throughput: 120 x 120 = 14,400 cycles per frame at S = 30, 16 at S = 1.
// The latency of a lone frame is roughly the sum over the layers,
// 480 + 14,400 + 7,200 + 3,600 + 60 cycles at S = 30.
//
// Input word: FOLD signed 8-bit samples plus one `missing` bit each; a frame
// is ceil(30/8) = 4 words, the lanes past sample 30 are ignored. Output
// word: LATENT signed values, CODE_BITS wide each. Weights and thresholds are
// written through cfg_we/cfg (layer, weight or threshold, PE lane, address,
// data) before frames are sent; see mvtu for the memory layout.
//
// The layer sizes, precisions, folding 8, latent size 6 and the 64-frame
// caches follow the paper. The stream word formats, the configuration port,
// the threshold form and an integer (unscaled) latent output are this
// design's choices.
module hdi_encoder #(
  parameter int unsigned IN_W        = hdi_pkg::IN_W,
  parameter int unsigned SCALE       = hdi_pkg::SCALE,
  parameter int unsigned LATENT      = hdi_pkg::LATENT,
  parameter int unsigned FOLD        = hdi_pkg::FOLD,
  parameter int unsigned FIFO_FRAMES = hdi_pkg::FIFO_FRAMES,
  parameter int unsigned CODE_BITS   = hdi_pkg::CODE_BITS
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // profile stream
  input  logic [FOLD-1:0][hdi_pkg::IN_BITS-1:0] s_data,
  input  logic [FOLD-1:0]                     s_missing,
  input  logic                                s_valid,
  output logic                                s_ready,
  // latent code stream
  output logic [LATENT-1:0][CODE_BITS-1:0]    m_code,
  output logic                                m_valid,
  input  logic                                m_ready,
  // weight and threshold writes
  input  logic                                cfg_we,
  input  hdi_pkg::cfg_write_t                 cfg
);
  localparam int unsigned IB    = hdi_pkg::IN_BITS;
  localparam int unsigned WORDS = (IN_W + FOLD - 1) / FOLD;
  localparam int unsigned N1 = SCALE * 32;
  localparam int unsigned N2 = SCALE * 32;
  localparam int unsigned N3 = SCALE * 16;
  localparam int unsigned N4 = SCALE * 16;
  localparam int unsigned L5_ACC = $clog2(N4 + 1) + 1;

  // ---- input frame cache ----
  typedef struct packed {
    logic [FOLD-1:0]         missing;
    logic [FOLD-1:0][IB-1:0] data;
  } in_word_t;

  in_word_t f_in, f_out;
  logic     fi_valid, fi_ready;

  assign f_in.data    = s_data;
  assign f_in.missing = s_missing;

  stream_fifo #(.WIDTH($bits(in_word_t)), .DEPTH(FIFO_FRAMES * WORDS)) u_in_fifo (
    .clk, .rst_n,
    .in_data(f_in), .in_valid(s_valid), .in_ready(s_ready),
    .out_data(f_out), .out_valid(fi_valid), .out_ready(fi_ready),
    .count()
  );

  // ---- NaN mask ----
  logic [FOLD-1:0][IB-1:0] nm_data;
  logic                    nm_valid, nm_ready;

  nan_mask #(.IN_W(IN_W), .SIMD(FOLD), .BITS(IB)) u_nan_mask (
    .clk, .rst_n,
    .in_data(f_out.data), .in_missing(f_out.missing),
    .in_valid(fi_valid), .in_ready(fi_ready),
    .out_data(nm_data), .out_valid(nm_valid), .out_ready(nm_ready),
    .out_last()
  );

  // ---- configuration decode ----
  logic [hdi_pkg::N_LAYERS-1:0] layer_we;
  always_comb begin
    for (int unsigned i = 0; i < hdi_pkg::N_LAYERS; i++)
      layer_we[i] = cfg_we && (cfg.layer == 3'(i));
  end

  // ---- layers ----
  // Each layer hands its activations to the next through a stream FIFO that
  // holds one whole input vector of the next layer. A layer then finishes
  // frame k+1 while its successor still works on frame k, and the
  // successor's first neuron fold reads its input at full speed; without it
  // that fold would be paced by the producer's output rate.
  logic [FOLD-1:0][0:0] a1, a2, a3, a4;       // layer outputs
  logic [FOLD-1:0][0:0] b1, b2, b3, b4;       // after the inter-layer FIFOs
  logic v1, v2, v3, v4, r1, r2, r3, r4;
  logic bv1, bv2, bv3, bv4, br1, br2, br3, br4;
  logic [LATENT-1:0][L5_ACC-1:0] z;
  logic vz, rz;

  mvtu #(.MW(IN_W), .MH(N1), .PE(FOLD), .SIMD(FOLD), .IN_BITS(IB), .THRESH(1'b1)) u_l1 (
    .clk, .rst_n, .in_data(nm_data), .in_valid(nm_valid), .in_ready(nm_ready),
    .out_data(a1), .out_valid(v1), .out_ready(r1), .cfg_we(layer_we[0]), .cfg);

  stream_fifo #(.WIDTH(FOLD), .DEPTH(N1 / FOLD)) u_q1 (
    .clk, .rst_n, .in_data(a1), .in_valid(v1), .in_ready(r1),
    .out_data(b1), .out_valid(bv1), .out_ready(br1), .count());

  mvtu #(.MW(N1), .MH(N2), .PE(FOLD), .SIMD(FOLD), .IN_BITS(1), .THRESH(1'b1)) u_l2 (
    .clk, .rst_n, .in_data(b1), .in_valid(bv1), .in_ready(br1),
    .out_data(a2), .out_valid(v2), .out_ready(r2), .cfg_we(layer_we[1]), .cfg);

  stream_fifo #(.WIDTH(FOLD), .DEPTH(N2 / FOLD)) u_q2 (
    .clk, .rst_n, .in_data(a2), .in_valid(v2), .in_ready(r2),
    .out_data(b2), .out_valid(bv2), .out_ready(br2), .count());

  mvtu #(.MW(N2), .MH(N3), .PE(FOLD), .SIMD(FOLD), .IN_BITS(1), .THRESH(1'b1)) u_l3 (
    .clk, .rst_n, .in_data(b2), .in_valid(bv2), .in_ready(br2),
    .out_data(a3), .out_valid(v3), .out_ready(r3), .cfg_we(layer_we[2]), .cfg);

  stream_fifo #(.WIDTH(FOLD), .DEPTH(N3 / FOLD)) u_q3 (
    .clk, .rst_n, .in_data(a3), .in_valid(v3), .in_ready(r3),
    .out_data(b3), .out_valid(bv3), .out_ready(br3), .count());

  mvtu #(.MW(N3), .MH(N4), .PE(FOLD), .SIMD(FOLD), .IN_BITS(1), .THRESH(1'b1)) u_l4 (
    .clk, .rst_n, .in_data(b3), .in_valid(bv3), .in_ready(br3),
    .out_data(a4), .out_valid(v4), .out_ready(r4), .cfg_we(layer_we[3]), .cfg);

  stream_fifo #(.WIDTH(FOLD), .DEPTH(N4 / FOLD)) u_q4 (
    .clk, .rst_n, .in_data(a4), .in_valid(v4), .in_ready(r4),
    .out_data(b4), .out_valid(bv4), .out_ready(br4), .count());

  mvtu #(.MW(N4), .MH(LATENT), .PE(LATENT), .SIMD(FOLD), .IN_BITS(1), .THRESH(1'b0)) u_l5 (
    .clk, .rst_n, .in_data(b4), .in_valid(bv4), .in_ready(br4),
    .out_data(z), .out_valid(vz), .out_ready(rz), .cfg_we(layer_we[4]), .cfg);

  // ---- output code cache ----
  logic [LATENT-1:0][CODE_BITS-1:0] code;
  always_comb begin
    for (int unsigned i = 0; i < LATENT; i++)
      code[i] = CODE_BITS'(signed'(z[i]));
  end

  stream_fifo #(.WIDTH(LATENT * CODE_BITS), .DEPTH(FIFO_FRAMES)) u_out_fifo (
    .clk, .rst_n,
    .in_data(code), .in_valid(vz), .in_ready(rz),
    .out_data(m_code), .out_valid(m_valid), .out_ready(m_ready),
    .count()
  );

endmodule
