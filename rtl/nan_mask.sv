// nan_mask: the NaN-Mask layer in front of the encoder.
//
// SXR profiles often lack points: a line of sight that was too noisy is
// recorded as NaN. The network cannot compute with NaN, so this layer sets
// every missing sample to zero, which switches off the input neurons facing
// it, exactly as during training. Here a sample is an 8-bit integer and its
// NaN state travels beside it as a `missing` bit.
//
// The frame arrives as ceil(IN_W/SIMD) words of SIMD samples. The layer
// counts words within the frame and also zeroes the lanes of the last word
// that lie beyond IN_W, so the folded input layer sees exact zero padding.
//
// Interface: valid/ready stream in and out. Timing: purely combinational on
// the data and handshake (zero latency); only the word counter is a register.
// The mask-to-zero rule follows the paper; the `missing` bit, the counter and
// the padding are choices of this design.
module nan_mask #(
  parameter int unsigned IN_W = hdi_pkg::IN_W,
  parameter int unsigned SIMD = hdi_pkg::FOLD,
  parameter int unsigned BITS = hdi_pkg::IN_BITS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [SIMD-1:0][BITS-1:0] in_data,
  input  logic [SIMD-1:0]           in_missing,
  input  logic                      in_valid,
  output logic                      in_ready,
  output logic [SIMD-1:0][BITS-1:0] out_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic                      out_last     // last word of a frame
);
  localparam int unsigned WORDS = (IN_W + SIMD - 1) / SIMD;
  localparam int unsigned WW    = (WORDS > 1) ? $clog2(WORDS) : 1;

  logic [WW-1:0] word_idx;

  assign in_ready  = out_ready;
  assign out_valid = in_valid;
  assign out_last  = (word_idx == WW'(WORDS - 1));

  always_comb begin
    for (int unsigned l = 0; l < SIMD; l++) begin
      if (in_missing[l] || (32'(word_idx) * SIMD + l >= IN_W))
        out_data[l] = '0;
      else
        out_data[l] = in_data[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      word_idx <= '0;
    else if (in_valid && out_ready)
      word_idx <= out_last ? '0 : word_idx + 1'b1;
  end

endmodule
