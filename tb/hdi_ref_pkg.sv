// hdi_ref_pkg: reference model of the quantized encoder for the testbenches.
//
// Weights and thresholds are not stored: each is a hash of (seed, layer,
// neuron, input), so a testbench can write them into the design and
// recompute any of them here. encode() evaluates the whole network with the
// textbook definitions (missing samples set to zero, +1/-1 weights, sum >=
// threshold gives 1, the last layer returns the sums), independently of the
// folding, streaming and memory layout of the RTL.
package hdi_ref_pkg;

  function automatic int unsigned mix(int unsigned a);
    a = a ^ (a >> 16);
    a = a * 32'h7feb352d;
    a = a ^ (a >> 15);
    a = a * 32'h846ca68b;
    a = a ^ (a >> 16);
    return a;
  endfunction

  // Weight bit (1 = +1, 0 = -1) of input i of neuron n in layer (0..4)
  function automatic bit wbit(int unsigned seed, int layer, int n, int i);
    int unsigned h;
    h = mix(mix(mix(seed + 32'(layer)) + 32'(n)) + 32'(i));
    return h[7];
  endfunction

  // Threshold of neuron n in layer 0..3: spread around zero so that both
  // activation values occur. Layer 0 sums 8-bit samples, hence the wider
  // range.
  function automatic int thr(int unsigned seed, int layer, int n);
    int unsigned h;
    h = mix(mix(seed ^ 32'h5a5a0000 ^ 32'(layer)) + 32'(n));
    if (layer == 0) return int'(h % 301) - 150;
    return int'(h % 9) - 4;
  endfunction

  // Layer widths for scale s: 30 inputs, then 32s, 32s, 16s, 16s, latent.
  function automatic int width(int scale, int latent, int in_w, int k);
    case (k)
      0: return in_w;
      1: return 32 * scale;
      2: return 32 * scale;
      3: return 16 * scale;
      4: return 16 * scale;
      default: return latent;
    endcase
  endfunction

  // x: samples, missing: NaN flags. Returns the latent sums in z.
  function automatic void encode(int unsigned seed, int scale, int latent, int in_w,
                                 const ref int x[], const ref bit missing[], ref int z[]);
    int a[];      // current layer input (samples, then +1/-1 activations)
    int b[];
    a = new[in_w];
    for (int i = 0; i < in_w; i++) a[i] = missing[i] ? 0 : x[i];
    for (int k = 0; k < 5; k++) begin
      int mw, mh;
      mw = width(scale, latent, in_w, k);
      mh = width(scale, latent, in_w, k + 1);
      b = new[mh];
      for (int n = 0; n < mh; n++) begin
        int s;
        s = 0;
        for (int i = 0; i < mw; i++) s += wbit(seed, k, n, i) ? a[i] : -a[i];
        if (k < 4) b[n] = (s >= thr(seed, k, n)) ? 1 : -1;
        else       b[n] = s;
      end
      a = b;
    end
    z = a;
  endfunction

endpackage
