// hdi_cfg_loader: testbench driver that writes a full set of weights and
// thresholds into hdi_encoder through its configuration port.
//
// After reset it walks the five layers and issues one write per clock:
// for each PE lane p, neuron fold nf and synapse fold sf, the weight word
// at address nf*SF+sf holds the SIMD weight bits of neuron nf*PE+p for
// inputs sf*SIMD .. sf*SIMD+SIMD-1 (bits past the layer width are 0); for
// the four thresholded layers, the threshold of neuron nf*PE+p goes to
// lane p, address nf. Values come from hdi_ref_pkg. `done` rises after the
// last write. The number of writes is reported in `writes`.
module hdi_cfg_loader #(
  parameter int unsigned SEED   = 1,
  parameter int          SCALE  = 30,
  parameter int          LATENT = 6,
  parameter int          IN_W   = 30,
  parameter int          FOLD   = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  output logic                cfg_we,
  output hdi_pkg::cfg_write_t cfg,
  output logic                done,
  output int                  writes
);
  import hdi_pkg::*;

  initial begin
    cfg_we = 0; cfg = '0; done = 0; writes = 0;
    @(posedge rst_n);
    for (int k = 0; k < 5; k++) begin
      int mw, mh, pe, sfn, nfn;
      mw  = hdi_ref_pkg::width(SCALE, LATENT, IN_W, k);
      mh  = hdi_ref_pkg::width(SCALE, LATENT, IN_W, k + 1);
      pe  = (k == 4) ? LATENT : FOLD;
      sfn = (mw + FOLD - 1) / FOLD;
      nfn = mh / pe;
      for (int p = 0; p < pe; p++)
        for (int nf = 0; nf < nfn; nf++) begin
          for (int sf = 0; sf < sfn; sf++) begin
            logic [31:0] word;
            word = '0;
            for (int l = 0; l < FOLD; l++)
              if (sf * FOLD + l < mw)
                word[l] = hdi_ref_pkg::wbit(SEED, k, nf * pe + p, sf * FOLD + l);
            @(negedge clk);
            cfg_we = 1;
            cfg = '{layer: 3'(k), kind: CFG_WEIGHT, pe: 4'(p), addr: 16'(nf * sfn + sf), data: word};
            writes++;
          end
          if (k < 4) begin
            @(negedge clk);
            cfg_we = 1;
            cfg = '{layer: 3'(k), kind: CFG_THRESHOLD, pe: 4'(p), addr: 16'(nf),
                    data: 32'(hdi_ref_pkg::thr(SEED, k, nf * pe + p))};
            writes++;
          end
        end
    end
    @(negedge clk);
    cfg_we = 0;
    done = 1;
  end
endmodule
