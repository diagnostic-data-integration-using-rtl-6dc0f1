// mvtu: one folded, quantized fully connected layer (matrix-vector-threshold
// unit).
//
// The layer computes, for each of its MH neurons, the dot product of an
// MW-element input vector with a row of binary weights, then compares it
// with a per-neuron threshold to give a 1-bit activation. Binary values use
// the bit code 1 = +1 and 0 = -1, so for 1-bit inputs a product is an XNOR.
// For the 8-bit input layer a product is +x or -x. With THRESH = 0 the layer
// outputs the signed sum itself; the latent output layer uses that.
//
// Folding: PE neurons are computed in parallel, each taking SIMD inputs per
// cycle, so one frame takes NF x SF cycles with NF = MH/PE neuron folds and
// SF = ceil(MW/SIMD) synapse folds. The input vector streams in as SF words
// while the first neuron fold runs; the words are kept in an input buffer
// and reread for the other NF-1 folds. After the last synapse fold of a
// neuron fold the PE results leave as one output word.
//
// Weights sit in one memory per PE (NF*SF words of SIMD bits, address
// nf*SF+sf) and thresholds in one memory per PE (NF signed words). Both are
// written through the configuration port, because the trained values are
// not part of the hardware description. Input lanes past MW in the last
// word add nothing to the sum.
//
// Interface: valid/ready stream in (SIMD x IN_BITS) and out (PE results).
// Timing: a step needs a valid input word during fold 0 and, on the last
// synapse fold, a free output register. Output appears one cycle after the
// last step of a neuron fold. Folding, the 8-bit first layer and 1-bit
// weights and activations follow the paper; the threshold form (one
// threshold per neuron, sum >= threshold), the memory layout and the
// configuration port are this design's choices.
module mvtu #(
  parameter int unsigned MW      = 32,
  parameter int unsigned MH      = 16,
  parameter int unsigned PE      = hdi_pkg::FOLD,
  parameter int unsigned SIMD    = hdi_pkg::FOLD,
  parameter int unsigned IN_BITS = 1,
  parameter bit          THRESH  = 1'b1,
  localparam int unsigned SF     = (MW + SIMD - 1) / SIMD,
  localparam int unsigned NF     = MH / PE,
  localparam int unsigned MAXABS = MW * (1 << (IN_BITS - 1)),
  localparam int unsigned ACC_W  = $clog2(MAXABS + 1) + 1,
  localparam int unsigned OUT_BITS = THRESH ? 1 : ACC_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // input vector stream
  input  logic [SIMD-1:0][IN_BITS-1:0]  in_data,
  input  logic                          in_valid,
  output logic                          in_ready,
  // output stream
  output logic [PE-1:0][OUT_BITS-1:0]   out_data,
  output logic                          out_valid,
  input  logic                          out_ready,
  // weight / threshold writes
  input  logic                          cfg_we,
  input  hdi_pkg::cfg_write_t           cfg
);
  localparam int unsigned SFW = (SF > 1) ? $clog2(SF) : 1;
  localparam int unsigned NFW = (NF > 1) ? $clog2(NF) : 1;
  localparam int unsigned WD  = NF * SF;            // weight words per PE
  localparam int unsigned WAW = (WD > 1) ? $clog2(WD) : 1;

  typedef logic signed [ACC_W-1:0] acc_t;

  // Fold counters
  logic [SFW-1:0] sf;
  logic [NFW-1:0] nf;
  logic           first_fold, last_sf, last_nf, out_free, step;

  assign first_fold = (nf == '0);
  assign last_sf    = (sf == SFW'(SF - 1));
  assign last_nf    = (nf == NFW'(NF - 1));
  assign out_free   = !out_valid || out_ready;
  assign step       = (first_fold ? in_valid : 1'b1) && (!last_sf || out_free);
  assign in_ready   = first_fold && (!last_sf || out_free);

  // Input buffer: the vector is reread for every neuron fold after the first
  logic [SIMD-1:0][IN_BITS-1:0] ibuf [SF];
  logic [SIMD-1:0][IN_BITS-1:0] x;
  assign x = first_fold ? in_data : ibuf[sf];

  always_ff @(posedge clk) begin
    if (step && first_fold) ibuf[sf] <= in_data;
  end

  // Weight word address of this step
  logic [WAW-1:0] waddr;
  assign waddr = WAW'(32'(nf) * SF + 32'(sf));

  // Lanes of the last synapse fold that lie beyond MW contribute nothing
  logic [SIMD-1:0] lane_on;
  always_comb begin
    for (int unsigned l = 0; l < SIMD; l++)
      lane_on[l] = (32'(sf) * SIMD + l) < MW;
  end

  acc_t total [PE];   // running sum including this step

  for (genvar p = 0; p < PE; p++) begin : g_pe
    logic [SIMD-1:0] wmem [WD];
    acc_t            tmem [NF];
    logic [SIMD-1:0] w;
    acc_t            acc, partial;

    always_ff @(posedge clk) begin
      if (cfg_we && cfg.pe == 4'(p)) begin
        if (cfg.kind == hdi_pkg::CFG_WEIGHT)
          wmem[cfg.addr[WAW-1:0]] <= cfg.data[SIMD-1:0];
        else
          tmem[cfg.addr[NFW-1:0]] <= acc_t'(signed'(cfg.data));
      end
    end

    assign w = wmem[waddr];

    // Sum of SIMD products of this step
    always_comb begin
      partial = '0;
      for (int unsigned l = 0; l < SIMD; l++) begin
        if (lane_on[l]) begin
          if (IN_BITS == 1)
            partial = (x[l][0] ~^ w[l]) ? partial + acc_t'(1) : partial - acc_t'(1);
          else
            partial = w[l] ? partial + acc_t'(signed'(x[l]))
                           : partial - acc_t'(signed'(x[l]));
        end
      end
    end

    assign total[p] = (sf == '0) ? partial : acc + partial;

    always_ff @(posedge clk) begin
      if (step) acc <= total[p];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)
        out_data[p] <= '0;
      else if (step && last_sf) begin
        if (THRESH)
          out_data[p] <= OUT_BITS'(total[p] >= tmem[nf]);
        else
          out_data[p] <= OUT_BITS'(total[p]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sf        <= '0;
      nf        <= '0;
      out_valid <= 1'b0;
    end else begin
      if (step && last_sf)
        out_valid <= 1'b1;
      else if (out_ready)
        out_valid <= 1'b0;
      if (step) begin
        if (last_sf) begin
          sf <= '0;
          nf <= last_nf ? '0 : nf + 1'b1;
        end else begin
          sf <= sf + 1'b1;
        end
      end
    end
  end

  // Stream rule: a result waiting for the consumer does not change
  property p_out_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  assert property (p_out_hold);

  initial begin
    assert (MH % PE == 0) else $error("mvtu: MH must be a multiple of PE");
    assert (PE <= 16) else $error("mvtu: PE exceeds the configuration port");
  end

endmodule
