// tb_hdi_encoder: end-to-end test of the encoder at scale S = 1.
//
// Layers 30 -> 32 -> 32 -> 16 -> 16 -> 6, folding 8, frame caches of
// 8 frames (reduced from 64 so that they fill quickly). Weights and
// thresholds come from hdi_ref_pkg through hdi_cfg_loader, and every code
// that leaves the design is compared with hdi_ref_pkg::encode() of the same
// frame. Phases:
//   1. one frame alone (latency is reported);
//   2. a burst with the output always ready: in steady state a code must
//      leave every 16 cycles, the NF x SF of the slowest layer;
//   3. random input gaps, missing samples and long output stalls, so the
//      code cache and then the frame cache fill and back-pressure reaches
//      the source.
// Each mechanism is counted and a failure is counted if one never happened:
// missing samples masked, input cache full, code cache full, a layer
// stalled by its successor, activations of both signs.
module tb_hdi_encoder;
  import hdi_pkg::*;

  localparam int SCALE = 1, LATENT = 6, IN_W = 30, FOLD = 8, FF = 8;
  localparam int WORDS = 4;
  localparam int FRAMES = 300;
  localparam int unsigned SEED = 7;
  localparam int PERIOD = 16;   // max over layers of NF*SF at S = 1

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [FOLD-1:0][7:0] s_data;
  logic [FOLD-1:0]      s_missing;
  logic s_valid, s_ready, m_valid, m_ready;
  logic [LATENT-1:0][CODE_BITS-1:0] m_code;
  logic cfg_we, cfg_done;
  cfg_write_t cfg;
  int writes;

  hdi_encoder #(.SCALE(SCALE), .FIFO_FRAMES(FF)) dut (
    .clk, .rst_n, .s_data, .s_missing, .s_valid, .s_ready,
    .m_code, .m_valid, .m_ready, .cfg_we, .cfg);

  hdi_cfg_loader #(.SEED(SEED), .SCALE(SCALE), .LATENT(LATENT), .IN_W(IN_W), .FOLD(FOLD)) u_load (
    .clk, .rst_n, .cfg_we, .cfg, .done(cfg_done), .writes);

  // frames and expected codes
  int  fx [FRAMES][IN_W];
  bit  fm [FRAMES][IN_W];
  int  fz [FRAMES][LATENT];

  task automatic make_frames();
    for (int f = 0; f < FRAMES; f++) begin
      int x[];
      bit m[];
      int z[];
      x = new[IN_W];
      m = new[IN_W];
      for (int i = 0; i < IN_W; i++) begin
        x[i] = int'($urandom % 256) - 128;
        m[i] = (f >= 100) && (($urandom % 5) == 0);
        fx[f][i] = x[i];
        fm[f][i] = m[i];
      end
      hdi_ref_pkg::encode(SEED, SCALE, LATENT, IN_W, x, m, z);
      for (int j = 0; j < LATENT; j++) fz[f][j] = z[j];
    end
  endtask

  // mechanism counters
  int n_missing = 0, n_in_full = 0, n_out_full = 0, n_layer_stall = 0;
  int n_act1 = 0, n_act0 = 0;

  always @(posedge clk) if (rst_n) begin
    if (s_valid && !s_ready) n_in_full++;
    if (dut.u_out_fifo.count == FF) n_out_full++;
    if ((dut.u_l1.out_valid && !dut.u_l1.out_ready) || (dut.u_l2.out_valid && !dut.u_l2.out_ready) ||
        (dut.u_l3.out_valid && !dut.u_l3.out_ready) || (dut.u_l4.out_valid && !dut.u_l4.out_ready))
      n_layer_stall++;
    if (dut.u_l2.out_valid && dut.u_l2.out_ready) begin
      n_act1 += $countones(dut.a2);
      n_act0 += FOLD - $countones(dut.a2);
    end
  end

  // code monitor
  int got = 0;
  int t_out[FRAMES];
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    t_out[got] = cycle;
    for (int j = 0; j < LATENT; j++) begin
      logic signed [CODE_BITS-1:0] v;
      v = m_code[j];
      checks++;
      if (int'(v) != fz[got][j]) begin
        failures++;
        if (failures < 20) $display("frame %0d code %0d: got %0d expected %0d", got, j, v, fz[got][j]);
      end
    end
    got++;
  end

  int valid_pct = 100;
  task automatic send(int f);
    for (int w = 0; w < WORDS; w++) begin
      @(negedge clk);
      while (($urandom % 100) >= valid_pct) begin s_valid = 0; @(negedge clk); end
      s_valid = 1;
      for (int l = 0; l < FOLD; l++) begin
        int i;
        i = w * FOLD + l;
        if (i < IN_W) begin
          s_data[l]    = 8'(fx[f][i]);
          s_missing[l] = fm[f][i];
          if (fm[f][i]) n_missing++;
        end else begin
          s_data[l]    = 8'($urandom);   // padding lanes carry garbage
          s_missing[l] = 1'($urandom);
        end
      end
      #1;
      while (!s_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 s_valid = 0;
    end
  endtask

  // output readiness pattern for phase 3: long stalls, then bursts
  bit random_ready = 0;
  always @(posedge clk) begin
    if (!random_ready) m_ready <= 1'b1;
    else               m_ready <= ((cycle / 400) % 2 == 0) ? 1'b0 : (($urandom % 4) != 0);
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, lat;
    s_valid = 0; s_data = '0; s_missing = '0;
    make_frames();
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (cfg_done);
    $display("configuration: %0d writes", writes);

    // 1. lone frame
    t0 = cycle;
    send(0);
    wait (got == 1);
    lat = t_out[0] - t0;
    $display("lone frame latency: %0d cycles", lat);

    // 2. burst at full rate
    for (int f = 1; f < 100; f++) send(f);
    wait (got == 100);
    checks++;
    if ((t_out[99] - t_out[49]) != 50 * PERIOD) begin
      failures++;
      $display("steady state: 50 codes in %0d cycles, expected %0d", t_out[99] - t_out[49], 50 * PERIOD);
    end

    // 3. random traffic with missing samples and output stalls
    random_ready = 1;
    valid_pct = 70;
    for (int f = 100; f < FRAMES; f++) send(f);
    random_ready = 0;
    wait (got == FRAMES);
    repeat (20) @(posedge clk);

    checks += 6;
    if (n_missing == 0)     begin failures++; $display("no missing sample"); end
    if (n_in_full == 0)     begin failures++; $display("frame cache never full"); end
    if (n_out_full == 0)    begin failures++; $display("code cache never full"); end
    if (n_layer_stall == 0) begin failures++; $display("no layer stall"); end
    if (n_act0 == 0 || n_act1 == 0) begin failures++; $display("activations one-sided"); end
    if (m_valid)            begin failures++; $display("extra code"); end
    $display("mechanisms: missing=%0d frame_cache_full=%0d code_cache_full=%0d layer_stall=%0d act+1=%0d act-1=%0d",
             n_missing, n_in_full, n_out_full, n_layer_stall, n_act1, n_act0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
