// tb_hdi_encoder_full: the encoder at its full size, S = 30.
//
// Layers 30 -> 960 -> 960 -> 480 -> 480 -> 6, folding 8, 64-frame caches,
// all parameters at their defaults. About 206,000 configuration writes load
// the hashed weights and thresholds of hdi_ref_pkg. Then one frame is sent
// alone, then three back to back, some with missing samples. Every code
// is compared with hdi_ref_pkg::encode(). The lone-frame latency is
// reported, and the distance between consecutive codes in the burst must
// be 14,400 cycles, the NF x SF = 120 x 120 of the 960 -> 960 layer.
module tb_hdi_encoder_full;
  import hdi_pkg::*;

  localparam int SCALE = 30, LATENT = 6, IN_W = 30, FOLD = 8;
  localparam int WORDS = 4;
  localparam int FRAMES = 4;
  localparam int unsigned SEED = 11;
  localparam int PERIOD = 120 * 120;

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

  hdi_encoder dut (
    .clk, .rst_n, .s_data, .s_missing, .s_valid, .s_ready,
    .m_code, .m_valid, .m_ready, .cfg_we, .cfg);

  hdi_cfg_loader #(.SEED(SEED), .SCALE(SCALE), .LATENT(LATENT), .IN_W(IN_W), .FOLD(FOLD)) u_load (
    .clk, .rst_n, .cfg_we, .cfg, .done(cfg_done), .writes);

  int fx [FRAMES][IN_W];
  bit fm [FRAMES][IN_W];
  int fz [FRAMES][LATENT];

  task automatic make_frames();
    for (int f = 0; f < FRAMES; f++) begin
      int x[];
      bit m[];
      int z[];
      x = new[IN_W];
      m = new[IN_W];
      for (int i = 0; i < IN_W; i++) begin
        x[i] = int'($urandom % 256) - 128;
        m[i] = (f >= 2) && (($urandom % 4) == 0);
        fx[f][i] = x[i];
        fm[f][i] = m[i];
      end
      hdi_ref_pkg::encode(SEED, SCALE, LATENT, IN_W, x, m, z);
      for (int j = 0; j < LATENT; j++) fz[f][j] = z[j];
    end
  endtask

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
        $display("frame %0d code %0d: got %0d expected %0d", got, j, v, fz[got][j]);
      end
    end
    got++;
  end

  task automatic send(int f);
    for (int w = 0; w < WORDS; w++) begin
      @(negedge clk);
      s_valid = 1;
      for (int l = 0; l < FOLD; l++) begin
        int i;
        i = w * FOLD + l;
        s_data[l]    = (i < IN_W) ? 8'(fx[f][i]) : 8'hA5;
        s_missing[l] = (i < IN_W) ? fm[f][i] : 1'b0;
      end
      #1;
      while (!s_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 s_valid = 0;
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    s_valid = 0; s_data = '0; s_missing = '0; m_ready = 1;
    make_frames();
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (cfg_done);
    $display("configuration: %0d writes", writes);
    t0 = cycle;
    send(0);
    wait (got == 1);
    $display("lone frame latency: %0d cycles", t_out[0] - t0);
    for (int f = 1; f < FRAMES; f++) send(f);
    wait (got == FRAMES);
    checks++;
    if (t_out[3] - t_out[2] != PERIOD) begin
      failures++;
      $display("code interval %0d cycles, expected %0d", t_out[3] - t_out[2], PERIOD);
    end
    repeat (10) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
