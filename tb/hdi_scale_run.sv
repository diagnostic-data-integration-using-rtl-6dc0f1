// hdi_scale_run: runs one hdi_encoder of a given scale S through a short
// job and scores it, for testbenches that compare network sizes.
//
// It instantiates the encoder (64-frame caches, folding 8) and a
// configuration loader, sends FRAMES frames back to back (frames from the
// second on have random missing samples), compares every code with
// hdi_ref_pkg::encode(), and checks that consecutive codes leave
// (32*S/8)^2 cycles apart, the NF x SF of the 32S -> 32S layer. It raises
// `done` and reports its own check and failure counts.
module hdi_scale_run #(
  parameter int          SCALE  = 10,
  parameter int unsigned SEED   = 3,
  parameter int          FRAMES = 3
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  import hdi_pkg::*;

  localparam int LATENT = 6, IN_W = 30, FOLD = 8, WORDS = 4;
  localparam int PERIOD = (32 * SCALE / FOLD) * (32 * SCALE / FOLD);

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [FOLD-1:0][7:0] s_data;
  logic [FOLD-1:0]      s_missing;
  logic s_valid, s_ready, m_valid, m_ready;
  logic [LATENT-1:0][CODE_BITS-1:0] m_code;
  logic cfg_we, cfg_done;
  cfg_write_t cfg;
  int writes;

  hdi_encoder #(.SCALE(SCALE)) dut (
    .clk, .rst_n, .s_data, .s_missing, .s_valid, .s_ready,
    .m_code, .m_valid, .m_ready, .cfg_we, .cfg);

  hdi_cfg_loader #(.SEED(SEED), .SCALE(SCALE), .LATENT(LATENT), .IN_W(IN_W), .FOLD(FOLD)) u_load (
    .clk, .rst_n, .cfg_we, .cfg, .done(cfg_done), .writes);

  int fx [FRAMES][IN_W];
  bit fm [FRAMES][IN_W];
  int fz [FRAMES][LATENT];

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
        $display("S=%0d frame %0d code %0d: got %0d expected %0d", SCALE, got, j, v, fz[got][j]);
      end
    end
    got++;
  end

  initial begin
    checks = 0; failures = 0; done = 0;
    s_valid = 0; s_data = '0; s_missing = '0; m_ready = 1;
    for (int f = 0; f < FRAMES; f++) begin
      int x[];
      bit m[];
      int z[];
      x = new[IN_W];
      m = new[IN_W];
      for (int i = 0; i < IN_W; i++) begin
        x[i] = int'($urandom % 256) - 128;
        m[i] = (f >= 1) && (($urandom % 4) == 0);
        fx[f][i] = x[i];
        fm[f][i] = m[i];
      end
      hdi_ref_pkg::encode(SEED, SCALE, LATENT, IN_W, x, m, z);
      for (int j = 0; j < LATENT; j++) fz[f][j] = z[j];
    end
    @(posedge rst_n);
    #1;
    wait (cfg_done);
    for (int f = 0; f < FRAMES; f++)
      for (int w = 0; w < WORDS; w++) begin
        @(negedge clk);
        s_valid = 1;
        for (int l = 0; l < FOLD; l++) begin
          int i;
          i = w * FOLD + l;
          s_data[l]    = (i < IN_W) ? 8'(fx[f][i]) : 8'h00;
          s_missing[l] = (i < IN_W) ? fm[f][i] : 1'b1;
        end
        #1;
        while (!s_ready) begin @(negedge clk); #1; end
        @(posedge clk);
        #1 s_valid = 0;
      end
    wait (got == FRAMES);
    checks++;
    if (t_out[FRAMES-1] - t_out[FRAMES-2] != PERIOD) begin
      failures++;
      $display("S=%0d: code interval %0d, expected %0d", SCALE, t_out[FRAMES-1] - t_out[FRAMES-2], PERIOD);
    end
    $display("S=%0d: %0d configuration writes, %0d frames, %0d cycles between codes",
             SCALE, writes, FRAMES, t_out[FRAMES-1] - t_out[FRAMES-2]);
    done = 1;
  end
endmodule
