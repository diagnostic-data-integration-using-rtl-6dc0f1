// tb_mvtu: self-checking test of the folded quantized layer.
//
// Two small instances are tested side by side:
//   A: 8-bit inputs, MW = 30 (last input word half padding), MH = 16,
//      PE = 4, SIMD = 8, thresholded 1-bit outputs;
//   B: 1-bit inputs, MW = 24, MH = 6, PE = 6, SIMD = 8, raw signed sums.
// Random weights and thresholds are written through the configuration port
// and kept in testbench arrays; the expected outputs are recomputed here
// from those arrays with the plain dot-product definition. Frames are sent
// with random input gaps and random output back-pressure. A final run with
// no gaps checks that one frame takes NF x SF cycles per layer.
module tb_mvtu;
  import hdi_pkg::*;

  localparam int A_MW = 30, A_MH = 16, A_PE = 4, A_SIMD = 8;
  localparam int A_SF = 4, A_NF = 4;
  localparam int B_MW = 24, B_MH = 6, B_PE = 6, B_SIMD = 8;
  localparam int B_SF = 3, B_NF = 1;
  localparam int A_ACC = $clog2(A_MW * 128 + 1) + 1;
  localparam int B_ACC = $clog2(B_MW + 1) + 1;
  localparam int FRAMES = 40;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---- DUT A ----
  logic [A_SIMD-1:0][7:0] a_in;
  logic a_iv, a_ir, a_ov, a_or;
  logic [A_PE-1:0][0:0] a_out;
  logic cfg_we_a, cfg_we_b;
  cfg_write_t cfg;

  mvtu #(.MW(A_MW), .MH(A_MH), .PE(A_PE), .SIMD(A_SIMD), .IN_BITS(8), .THRESH(1'b1)) dut_a (
    .clk, .rst_n, .in_data(a_in), .in_valid(a_iv), .in_ready(a_ir),
    .out_data(a_out), .out_valid(a_ov), .out_ready(a_or), .cfg_we(cfg_we_a), .cfg);

  // ---- DUT B ----
  logic [B_SIMD-1:0][0:0] b_in;
  logic b_iv, b_ir, b_ov, b_or;
  logic [B_PE-1:0][B_ACC-1:0] b_out;

  mvtu #(.MW(B_MW), .MH(B_MH), .PE(B_PE), .SIMD(B_SIMD), .IN_BITS(1), .THRESH(1'b0)) dut_b (
    .clk, .rst_n, .in_data(b_in), .in_valid(b_iv), .in_ready(b_ir),
    .out_data(b_out), .out_valid(b_ov), .out_ready(b_or), .cfg_we(cfg_we_b), .cfg);

  // ---- reference model state ----
  bit aw [A_MH][A_SF*A_SIMD];
  int athr [A_MH];
  bit bw [B_MH][B_SF*B_SIMD];
  int ax [FRAMES][A_SF*A_SIMD];   // signed samples, padding lanes random
  bit bx [FRAMES][B_SF*B_SIMD];
  int a_exp_q[$];                  // one entry per output word (bit vector)
  int b_exp_q[$];                  // one entry per lane

  function automatic int a_ref(int f, int n);
    int s = 0;
    for (int i = 0; i < A_MW; i++) s += aw[n][i] ? ax[f][i] : -ax[f][i];
    return s;
  endfunction

  function automatic int b_ref(int f, int n);
    int s = 0;
    for (int i = 0; i < B_MW; i++) s += (bx[f][i] == bw[n][i]) ? 1 : -1;
    return s;
  endfunction

  task automatic cfg_write(bit to_a, logic [2:0] kind, int pe, int addr, int data);
    cfg.layer = '0;
    cfg.kind  = cfg_kind_e'(kind[0]);
    cfg.pe    = 4'(pe);
    cfg.addr  = 16'(addr);
    cfg.data  = 32'(data);
    cfg_we_a  = to_a;
    cfg_we_b  = !to_a;
    @(posedge clk);
    #1;
    cfg_we_a  = 0;
    cfg_we_b  = 0;
  endtask

  // gaps: input-side valid probability and output-side ready probability
  int gap_pct = 30, bp_pct = 30;

  // ---- drivers ----
  task automatic drive_a(int f0, int f1);
    for (int f = f0; f < f1; f++)
      for (int s = 0; s < A_SF; s++) begin
        @(negedge clk);
        while (($urandom % 100) < gap_pct) begin a_iv = 0; @(negedge clk); end
        a_iv = 1;
        for (int l = 0; l < A_SIMD; l++) a_in[l] = 8'(ax[f][s*A_SIMD+l]);
        #1;
        while (!a_ir) begin @(negedge clk); #1; end
        @(posedge clk);
        #1; a_iv = 0;
      end
  endtask

  task automatic drive_b(int f0, int f1);
    for (int f = f0; f < f1; f++)
      for (int s = 0; s < B_SF; s++) begin
        @(negedge clk);
        while (($urandom % 100) < gap_pct) begin b_iv = 0; @(negedge clk); end
        b_iv = 1;
        for (int l = 0; l < B_SIMD; l++) b_in[l] = bx[f][s*B_SIMD+l];
        #1;
        while (!b_ir) begin @(negedge clk); #1; end
        @(posedge clk);
        #1; b_iv = 0;
      end
  endtask

  // ---- monitors ----
  int a_got = 0, b_got = 0;
  always @(posedge clk) begin
    a_or <= ($urandom % 100) >= bp_pct;
    b_or <= ($urandom % 100) >= bp_pct;
  end

  always @(posedge clk) if (rst_n && a_ov && a_or) begin
    int e;
    e = a_exp_q.pop_front();
    checks++;
    if (32'(a_out) != e) begin
      failures++;
      $display("A word %0d: got %b expected %b", a_got, a_out, 4'(e));
    end
    a_got++;
  end

  always @(posedge clk) if (rst_n && b_ov && b_or) begin
    for (int p = 0; p < B_PE; p++) begin
      int e;
      logic signed [B_ACC-1:0] v;
      int vi;
      v  = b_out[p];
      vi = int'(v);
      e  = b_exp_q.pop_front();
      checks++;
      if (vi != e) begin
        failures++;
        $display("B word %0d lane %0d: got %0d expected %0d", b_got, p, vi, e);
      end
    end
    b_got++;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    a_iv = 0; b_iv = 0; cfg_we_a = 0; cfg_we_b = 0; cfg = '0;
    a_in = '0; b_in = '0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // weights and thresholds
    for (int n = 0; n < A_MH; n++) begin
      for (int i = 0; i < A_SF*A_SIMD; i++) aw[n][i] = 1'($urandom);
      athr[n] = int'($urandom % 801) - 400;
    end
    for (int p = 0; p < A_PE; p++)
      for (int nf = 0; nf < A_NF; nf++) begin
        for (int sf = 0; sf < A_SF; sf++) begin
          int word;
          word = 0;
          for (int l = 0; l < A_SIMD; l++) word |= int'(aw[nf*A_PE+p][sf*A_SIMD+l]) << l;
          cfg_write(1, CFG_WEIGHT, p, nf*A_SF+sf, word);
        end
        cfg_write(1, CFG_THRESHOLD, p, nf, athr[nf*A_PE+p]);
      end
    for (int n = 0; n < B_MH; n++)
      for (int i = 0; i < B_SF*B_SIMD; i++) bw[n][i] = 1'($urandom);
    for (int p = 0; p < B_PE; p++)
      for (int sf = 0; sf < B_SF; sf++) begin
        int word;
          word = 0;
        for (int l = 0; l < B_SIMD; l++) word |= int'(bw[p][sf*B_SIMD+l]) << l;
        cfg_write(0, CFG_WEIGHT, p, sf, word);
      end

    // frames and expectations
    for (int f = 0; f < FRAMES; f++) begin
      for (int i = 0; i < A_SF*A_SIMD; i++) ax[f][i] = int'($urandom % 256) - 128;
      for (int i = A_MW; i < A_SF*A_SIMD; i++) ax[f][i] = 0;   // padding is zero upstream
      if (f == 0) for (int i = 0; i < A_MW; i++) ax[f][i] = -128; // extreme sums
      for (int i = 0; i < B_SF*B_SIMD; i++) bx[f][i] = 1'($urandom);
      for (int nf = 0; nf < A_NF; nf++) begin
        int e;
        e = 0;
        for (int p = 0; p < A_PE; p++)
          if (a_ref(f, nf*A_PE+p) >= athr[nf*A_PE+p]) e |= 1 << p;
        a_exp_q.push_back(e);
      end
      for (int p = 0; p < B_PE; p++) b_exp_q.push_back(b_ref(f, p));
    end

    fork
      drive_a(0, FRAMES - 4);
      drive_b(0, FRAMES - 4);
    join
    wait (a_got == (FRAMES - 4) * A_NF && b_got == FRAMES - 4);

    // timing: back-to-back frames, no gaps, no back-pressure
    gap_pct = 0; bp_pct = 0;
    repeat (4) @(posedge clk);
    #1;
    t0 = cycle;
    drive_a(FRAMES - 4, FRAMES);
    wait (a_got == FRAMES * A_NF);
    t1 = cycle;
    checks++;
    // four frames of NF*SF steps each, plus one cycle for the last result
    if (t1 - t0 > 4 * A_NF * A_SF + 2 || t1 - t0 < 4 * A_NF * A_SF) begin
      failures++;
      $display("A: 4 frames took %0d cycles, expected %0d", t1 - t0, 4 * A_NF * A_SF + 1);
    end
    drive_b(FRAMES - 4, FRAMES);
    wait (b_got == FRAMES);
    repeat (5) @(posedge clk);
    checks++;
    if (a_exp_q.size() != 0 || b_exp_q.size() != 0) begin
      failures++;
      $display("results missing");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
