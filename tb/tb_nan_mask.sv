// tb_nan_mask: self-checking test of the NaN-mask layer.
//
// Random frames of 30 samples (4 words of 8) with random missing flags and
// random values in the two padding lanes are pushed through the mask with
// random back-pressure. Every accepted output word is compared with the
// expected word: the sample itself, or zero when it is missing or lies past
// sample 30. The frame-end flag is checked on every word as well.
module tb_nan_mask;
  localparam int IN_W = 30, SIMD = 8, WORDS = 4, FRAMES = 200;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [SIMD-1:0][7:0] in_data, out_data;
  logic [SIMD-1:0]      in_missing;
  logic in_valid, in_ready, out_valid, out_ready, out_last;

  nan_mask #(.IN_W(IN_W), .SIMD(SIMD), .BITS(8)) dut (
    .clk, .rst_n, .in_data, .in_missing, .in_valid, .in_ready,
    .out_data, .out_valid, .out_ready, .out_last);

  int n_missing = 0;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0; in_missing = '0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int w = 0; w < WORDS; w++) begin
        logic [SIMD-1:0][7:0] exp_data;
        @(negedge clk);
        in_valid = ($urandom % 4) != 0;
        out_ready = ($urandom % 3) != 0;
        for (int l = 0; l < SIMD; l++) begin
          in_data[l]    = 8'($urandom);
          in_missing[l] = ($urandom % 5) == 0;
          exp_data[l]   = (in_missing[l] || w * SIMD + l >= IN_W) ? 8'h00 : in_data[l];
          if (in_missing[l] && w * SIMD + l < IN_W) n_missing++;
        end
        #1;
        while (!(in_valid && out_ready)) begin
          checks++;
          if (in_ready != out_ready || out_valid != in_valid) begin
            failures++;
            $display("handshake not passed through");
          end
          @(negedge clk);
          in_valid = ($urandom % 4) != 0;
          out_ready = ($urandom % 3) != 0;
          #1;
        end
        checks += 2;
        if (out_data != exp_data) begin
          failures++;
          $display("frame %0d word %0d: got %h expected %h", f, w, out_data, exp_data);
        end
        if (out_last != (w == WORDS - 1)) begin
          failures++;
          $display("frame %0d word %0d: out_last %b", f, w, out_last);
        end
        @(posedge clk);
        #1 in_valid = 0;
      end
    checks++;
    if (n_missing == 0) begin
      failures++;
      $display("no missing sample was generated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
