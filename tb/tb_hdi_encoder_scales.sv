// tb_hdi_encoder_scales: the smaller 1-bit networks of the size study,
// S = 10 (layers 320, 320, 160, 160) and S = 20 (640, 640, 320, 320), each
// built as its own encoder instance and run through three frames by
// hdi_scale_run, with codes and the steady-state code interval checked
// (1,600 and 6,400 cycles).
module tb_hdi_encoder_scales;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic done10, done20;
  int c10, f10, c20, f20;

  hdi_scale_run #(.SCALE(10), .SEED(21)) u_s10 (.clk, .rst_n, .done(done10), .checks(c10), .failures(f10));
  hdi_scale_run #(.SCALE(20), .SEED(22)) u_s20 (.clk, .rst_n, .done(done20), .checks(c20), .failures(f20));

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c10 + c20, f10 + f20 + 1);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (done10 && done20);
    $display("TB_RESULT checks=%0d failures=%0d", c10 + c20, f10 + f20);
    $finish;
  end
endmodule
