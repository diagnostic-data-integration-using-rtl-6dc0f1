// tb_stream_fifo: self-checking test of the frame FIFO.
//
// A FIFO of 64 entries is filled until it refuses data (checks the full
// flag and the count), drained completely (checks order and the empty
// flag), then run for many cycles with random writes and random reads,
// including reads and writes on the same cycle while full. A scoreboard
// queue holds the expected order. A read one cycle after a write into an
// empty FIFO checks the one-cycle latency.
module tb_stream_fifo;
  localparam int W = 16, D = 64;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [W-1:0] in_data, out_data;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [$clog2(D+1)-1:0] count;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (
    .clk, .rst_n, .in_data, .in_valid, .in_ready, .out_data, .out_valid, .out_ready, .count);

  logic [W-1:0] sb[$];
  int full_seen = 0, full_rw = 0;

  // scoreboard, sampled at the clock edge
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      logic [W-1:0] e;
      e = sb.pop_front();
      checks++;
      if (out_data != e) begin
        failures++;
        $display("read %h expected %h", out_data, e);
      end
    end
    if (in_valid && in_ready) sb.push_back(in_data);
    checks++;
    if (int'(count) != sb.size() - ((in_valid && in_ready) ? 1 : 0)
                     + ((out_valid && out_ready) ? 1 : 0)) begin
      failures++;
      $display("count %0d, scoreboard %0d", count, sb.size());
    end
    if (count == D) full_seen++;
    if (count == D && in_valid && in_ready && out_valid && out_ready) full_rw++;
  end

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // fill
    for (int i = 0; i < D + 3; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = W'($urandom);
      #1;
      checks++;
      if (in_ready != (i < D)) begin
        failures++;
        $display("in_ready %b at word %0d", in_ready, i);
      end
    end
    @(negedge clk) in_valid = 0;
    // drain
    out_ready = 1;
    repeat (D) @(negedge clk);
    #1;
    checks++;
    if (out_valid || count != 0) begin
      failures++;
      $display("not empty after drain");
    end
    out_ready = 0;
    // latency: write at one edge, visible right after it
    @(negedge clk) in_valid = 1; in_data = 16'hBEEF;
    @(negedge clk) in_valid = 0;
    checks++;
    if (!out_valid || out_data != 16'hBEEF) begin
      failures++;
      $display("written word not visible after one cycle");
    end
    // random traffic, biased towards full
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 8) != 0;
      in_data   = W'($urandom);
      out_ready = (i % 1000 < 500) ? (($urandom % 4) == 0) : (($urandom % 4) != 0);
    end
    @(negedge clk) in_valid = 0; out_ready = 1;
    repeat (D + 2) @(negedge clk);
    checks++;
    if (full_seen == 0 || full_rw == 0) begin
      failures++;
      $display("full case not reached: %0d %0d", full_seen, full_rw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
