// stream_fifo: first-word-fall-through FIFO on a valid/ready stream.
//
// The encoder uses two of these as frame caches: one in front of the network
// holding up to 64 input frames, one behind it holding up to 64 output codes.
// With them the producer (the DMA side) and the network can run decoupled,
// so frames overlap in the layer pipeline and the throughput is set by the
// slowest layer rather than by the round trip of one frame.
//
// Storage is a plain array with one write and one read port; pointers carry
// one extra wrap bit to tell full from empty. The head word is shown on
// out_data whenever out_valid is high (first word fall-through). A write and
// a read may happen in the same cycle, also when the FIFO is full.
//
// Interface: in_valid/in_ready, out_valid/out_ready, count = words held.
// Latency: a written word is visible on the output one cycle later.
// The 64-frame depth follows the paper; the FIFO structure is this design's.
module stream_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [WIDTH-1:0]           in_data,
  input  logic                       in_valid,
  output logic                       in_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;   // MSB is the wrap bit
  logic             do_wr, do_rd;

  function automatic logic [AW:0] ptr_inc(logic [AW:0] p);
    if (p[AW-1:0] == AW'(DEPTH - 1))
      return {~p[AW], {AW{1'b0}}};
    return p + 1'b1;
  endfunction

  assign out_valid = (count != '0);
  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH)) || out_ready;
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;
  assign out_data  = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= ptr_inc(wr_ptr);
      if (do_rd) rd_ptr <= ptr_inc(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A full FIFO that is read in the same cycle may take a new word; nothing
  // may be written past that.
  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) !(count == ($clog2(DEPTH+1))'(DEPTH) && do_wr && !do_rd);
  endproperty
  assert property (p_no_overflow);

endmodule
