// mlw_fifo: synchronous first-word-fall-through FIFO.
//
// In the engine it is the sample FIFO: every bit-plane line that enters the
// dot-product banks is also pushed here, and the gradient stage pops the same
// lines in the same order once the scale of their samples is known. Its depth
// must cover one whole group of 8 samples, ceil(M/64)*s lines, or the
// pipeline would deadlock; the default of 16384 lines covers 32K features at
// 32 bits. The same module, made small, queues labels and scales.
//
// Interface: push writes din when not full; pop removes the head when not
// empty; dout always shows the head. Pushing into a full or popping an empty
// FIFO is a usage error (asserted) and is ignored. count is the occupancy.
// Depth and first-word-fall-through behaviour are this design's choices.
module mlw_fifo #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 16384
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_push, do_pop;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= incr(wptr);
      if (do_pop)  rptr <= incr(rptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
