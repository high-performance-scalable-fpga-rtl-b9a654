// elt_fifo: the element-wise buffer. Holds 512-bit lines (8-bit values of
// 64 OFMs for one pixel) of the other ResNet branch, fetched by the load
// unit ahead of the element-wise addition. First-word-fall-through FIFO:
// dout shows the oldest line whenever count > 0; pop removes it, push
// appends din. count is the fill level (0..DEPTH). Push when full and pop
// when empty are ignored and flagged by assertions. The 512 x 128 size is
// the paper's; organising it as a FIFO is this design's choice.
module elt_fifo #(
  parameter int unsigned W     = 512,
  parameter int unsigned DEPTH = 128,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  logic [W-1:0]  din,
  input  logic          pop,
  output logic [W-1:0]  dout,
  output logic [AW:0]   count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic do_push, do_pop;

  assign do_push = push && (32'(count) < DEPTH);
  assign do_pop  = pop && (count != 0);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else if (clear) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end

  always_ff @(posedge clk) if (do_push) mem[wp] <= din;
  assign dout = mem[rp];

  assert property (@(posedge clk) disable iff (!rst_n) push |-> 32'(count) < DEPTH)
    else $error("elt_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != 0)
    else $error("elt_fifo: pop while empty");
endmodule
