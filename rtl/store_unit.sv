// store_unit: the store half of the load-store unit, an Avalon-MM write
// master behind a small line FIFO.
//
// start sets the output base address and clears the line counter. Each
// pushed 512-bit line (one output pixel, 8 bits of each of 64 OFMs) is
// written to base + 64*n, n counting the lines since start. The FIFO
// absorbs Avalon back-pressure (wr_wait, the waitrequest of the write);
// free tells the producer how many lines it may still push. idle is high
// when the FIFO is empty. One write channel follows the paper; the FIFO
// depth is this design's choice.
module store_unit
  import dnn_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic              push,
  input  logic [LINE_W-1:0] data,
  output logic [$clog2(DEPTH+1)-1:0] free,
  output logic              idle,
  output logic              wr_req,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [LINE_W-1:0] wr_data,
  input  logic              wr_wait
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [LINE_W-1:0] mem [DEPTH];
  logic [AW-1:0]     rp, wp;
  logic [CW-1:0]     count;
  logic [ADDR_W-1:0] addr;
  logic              pop;

  assign pop     = wr_req && !wr_wait;
  assign wr_req  = (count != 0);
  assign wr_data = mem[rp];
  assign wr_addr = addr;
  assign free    = CW'(DEPTH) - count;
  assign idle    = (count == 0);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0; addr <= '0;
    end else begin
      if (start) addr <= base;
      else if (pop) addr <= addr + ADDR_W'(LINE_B);
      if (push) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end

  always_ff @(posedge clk) if (push) mem[wp] <= data;

  assert property (@(posedge clk) disable iff (!rst_n) push |-> count != CW'(DEPTH))
    else $error("store_unit: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) start |-> idle)
    else $error("store_unit: new base while lines are pending");
endmodule
