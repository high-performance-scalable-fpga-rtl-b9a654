// sram_1r1w: simple dual-port block RAM (one write port, one read port,
// registered read data), the shape of an FPGA M20K block. Used for the
// IRAM, BSRAM, SSRAM, BBSRAM and ORAM buffers with their own widths and
// depths. Write: we/waddr/wdata at the clock edge. Read: raddr sampled when
// re is high, rdata valid the next cycle. A read of the address being
// written returns the old contents. Contents are not reset.
module sram_1r1w #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 128,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  // Reads past the end are a controller error.
  assert property (@(posedge clk) re |-> 32'(raddr) < DEPTH)
    else $error("sram_1r1w: read address %0d out of range", raddr);
endmodule
