// accum_bias: 32-bit accumulator with bias add and partial-sum feedback.
//
// The products of one output pixel arrive as a run framed by p_first and
// p_last (one per kernel position). The first product starts from the bias
// (first block of 64 input channels) or, when use_partial is set, from the
// partial sum of earlier input-channel blocks that was read back from the
// ORAM buffer (oram_q, valid in the same cycle as p_first). Later products
// add onto the running sum. With p_last the finished sum is written to the
// ORAM buffer in the same cycle (oram_we/oram_waddr/oram_wdata, write
// registered by the RAM) and shown on acc/acc_valid.
//
// The 32-bit width, the bias add and the ORAM feedback follow the paper;
// wrap-around on overflow is this design's choice.
// The ORAM write address is the pixel address carried with the product.
module accum_bias #(
  parameter int unsigned PROD_W = 31,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned OA_W   = 11
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     p_valid,
  input  logic                     p_first,
  input  logic                     p_last,
  input  logic [OA_W-1:0]          p_oaddr,
  input  logic signed [PROD_W-1:0] prod,
  input  logic                     use_partial,
  input  logic signed [ACC_W-1:0]  bias,
  input  logic signed [ACC_W-1:0]  oram_q,
  output logic                     oram_we,
  output logic [OA_W-1:0]          oram_waddr,
  output logic signed [ACC_W-1:0]  oram_wdata,
  output logic                     acc_valid,
  output logic signed [ACC_W-1:0]  acc
);
  logic signed [ACC_W-1:0] run_q, base, nxt;

  always_comb begin
    base = p_first ? (use_partial ? oram_q : bias) : run_q;
    nxt  = base + ACC_W'(prod);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)       run_q <= '0;
    else if (p_valid) run_q <= nxt;

  assign oram_we    = p_valid & p_last;
  assign oram_waddr = p_oaddr;
  assign oram_wdata = nxt;
  assign acc_valid  = oram_we;
  assign acc        = nxt;
endmodule
