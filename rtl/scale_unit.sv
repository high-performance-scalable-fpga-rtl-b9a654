// scale_unit: the scaling engine. Multiplies the signed 15-bit dot64 result
// by the signed 16-bit FGQ scaling factor alpha (the block's ternary scale
// with batch-norm scale folded in), giving a signed 31-bit product.
//
// Interface: din/alpha sampled with in_valid; dout/out_valid one cycle
// later. Widths follow the paper; treating alpha as signed and the single
// register stage are this design's choices.
module scale_unit #(
  parameter int unsigned IN_W    = 15,
  parameter int unsigned ALPHA_W = 16,
  parameter int unsigned OUT_W   = IN_W + ALPHA_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [IN_W-1:0]    din,
  input  logic signed [ALPHA_W-1:0] alpha,
  output logic                      out_valid,
  output logic signed [OUT_W-1:0]   dout
);
  always_ff @(posedge clk) dout <= OUT_W'(din) * OUT_W'(alpha);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
endmodule
