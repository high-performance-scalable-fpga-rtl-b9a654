// eltwise_unit: element-wise addition of two 8-bit DFP vectors (the ResNet
// shortcut merge). a carries exponent ea, b exponent eb. The operand with
// the smaller exponent is shifted right arithmetically by the exponent
// difference, then added to the other; the sum saturates to 8 bits and its
// exponent ey is the larger of the two. Purely combinational, LANES lanes.
// The alignment and max-exponent rule follow the paper; saturation and
// limiting the shift to 7 (an 8-bit value shifted further is 0 or -1
// either way) are this design's.
module eltwise_unit #(
  parameter int unsigned LANES = 64
) (
  input  logic [LANES-1:0][7:0] a,
  input  logic signed [7:0]     ea,
  input  logic [LANES-1:0][7:0] b,
  input  logic signed [7:0]     eb,
  output logic [LANES-1:0][7:0] y,
  output logic signed [7:0]     ey
);
  logic [2:0] sa, sb;

  always_comb begin
    logic signed [8:0] d;
    d  = 9'(ea) - 9'(eb);
    ey = (d < 0) ? eb : ea;
    sa = (d >= 0) ? 3'd0 : ((d < -9'sd7) ? 3'd7 : 3'(-d));
    sb = (d <= 0) ? 3'd0 : ((d > 9'sd7) ? 3'd7 : 3'(d));
  end

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    always_comb begin
      logic signed [8:0] s;
      s = 9'(signed'(a[i]) >>> sa) + 9'(signed'(b[i]) >>> sb);
      if (s > 9'sd127)       y[i] = 8'h7f;
      else if (s < -9'sd128) y[i] = 8'h80;
      else                   y[i] = s[7:0];
    end
  end
endmodule
