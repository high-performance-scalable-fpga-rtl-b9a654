// down_convert: dynamic-fixed-point down-conversion of 32-bit OFM values to
// 8 bits, LANES values at a time, all with one shift.
//
// Shift: rs = P - LZC(max_abs), clamped at 0, where max_abs is the largest
// magnitude of the layer. With P = 25 the largest magnitude keeps 7 bits
// below the sign. Each value is shifted right arithmetically by rs. The two
// bits just below the kept bits (bit rs-1 and rs-2 of the input) are the
// round and bias bits; when both are 1 the result is incremented. The
// result saturates to [-128, 127]. Purely combinational.
// The shift formula and the round/bias bits follow the paper; P, the
// reading of the rounding rule and the saturation are this design's.
module down_convert #(
  parameter int unsigned LANES = 64,
  parameter int unsigned P     = 25
) (
  input  logic [31:0]                   max_abs,
  input  logic [LANES-1:0][31:0]        din,
  output logic [5:0]                    rs,
  output logic [LANES-1:0][7:0]         dout
);
  import dnn_pkg::*;

  always_comb begin
    logic [5:0] z;
    z  = lzc32(max_abs);
    rs = (6'(P) > z) ? 6'(P) - z : 6'd0;
  end

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    always_comb begin
      logic signed [31:0] x, sh;
      logic r1, r2;
      logic signed [32:0] y;
      x  = signed'(din[i]);
      sh = x >>> rs;
      r1 = (rs >= 6'd1) ? x[5'(rs - 6'd1)] : 1'b0;
      r2 = (rs >= 6'd2) ? x[5'(rs - 6'd2)] : 1'b0;
      y  = 33'(sh) + 33'(r1 & r2);
      if (y > 33'sd127)       dout[i] = 8'h7f;
      else if (y < -33'sd128) dout[i] = 8'h80;
      else                    dout[i] = y[7:0];
    end
  end
endmodule
