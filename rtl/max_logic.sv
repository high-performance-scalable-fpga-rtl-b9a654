// max_logic: running absolute maximum over the 32-bit OFM values of a
// layer, LANES values per cycle (one pixel of every tile). clear resets the
// maximum to 0; each in_valid cycle folds |din[i]| of the enabled lanes
// into it (a comparator tree over the lanes, then one register). max_abs is
// the registered result, a 32-bit magnitude (|-2^31| = 2^31 fits).
// Finding the absolute maximum before down-conversion follows the paper;
// the lane enable, which leaves unused tiles out, is this design's.
module max_logic #(
  parameter int unsigned LANES = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic                         in_valid,
  input  logic [LANES-1:0]             lane_en,
  input  logic [LANES-1:0][31:0]       din,
  output logic [31:0]                  max_abs
);
  logic [31:0] m;

  always_comb begin
    m = max_abs;
    for (int i = 0; i < LANES; i++) begin
      logic [31:0] a;
      a = din[i][31] ? (~din[i] + 32'd1) : din[i];
      if (lane_en[i] && a > m) m = a;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)        max_abs <= '0;
    else if (clear)    max_abs <= '0;
    else if (in_valid) max_abs <= m;
endmodule
