// dot64: ternary dot product of N signed 8-bit activations with N 2-bit
// ternary weights. No multipliers: each weight selects +a, -a or 0 (the
// paper's "negate the input" trick), then a registered binary adder tree
// sums the N terms into a signed OUT_W-bit result (15 bits for N = 64:
// 64 x 128 = 8192 needs 15 bits signed).
//
// Interface: act/wt sampled when in_valid is high; sum/out_valid appear
// LAT = 1 + log2(N) cycles later (7 for N = 64). A new operand set is
// accepted every cycle. The 64-wide operation and 15-bit output follow the
// paper; the weight code (01 = +1, 11 = -1, else 0) and the stage split are
// this design's choices.
module dot64 #(
  parameter int unsigned N     = 64,
  parameter int unsigned OUT_W = 15
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [N-1:0][7:0]     act,
  input  logic [N-1:0][1:0]     wt,
  output logic                  out_valid,
  output logic signed [OUT_W-1:0] sum
);
  import dnn_pkg::*;

  localparam int unsigned LOG = $clog2(N);
  localparam int unsigned LAT = LOG + 1;

  // lvl[l] holds N >> l partial sums.
  logic signed [OUT_W-1:0] lvl [LOG+1][N];
  logic [LAT-1:0]          vpipe;

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++)
      lvl[0][i] <= OUT_W'(tern_mul(signed'(act[i]), wt[i]));
    for (int l = 1; l <= LOG; l++)
      for (int i = 0; i < (N >> l); i++)
        lvl[l][i] <= lvl[l-1][2*i] + lvl[l-1][2*i+1];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], in_valid};

  assign out_valid = vpipe[LAT-1];
  assign sum       = lvl[LOG][0];
endmodule
