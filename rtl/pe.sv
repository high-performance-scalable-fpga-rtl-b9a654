// pe: processing element = dot64 engine -> scaling engine -> accumulator/bias.
//
// Each cycle the PE may take one operand set: 64 activations (one pixel of
// 64 input channels), the 64 ternary weights of one kernel position, the
// 16-bit alpha of that weight block, and framing (in_first/in_last mark the
// first and last kernel position of an output pixel, in_oaddr its ORAM
// address). The side-band travels in a shift register next to the adder
// tree. One cycle before a first product reaches the accumulator the PE
// reads the ORAM at that pixel's address (oram_rd_en/oram_raddr), so the
// partial sum of earlier input-channel blocks is on oram_q when the
// accumulator needs it. The finished pixel is written back through
// oram_we/oram_waddr/oram_wdata.
//
// Timing: operands at cycle 0, dot64 result at 7, ORAM read issued at 7,
// scaled product at 8, ORAM write at the end of cycle 8 (LAT = 9 edges).
// Fully pipelined, one dot64 per cycle, as in the paper; the exact stage
// count is this design's.
module pe #(
  parameter int unsigned N    = 64,
  parameter int unsigned OA_W = 11
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_first,
  input  logic                 in_last,
  input  logic [OA_W-1:0]      in_oaddr,
  input  logic [N-1:0][7:0]    act,
  input  logic [N-1:0][1:0]    wt,
  input  logic signed [15:0]   alpha,
  input  logic signed [31:0]   bias,
  input  logic                 use_partial,
  output logic                 oram_rd_en,
  output logic [OA_W-1:0]      oram_raddr,
  input  logic signed [31:0]   oram_q,
  output logic                 oram_we,
  output logic [OA_W-1:0]      oram_waddr,
  output logic signed [31:0]   oram_wdata
);
  localparam int unsigned DLAT = $clog2(N) + 1;

  typedef struct packed {
    logic              first;
    logic              last;
    logic [OA_W-1:0]   oaddr;
    logic signed [15:0] alpha;
  } side_t;

  side_t side_in, side_d, side_p;
  side_t side_pipe [DLAT];

  logic                dot_valid;
  logic signed [14:0]  dot_sum;
  logic                p_valid;
  logic signed [30:0]  prod;
  logic                acc_valid;
  logic signed [31:0]  acc;

  assign side_in = '{first: in_first, last: in_last, oaddr: in_oaddr, alpha: alpha};

  always_ff @(posedge clk) begin
    side_pipe[0] <= side_in;
    for (int i = 1; i < DLAT; i++) side_pipe[i] <= side_pipe[i-1];
    side_p <= side_d;
  end
  assign side_d = side_pipe[DLAT-1];

  dot64 #(.N(N), .OUT_W(15)) u_dot (
    .clk, .rst_n, .in_valid, .act, .wt,
    .out_valid(dot_valid), .sum(dot_sum));

  scale_unit #(.IN_W(15), .ALPHA_W(16)) u_scale (
    .clk, .rst_n, .in_valid(dot_valid), .din(dot_sum), .alpha(side_d.alpha),
    .out_valid(p_valid), .dout(prod));

  assign oram_rd_en = dot_valid & side_d.first & use_partial;
  assign oram_raddr = side_d.oaddr;

  accum_bias #(.PROD_W(31), .ACC_W(32), .OA_W(OA_W)) u_acc (
    .clk, .rst_n, .p_valid, .p_first(side_p.first), .p_last(side_p.last),
    .p_oaddr(side_p.oaddr), .prod, .use_partial, .bias, .oram_q,
    .oram_we, .oram_waddr, .oram_wdata, .acc_valid, .acc);
endmodule
