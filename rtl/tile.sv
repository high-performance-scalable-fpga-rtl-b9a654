// tile: one column of the accelerator, producing one output feature map.
//
// A tile holds N_PE processing elements, one BSRAM (weights), one SSRAM
// (scaling values), one BBSRAM (bias) and one ORAM buffer per PE. All PEs of
// a tile use the same weight word, alpha and bias, so a tile computes N_PE
// neighbouring pixels of one OFM; the 64 tiles work on 64 different OFMs
// with the same input pixels.
//
// Timing: a compute beat (b_valid per PE, framing, ORAM address b_oaddr and
// BSRAM/SSRAM address b_waddr) is presented at cycle t; the tile reads BSRAM
// and SSRAM and delays the beat one cycle, matching the IRAM read that
// delivers act[] at t+1. Buffer writes come from the distribute logic. For
// the drain, drain_en/drain_pe/drain_addr read one ORAM and drain_q shows
// the value one cycle later; drain and compute are never active together.
// The buffer set follows the paper's figure of the tile; the one-ORAM-per-PE
// split and the shared read port are this design's choices.
module tile #(
  parameter int unsigned N_PE       = 4,
  parameter int unsigned N          = 64,
  parameter int unsigned ORAM_DEPTH = 1028,
  parameter int unsigned BS_DEPTH   = 128,
  parameter int unsigned BB_DEPTH   = 128,
  parameter int unsigned OA_W       = $clog2(ORAM_DEPTH),
  parameter int unsigned BA_W       = $clog2(BS_DEPTH),
  parameter int unsigned BBA_W      = $clog2(BB_DEPTH)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // compute beat
  input  logic [N_PE-1:0]              b_valid,
  input  logic                         b_first,
  input  logic                         b_last,
  input  logic [OA_W-1:0]              b_oaddr,
  input  logic [BA_W-1:0]              b_waddr,
  input  logic                         use_partial,
  input  logic [BBA_W-1:0]             bias_addr,
  input  logic [N_PE-1:0][N-1:0][7:0]  act,
  // buffer fill
  input  logic                         bs_we,
  input  logic [BA_W-1:0]              bs_waddr,
  input  logic [2*N-1:0]               bs_wdata,
  input  logic                         ss_we,
  input  logic [BA_W-1:0]              ss_waddr,
  input  logic [15:0]                  ss_wdata,
  input  logic                         bb_we,
  input  logic [BBA_W-1:0]             bb_waddr,
  input  logic [31:0]                  bb_wdata,
  // ORAM drain
  input  logic                         drain_en,
  input  logic [$clog2(N_PE)-1:0]      drain_pe,
  input  logic [OA_W-1:0]              drain_addr,
  output logic [31:0]                  drain_q
);
  logic [2*N-1:0] wt_q;
  logic [15:0]    alpha_q;
  logic [31:0]    bias_q;

  logic [N_PE-1:0] v_d;
  logic            first_d, last_d;
  logic [OA_W-1:0] oaddr_d;
  logic [$clog2(N_PE)-1:0] drain_pe_d;

  sram_1r1w #(.W(2*N), .DEPTH(BS_DEPTH)) u_bsram (
    .clk, .we(bs_we), .waddr(bs_waddr), .wdata(bs_wdata),
    .re(|b_valid), .raddr(b_waddr), .rdata(wt_q));

  sram_1r1w #(.W(16), .DEPTH(BS_DEPTH)) u_ssram (
    .clk, .we(ss_we), .waddr(ss_waddr), .wdata(ss_wdata),
    .re(|b_valid), .raddr(b_waddr), .rdata(alpha_q));

  sram_1r1w #(.W(32), .DEPTH(BB_DEPTH)) u_bbsram (
    .clk, .we(bb_we), .waddr(bb_waddr), .wdata(bb_wdata),
    .re(1'b1), .raddr(bias_addr), .rdata(bias_q));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v_d <= '0;
    else        v_d <= b_valid;

  always_ff @(posedge clk) begin
    first_d    <= b_first;
    last_d     <= b_last;
    oaddr_d    <= b_oaddr;
    drain_pe_d <= drain_pe;
  end

  logic [N_PE-1:0][31:0] oram_q;

  for (genvar k = 0; k < N_PE; k++) begin : g_pe
    logic            rd_en, we;
    logic [OA_W-1:0] raddr, waddr;
    logic [31:0]     wdata;

    pe #(.N(N), .OA_W(OA_W)) u_pe (
      .clk, .rst_n,
      .in_valid(v_d[k]), .in_first(first_d), .in_last(last_d), .in_oaddr(oaddr_d),
      .act(act[k]), .wt(wt_q), .alpha(alpha_q), .bias(bias_q), .use_partial,
      .oram_rd_en(rd_en), .oram_raddr(raddr), .oram_q(oram_q[k]),
      .oram_we(we), .oram_waddr(waddr), .oram_wdata(wdata));

    sram_1r1w #(.W(32), .DEPTH(ORAM_DEPTH)) u_oram (
      .clk, .we, .waddr, .wdata,
      .re(rd_en | (drain_en && (drain_pe == k))),
      .raddr(drain_en ? drain_addr : raddr),
      .rdata(oram_q[k]));
  end

  assign drain_q = oram_q[drain_pe_d];

  // The drain owns the ORAM read port only while no PE needs it.
  assert property (@(posedge clk) disable iff (!rst_n) drain_en |-> !(|b_valid))
    else $error("tile: drain during compute");
endmodule
