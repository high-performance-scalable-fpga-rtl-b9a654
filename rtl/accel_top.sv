// accel_top: INT8-activation / ternary-weight convolution accelerator.
//
// Structure (N_TILES tiles of N_PE PEs each, 64 x 4 by default):
//   host port    -> config_regs (layer table, start, exponent presets)
//   cnn_ctrl     runs the layers: load jobs, convolution beats, drain
//   load_unit    Avalon reads -> iram_write_ctrl (IFM, to all IRAM banks)
//                              -> distribute_ctrl x3 (weights, scaling, bias
//                                 into the per-tile BSRAM/SSRAM/BBSRAM)
//                              -> elt_fifo (element-wise buffer)
//   IRAM banks   N_PE banks, bank k feeds PE k of every tile
//   tiles        dot64 -> scale -> accumulate into the ORAMs
//   oram_drain_ctrl  max scan, down-conversion, element-wise add -> store_unit
//   exp_unit     shared exponents of the dynamic fixed-point tensors
//   avalon_arb   one Avalon-MM master port for loads and stores
//
// External interface: a 32-bit register write/read port for the host
// (host_we/host_addr/host_wdata/host_rdata, map in config_regs) and a
// 512-bit Avalon-MM master (byte addresses, one line per transfer,
// waitrequest, pipelined reads with readdatavalid). done pulses when the
// last programmed layer has been written back.
//
// Follows the block diagram of the original (tile array, IRAM/ORAM, write
// controllers, LSU, drain path, controller and config registers); the
// register map, line layouts and handshakes are this design's own.
// Some status outputs of the sub-blocks (load/drain busy, IRAM overflow, the
// element-wise unit's exponent) are left unconnected here: the controller
// works from the done pulses and exp_unit computes the exponent itself.
// rst_n is both the asynchronous reset of the flops and the disable of the
// clocked assertions, which lint reports as a net used both ways; that is
// intended.
module accel_top
  import dnn_pkg::*;
#(
  parameter int unsigned N_TILES    = 64,
  parameter int unsigned N_PE       = 4,
  parameter int unsigned IRAM_DEPTH = 128,
  parameter int unsigned ORAM_DEPTH = 1028,
  parameter int unsigned BS_DEPTH   = 128,
  parameter int unsigned BB_DEPTH   = 128,
  parameter int unsigned ELT_DEPTH  = 128,
  parameter int unsigned MAX_LAYERS = 64,
  parameter int unsigned MAX_OUT    = 8,
  parameter int unsigned ST_DEPTH   = 4,
  parameter int unsigned P          = 25,
  parameter int unsigned HA_W       = $clog2(MAX_LAYERS*REGS_PER_LAYER) + 1,
  parameter int unsigned LI_W       = $clog2(MAX_LAYERS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host register port
  input  logic              host_we,
  input  logic [HA_W-1:0]   host_addr,
  input  logic [31:0]       host_wdata,
  output logic [31:0]       host_rdata,
  // Avalon-MM master
  output logic [ADDR_W-1:0] avm_address,
  output logic              avm_read,
  output logic              avm_write,
  output logic [LINE_W-1:0] avm_writedata,
  output logic [LINE_B-1:0] avm_byteenable,
  input  logic              avm_waitrequest,
  input  logic [LINE_W-1:0] avm_readdata,
  input  logic              avm_readdatavalid,
  // status
  output logic              busy,
  output logic              done,
  output logic [LI_W-1:0]   layer_idx
);
  localparam int unsigned IRAM_AW = $clog2(IRAM_DEPTH);
  localparam int unsigned OA_W    = $clog2(ORAM_DEPTH);
  localparam int unsigned BA_W    = $clog2(BS_DEPTH);
  localparam int unsigned BBA_W   = $clog2(BB_DEPTH);
  localparam int unsigned ST_FW   = $clog2(ST_DEPTH+1);
  localparam int unsigned EC_W    = $clog2(ELT_DEPTH) + 1;
  localparam int unsigned N       = 64;

  // ---------------- configuration and control ----------------
  layer_cfg_t       cfg;
  logic [LI_W:0]    num_layers;
  logic             start;
  logic             exp_host_we;
  logic [3:0]       exp_host_idx;
  logic [EXP_W-1:0] exp_host_wdata;

  config_regs #(.MAX_LAYERS(MAX_LAYERS), .HA_W(HA_W), .LI_W(LI_W)) u_cfg (
    .clk, .rst_n, .host_we, .host_addr, .host_wdata, .host_rdata,
    .layer_idx, .busy, .cfg, .num_layers, .start,
    .exp_we(exp_host_we), .exp_idx(exp_host_idx), .exp_wdata(exp_host_wdata));

  logic                         ld_start, ld_done, ld_busy;
  ld_ch_e                       ld_ch;
  logic [ADDR_W-1:0]            ld_base;
  logic [15:0]                  ld_lines;
  logic [N_PE-1:0]              b_valid;
  logic                         b_first, b_last, use_partial;
  logic [OA_W-1:0]              b_oaddr;
  logic [BA_W-1:0]              b_waddr;
  logic [N_PE-1:0][IRAM_AW-1:0] iram_raddr;
  logic                         dr_start, dr_done, dr_busy;
  logic                         st_start, st_idle, elt_clear, exp_commit;
  logic [15:0]                  npix;

  cnn_ctrl #(.N_PE(N_PE), .IRAM_AW(IRAM_AW), .OA_W(OA_W), .BA_W(BA_W), .LI_W(LI_W)) u_ctrl (
    .clk, .rst_n, .start, .num_layers, .cfg, .layer_idx, .busy, .done,
    .ld_start, .ld_ch, .ld_base, .ld_lines, .ld_done,
    .b_valid, .b_first, .b_last, .b_oaddr, .b_waddr, .iram_raddr, .use_partial,
    .dr_start, .dr_done, .st_start, .st_idle, .elt_clear, .npix, .exp_commit);

  // ---------------- load-store unit ----------------
  logic              rd_req, rd_wait, wr_req, wr_wait;
  logic [ADDR_W-1:0] rd_addr, wr_addr;
  logic [LINE_W-1:0] wr_data;
  logic              lu_valid;
  ld_ch_e            lu_ch;
  logic [LINE_W-1:0] lu_data;
  logic [EC_W-1:0]   elt_count;
  logic [15:0]       ld_space;

  assign ld_space = (lu_ch == CH_ELT) ? 16'(ELT_DEPTH) - 16'(elt_count) : 16'hffff;

  load_unit #(.MAX_OUT(MAX_OUT)) u_load (
    .clk, .rst_n, .job_start(ld_start), .job_ch(ld_ch), .job_base(ld_base),
    .job_lines(ld_lines), .space(ld_space), .busy(ld_busy), .done(ld_done),
    .rd_req, .rd_addr, .rd_wait, .rd_data(avm_readdata), .rd_valid(avm_readdatavalid),
    .out_valid(lu_valid), .out_ch(lu_ch), .out_data(lu_data));

  logic              st_push;
  logic [LINE_W-1:0] st_data;
  logic [ST_FW-1:0]  st_free;

  store_unit #(.DEPTH(ST_DEPTH)) u_store (
    .clk, .rst_n, .start(st_start), .base(cfg.ofm_base), .push(st_push), .data(st_data),
    .free(st_free), .idle(st_idle), .wr_req, .wr_addr, .wr_data, .wr_wait);

  avalon_arb u_arb (
    .clk, .rst_n, .rd_req, .rd_addr, .rd_wait, .wr_req, .wr_addr, .wr_data, .wr_wait,
    .avm_address, .avm_read, .avm_write, .avm_writedata, .avm_byteenable, .avm_waitrequest);

  // ---------------- write controllers ----------------
  logic [N_PE-1:0]         ir_we;
  logic [IRAM_AW-1:0]      ir_waddr;
  logic [LINE_W-1:0]       ir_wdata;
  logic                    ir_overflow;

  iram_write_ctrl #(.N_BANKS(N_PE), .DEPTH(IRAM_DEPTH)) u_irw (
    .clk, .rst_n, .start(ld_start && ld_ch == CH_IFM),
    .in_valid(lu_valid && lu_ch == CH_IFM), .in_data(lu_data),
    .we(ir_we), .waddr(ir_waddr), .wdata(ir_wdata), .overflow(ir_overflow));

  localparam int unsigned BS_ND = (N_TILES >= 4) ? 4 : 1;
  localparam int unsigned SS_ND = (N_TILES >= 2) ? 2 : 1;

  logic [N_TILES-1:0]              bs_we, ss_we, bb_we;
  logic [BS_ND-1:0][BA_W-1:0]      bs_waddr;
  logic [SS_ND-1:0][BA_W-1:0]      ss_waddr;
  logic [0:0][BBA_W-1:0]           bb_waddr;
  logic [N_TILES-1:0][2*N-1:0]     bs_wdata;
  logic [N_TILES-1:0][15:0]        ss_wdata;
  logic [N_TILES-1:0][31:0]        bb_wdata;

  distribute_ctrl #(.N_TILES(N_TILES), .WORD_W(2*N), .N_DIST(BS_ND), .DEPTH(BS_DEPTH)) u_bsw (
    .clk, .rst_n, .start(ld_start && ld_ch == CH_WEI),
    .in_valid(lu_valid && lu_ch == CH_WEI), .in_data(lu_data),
    .we(bs_we), .waddr(bs_waddr), .wdata(bs_wdata));

  distribute_ctrl #(.N_TILES(N_TILES), .WORD_W(16), .N_DIST(SS_ND), .DEPTH(BS_DEPTH)) u_ssw (
    .clk, .rst_n, .start(ld_start && ld_ch == CH_SCL),
    .in_valid(lu_valid && lu_ch == CH_SCL), .in_data(lu_data),
    .we(ss_we), .waddr(ss_waddr), .wdata(ss_wdata));

  distribute_ctrl #(.N_TILES(N_TILES), .WORD_W(32), .N_DIST(1), .DEPTH(BB_DEPTH)) u_bbw (
    .clk, .rst_n, .start(ld_start && ld_ch == CH_BIAS),
    .in_valid(lu_valid && lu_ch == CH_BIAS), .in_data(lu_data),
    .we(bb_we), .waddr(bb_waddr), .wdata(bb_wdata));

  // ---------------- IRAM banks ----------------
  logic [N_PE-1:0][N-1:0][7:0] act;

  for (genvar k = 0; k < N_PE; k++) begin : g_iram
    sram_1r1w #(.W(LINE_W), .DEPTH(IRAM_DEPTH)) u_iram (
      .clk, .we(ir_we[k]), .waddr(ir_waddr), .wdata(ir_wdata),
      .re(b_valid[k]), .raddr(iram_raddr[k]), .rdata(act[k]));
  end

  // ---------------- tiles ----------------
  logic                      drain_en;
  logic [$clog2(N_PE)-1:0]   drain_pe;
  logic [OA_W-1:0]           drain_addr;
  logic [N_TILES-1:0][31:0]  drain_q;

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    tile #(.N_PE(N_PE), .N(N), .ORAM_DEPTH(ORAM_DEPTH), .BS_DEPTH(BS_DEPTH),
           .BB_DEPTH(BB_DEPTH)) u_tile (
      .clk, .rst_n,
      .b_valid, .b_first, .b_last, .b_oaddr, .b_waddr, .use_partial,
      .bias_addr(BBA_W'(cfg.bias_addr)), .act,
      .bs_we(bs_we[t]), .bs_waddr(bs_waddr[t / (N_TILES / BS_ND)]), .bs_wdata(bs_wdata[t]),
      .ss_we(ss_we[t]), .ss_waddr(ss_waddr[t / (N_TILES / SS_ND)]), .ss_wdata(ss_wdata[t]),
      .bb_we(bb_we[t]), .bb_waddr(bb_waddr[0]), .bb_wdata(bb_wdata[t]),
      .drain_en, .drain_pe, .drain_addr, .drain_q(drain_q[t]));
  end

  // ---------------- write-back path ----------------
  logic [LINE_W-1:0]  elt_dout;
  logic               elt_pop, dr_stall;
  logic [5:0]         rs;
  logic signed [7:0]  e_conv, e_elt, e_out;

  elt_fifo #(.W(LINE_W), .DEPTH(ELT_DEPTH)) u_elt (
    .clk, .rst_n, .clear(elt_clear), .push(lu_valid && lu_ch == CH_ELT), .din(lu_data),
    .pop(elt_pop), .dout(elt_dout), .count(elt_count));

  oram_drain_ctrl #(.N_TILES(N_TILES), .N_PE(N_PE), .OA_W(OA_W), .P(P),
                    .ST_FREE_W(ST_FW), .ELT_CNT_W(EC_W)) u_drain (
    .clk, .rst_n, .start(dr_start), .npix, .num_tiles(cfg.num_tiles), .eltwise(cfg.eltwise),
    .busy(dr_busy), .done(dr_done),
    .drain_en, .drain_pe, .drain_addr, .drain_q,
    .rs, .e_conv, .e_elt, .elt_count, .elt_dout, .elt_pop,
    .st_free, .st_push, .st_data, .stall(dr_stall));

  exp_unit #(.N_EXP(16)) u_exp (
    .clk, .rst_n, .host_we(exp_host_we), .host_idx(exp_host_idx), .host_wdata(exp_host_wdata),
    .act_idx(cfg.exp_act_idx), .elt_idx(cfg.exp_elt_idx), .out_idx(cfg.exp_out_idx),
    .exp_wei(cfg.exp_wei), .rs, .eltwise(cfg.eltwise), .commit(exp_commit),
    .e_conv, .e_elt, .e_out);
endmodule
