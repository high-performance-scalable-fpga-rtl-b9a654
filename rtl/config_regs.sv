// config_regs: host-programmed register file.
//
// The host writes one entry of REGS_PER_LAYER (16) 32-bit words per layer:
// the core registers (feature-map sizes, kernel size, stride, number of
// tiles, pass flags, exponent fields) and the LSU registers (base addresses
// and line counts). Word map in dnn_pkg. Entry i occupies word addresses
// 16*i .. 16*i+15. Above the table: NUM_LAYERS at word MAX_LAYERS*16,
// writing any value to word MAX_LAYERS*16+1 starts the run (start pulse),
// words MAX_LAYERS*16+32+j write exponent register j (exp_we/exp_idx/
// exp_wdata). Reads return the table, NUM_LAYERS, or a status word
// {busy, layer_idx} at MAX_LAYERS*16+2.
//
// cfg is the decoded entry selected by layer_idx, so the controller sees
// the next layer's registers as soon as it advances layer_idx. Keeping all
// layers in one table follows the paper's "control logic ... loads the
// corresponding values into the registers for each layer"; the address map
// is this design's.
module config_regs
  import dnn_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 64,
  parameter int unsigned HA_W       = $clog2(MAX_LAYERS*REGS_PER_LAYER) + 1,
  parameter int unsigned LI_W       = $clog2(MAX_LAYERS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             host_we,
  input  logic [HA_W-1:0]  host_addr,
  input  logic [31:0]      host_wdata,
  output logic [31:0]      host_rdata,
  input  logic [LI_W-1:0]  layer_idx,
  input  logic             busy,
  output layer_cfg_t       cfg,
  output logic [LI_W:0]    num_layers,
  output logic             start,
  output logic             exp_we,
  output logic [3:0]       exp_idx,
  output logic [EXP_W-1:0] exp_wdata
);
  localparam int unsigned NW   = MAX_LAYERS * REGS_PER_LAYER;
  localparam int unsigned GBASE = NW;

  logic [31:0] tbl [NW];

  always_ff @(posedge clk)
    if (host_we && 32'(host_addr) < NW) tbl[$clog2(NW)'(host_addr)] <= host_wdata;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      num_layers <= '0; start <= 1'b0; exp_we <= 1'b0; exp_idx <= '0; exp_wdata <= '0;
    end else begin
      start  <= host_we && 32'(host_addr) == GBASE + 1;
      exp_we <= host_we && 32'(host_addr) >= GBASE + 32 && 32'(host_addr) < GBASE + 48;
      if (host_we && 32'(host_addr) == GBASE) num_layers <= host_wdata[LI_W:0];
      exp_idx   <= host_addr[3:0];
      exp_wdata <= host_wdata[EXP_W-1:0];
    end

  always_comb begin
    if (32'(host_addr) < NW)             host_rdata = tbl[$clog2(NW)'(host_addr)];
    else if (32'(host_addr) == GBASE)    host_rdata = 32'(num_layers);
    else if (32'(host_addr) == GBASE+2)  host_rdata = {busy, 31'(layer_idx)};
    else                                 host_rdata = '0;
  end

  // Decode the current entry.
  logic [31:0] w [REGS_PER_LAYER];
  always_comb begin
    for (int i = 0; i < REGS_PER_LAYER; i++)
      w[i] = tbl[{layer_idx, 4'(i)}];
    cfg.in_w        = w[0][7:0];
    cfg.in_h        = w[0][15:8];
    cfg.out_w       = w[0][23:16];
    cfg.out_h       = w[0][31:24];
    cfg.k           = w[1][3:0];
    cfg.stride      = w[1][7:4];
    cfg.num_tiles   = w[1][14:8];
    cfg.first_pass  = w[1][16];
    cfg.last_pass   = w[1][17];
    cfg.eltwise     = w[1][18];
    cfg.bias_addr   = w[1][30:24];
    cfg.exp_act_idx = w[2][3:0];
    cfg.exp_elt_idx = w[2][7:4];
    cfg.exp_out_idx = w[2][11:8];
    cfg.exp_wei     = w[2][23:16];
    cfg.ifm_base    = w[3];
    cfg.ifm_lines   = w[4][15:0];
    cfg.wei_base    = w[5];
    cfg.wei_lines   = w[6][15:0];
    cfg.scl_base    = w[7];
    cfg.scl_lines   = w[8][15:0];
    cfg.bias_base   = w[9];
    cfg.bias_lines  = w[10][15:0];
    cfg.elt_base    = w[11];
    cfg.ofm_base    = w[12];
  end
endmodule
