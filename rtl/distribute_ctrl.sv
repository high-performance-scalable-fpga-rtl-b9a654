// distribute_ctrl: write controller and distribute logic for the per-tile
// buffers (BSRAM weights, SSRAM scaling values, BBSRAM bias).
//
// Memory layout: a 512-bit line carries WPL = 512/WORD_W words for WPL
// consecutive tiles. GROUPS = N_TILES/WPL lines make one buffer address for
// all tiles, so line l goes to buffer address l / GROUPS and word w of it to
// tile (l mod GROUPS)*WPL + w. The line counter restarts with start.
// The tiles are split among N_DIST distribute blocks; each block registers
// the line and raises the write enables only of its own N_TILES/N_DIST
// tiles, which keeps the fan-out of each block small.
//
// Interface: in_valid/in_data from the load unit; we[t], waddr and
// wdata[t] to tile t, one cycle after in_valid. The paper gives the split
// into 4 blocks of 16 tiles (weights) and 2 blocks of 32 tiles (scaling);
// the line layout inside memory is this design's choice.
module distribute_ctrl #(
  parameter int unsigned N_TILES = 64,
  parameter int unsigned WORD_W  = 128,
  parameter int unsigned N_DIST  = 4,
  parameter int unsigned DEPTH   = 128,
  parameter int unsigned LINE_W  = 512,
  parameter int unsigned AW      = $clog2(DEPTH)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic                            in_valid,
  input  logic [LINE_W-1:0]               in_data,
  output logic [N_TILES-1:0]              we,
  output logic [N_DIST-1:0][AW-1:0]       waddr,
  output logic [N_TILES-1:0][WORD_W-1:0]  wdata
);
  localparam int unsigned WPL     = LINE_W / WORD_W;
  localparam int unsigned GROUPS  = (N_TILES + WPL - 1) / WPL;
  localparam int unsigned PER_D   = N_TILES / N_DIST;
  localparam int unsigned GW      = (GROUPS > 1) ? $clog2(GROUPS) : 1;

  logic [GW-1:0] grp;
  logic [AW-1:0] addr;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      grp <= '0; addr <= '0;
    end else if (start) begin
      grp <= '0; addr <= '0;
    end else if (in_valid) begin
      if (32'(grp) == GROUPS - 1) begin
        grp  <= '0;
        addr <= addr + 1'b1;
      end else begin
        grp <= grp + 1'b1;
      end
    end

  for (genvar d = 0; d < N_DIST; d++) begin : g_dist
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) we[d*PER_D +: PER_D] <= '0;
      else
        for (int j = 0; j < PER_D; j++)
          we[d*PER_D + j] <= in_valid && !start &&
                             (32'(grp) == (d*PER_D + j) / WPL);

    always_ff @(posedge clk)
      if (in_valid) begin
        waddr[d] <= addr;
        for (int j = 0; j < PER_D; j++)
          wdata[d*PER_D + j] <= in_data[((d*PER_D + j) % WPL)*WORD_W +: WORD_W];
      end
  end
endmodule
