// cnn_ctrl: the CNN controller, which runs the programmed layers one after
// another.
//
// For each layer entry (cfg, selected by layer_idx):
//   LOAD    four load jobs in turn: IFM lines into IRAM, weight lines into
//           BSRAM, scaling lines into SSRAM, bias lines into BBSRAM (a job of
//           0 lines keeps what the buffer holds);
//   COMPUTE the convolution loop. Output pixels are taken in groups of N_PE,
//           PE k of every tile getting pixel N_PE*g + k; for each group the
//           loop walks the K x K kernel positions (ky, kx), one beat per
//           cycle. A beat gives each PE its IRAM address
//           (oy*stride + ky)*in_w + ox*stride + kx, the shared BSRAM/SSRAM
//           address ky*K + kx, first/last framing and the ORAM address g.
//           PEs whose pixel is beyond out_w*out_h get no valid.
//   FLUSH   wait until the last beat has left the PE pipelines;
//   DRAIN   only when last_pass: start the ORAM drain, the store unit and,
//           for an element-wise layer, a load of npix lines into the
//           element-wise buffer; wait until all three are finished, then
//           commit the output exponent.
// A layer bigger than the buffers is run as several entries: one entry per
// block of 64 input channels, the first with first_pass (bias), the later
// ones adding to the ORAM partial sums, the last with last_pass.
// No padding: the host supplies padded input tiles.
// The load/compute/drain split follows the paper; the loop order and the
// state machine are this design's.
module cnn_ctrl
  import dnn_pkg::*;
#(
  parameter int unsigned N_PE       = 4,
  parameter int unsigned IRAM_AW    = 7,
  parameter int unsigned OA_W       = 11,
  parameter int unsigned BA_W       = 7,
  parameter int unsigned LI_W       = 6,
  parameter int unsigned PIPE_LAT   = 12
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [LI_W:0]                 num_layers,
  input  layer_cfg_t                    cfg,
  output logic [LI_W-1:0]               layer_idx,
  output logic                          busy,
  output logic                          done,
  // load unit
  output logic                          ld_start,
  output ld_ch_e                        ld_ch,
  output logic [ADDR_W-1:0]             ld_base,
  output logic [15:0]                   ld_lines,
  input  logic                          ld_done,
  // compute beat
  output logic [N_PE-1:0]               b_valid,
  output logic                          b_first,
  output logic                          b_last,
  output logic [OA_W-1:0]               b_oaddr,
  output logic [BA_W-1:0]               b_waddr,
  output logic [N_PE-1:0][IRAM_AW-1:0]  iram_raddr,
  output logic                          use_partial,
  // drain and store
  output logic                          dr_start,
  input  logic                          dr_done,
  output logic                          st_start,
  input  logic                          st_idle,
  output logic                          elt_clear,
  output logic [15:0]                   npix,
  // exponent
  output logic                          exp_commit
);
  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_LOAD, S_LOAD_WAIT, S_COMPUTE, S_FLUSH,
    S_DRAIN0, S_DRAIN1, S_DRAIN_WAIT, S_COMMIT, S_NEXT
  } st_e;
  st_e st;

  logic [1:0]  ldj;
  logic [3:0]  ky, kx;
  logic [7:0]  oy0, ox0;
  logic [15:0] g, p0;
  logic [7:0]  flush_cnt;
  logic        dr_seen, ld_seen;
  logic [N_PE-1:0][7:0] oy_k, ox_k;

  assign npix        = 16'(cfg.out_w) * 16'(cfg.out_h);
  assign use_partial = !cfg.first_pass;

  // Pixel positions of the N_PE PEs in the current group (raster order):
  // PE k sits k pixels after PE 0.
  for (genvar k = 0; k < N_PE; k++) begin : g_pos
    if (k == 0) begin : g_first
      assign oy_k[0] = oy0;
      assign ox_k[0] = ox0;
    end else begin : g_next
      assign ox_k[k] = (ox_k[k-1] + 8'd1 >= cfg.out_w) ? 8'd0 : ox_k[k-1] + 8'd1;
      assign oy_k[k] = (ox_k[k-1] + 8'd1 >= cfg.out_w) ? oy_k[k-1] + 8'd1 : oy_k[k-1];
    end
  end

  always_comb begin
    for (int k = 0; k < N_PE; k++) begin
      b_valid[k] = (st == S_COMPUTE) && (32'(p0) + k < 32'(npix));
      iram_raddr[k] = IRAM_AW'((16'(oy_k[k]) * 16'(cfg.stride) + 16'(ky)) * 16'(cfg.in_w)
                               + 16'(ox_k[k]) * 16'(cfg.stride) + 16'(kx));
    end
    b_first = (ky == 0) && (kx == 0);
    b_last  = (ky == cfg.k - 1'b1) && (kx == cfg.k - 1'b1);
    b_oaddr = OA_W'(g);
    b_waddr = BA_W'(8'(ky) * 8'(cfg.k) + 8'(kx));
  end

  // Load job parameters for step ldj.
  always_comb begin
    unique case (ldj)
      2'd0:    begin ld_ch = CH_IFM;  ld_base = cfg.ifm_base;  ld_lines = cfg.ifm_lines;  end
      2'd1:    begin ld_ch = CH_WEI;  ld_base = cfg.wei_base;  ld_lines = cfg.wei_lines;  end
      2'd2:    begin ld_ch = CH_SCL;  ld_base = cfg.scl_base;  ld_lines = cfg.scl_lines;  end
      default: begin ld_ch = CH_BIAS; ld_base = cfg.bias_base; ld_lines = cfg.bias_lines; end
    endcase
    if (st == S_DRAIN1) begin
      ld_ch = CH_ELT; ld_base = cfg.elt_base; ld_lines = npix;
    end
  end

  assign ld_start = (st == S_LOAD) || (st == S_DRAIN1 && cfg.eltwise);
  assign dr_start = (st == S_DRAIN1);
  assign st_start = (st == S_DRAIN1);
  assign elt_clear = (st == S_DRAIN0);
  assign exp_commit = (st == S_COMMIT);
  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; layer_idx <= '0; done <= 1'b0; ldj <= '0;
      ky <= '0; kx <= '0; oy0 <= '0; ox0 <= '0; g <= '0; p0 <= '0;
      flush_cnt <= '0; dr_seen <= 1'b0; ld_seen <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start && num_layers != 0) begin
          layer_idx <= '0; st <= S_FETCH;
        end
        S_FETCH: begin
          ldj <= '0; st <= S_LOAD;
        end
        S_LOAD: st <= S_LOAD_WAIT;
        S_LOAD_WAIT: if (ld_done) begin
          if (ldj == 2'd3) begin
            st <= S_COMPUTE;
            ky <= '0; kx <= '0; oy0 <= '0; ox0 <= '0; g <= '0; p0 <= '0;
          end else begin
            ldj <= ldj + 1'b1; st <= S_LOAD;
          end
        end
        S_COMPUTE: begin
          if (kx == cfg.k - 1'b1) begin
            kx <= '0;
            if (ky == cfg.k - 1'b1) begin
              ky <= '0;
              g  <= g + 1'b1;
              p0 <= p0 + 16'(N_PE);
              // next group starts one pixel after the last PE's pixel
              if (ox_k[N_PE-1] + 8'd1 >= cfg.out_w) begin
                ox0 <= '0; oy0 <= oy_k[N_PE-1] + 8'd1;
              end else begin
                ox0 <= ox_k[N_PE-1] + 8'd1; oy0 <= oy_k[N_PE-1];
              end
              if (32'(p0) + N_PE >= 32'(npix)) begin
                st <= S_FLUSH; flush_cnt <= 8'(PIPE_LAT);
              end
            end else begin
              ky <= ky + 1'b1;
            end
          end else begin
            kx <= kx + 1'b1;
          end
        end
        S_FLUSH: begin
          flush_cnt <= flush_cnt - 1'b1;
          if (flush_cnt == 0) st <= cfg.last_pass ? S_DRAIN0 : S_NEXT;
        end
        S_DRAIN0: st <= S_DRAIN1;
        S_DRAIN1: begin
          dr_seen <= 1'b0; ld_seen <= !cfg.eltwise; st <= S_DRAIN_WAIT;
        end
        S_DRAIN_WAIT: begin
          if (dr_done) dr_seen <= 1'b1;
          if (ld_done) ld_seen <= 1'b1;
          if ((dr_seen || dr_done) && (ld_seen || ld_done) && st_idle) st <= S_COMMIT;
        end
        S_COMMIT: st <= S_NEXT;
        S_NEXT: begin
          if (32'(layer_idx) + 1 >= 32'(num_layers)) begin
            st <= S_IDLE; done <= 1'b1;
          end else begin
            layer_idx <= layer_idx + 1'b1; st <= S_FETCH;
          end
        end
        default: st <= S_IDLE;
      endcase
    end

  assert property (@(posedge clk) disable iff (!rst_n) st == S_COMPUTE |-> cfg.k != 0)
    else $error("cnn_ctrl: kernel size 0");
endmodule
