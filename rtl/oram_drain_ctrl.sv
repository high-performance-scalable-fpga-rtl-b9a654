// oram_drain_ctrl: ORAM write-back path, run once a layer's last pass has
// finished accumulating.
//
// Output pixel p of the layer sits in every tile's ORAM of PE p mod N_PE at
// address p div N_PE (pixel p is one 32-bit value per tile, i.e. per OFM).
// The controller reads the ORAMs twice, pixel by pixel, all tiles at once:
//   1. max scan: every pixel goes to max_logic, giving the layer's largest
//      magnitude and from it the down-conversion shift rs;
//   2. convert scan: every pixel goes through down_convert (32 -> 8 bit),
//      then, for an element-wise layer, through eltwise_unit together with
//      the next line of the element-wise buffer; the resulting 512-bit line
//      (8 bits x 64 OFMs) is pushed to the store unit.
// The convert scan issues a read only when the store FIFO and, if used, the
// element-wise buffer can serve it; otherwise it stalls (stall high).
// Lanes of tiles at or above num_tiles are left out of the max and written
// as 0.
//
// Timing: ORAM read data arrive one cycle after drain_en. The max scan takes
// npix+1 cycles, the convert scan at least npix+1; done pulses at the end.
// The two-scan order is this design's choice: the paper needs the maximum of
// all OFM values before it converts any of them but does not say how.
module oram_drain_ctrl
  import dnn_pkg::*;
#(
  parameter int unsigned N_TILES   = 64,
  parameter int unsigned N_PE      = 4,
  parameter int unsigned OA_W      = 11,
  parameter int unsigned P         = 25,
  parameter int unsigned ST_FREE_W = 3,
  parameter int unsigned ELT_CNT_W = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [15:0]                   npix,
  input  logic [6:0]                    num_tiles,
  input  logic                          eltwise,
  output logic                          busy,
  output logic                          done,
  // ORAM read
  output logic                          drain_en,
  output logic [$clog2(N_PE)-1:0]       drain_pe,
  output logic [OA_W-1:0]               drain_addr,
  input  logic [N_TILES-1:0][31:0]      drain_q,
  // exponents
  output logic [5:0]                    rs,
  input  logic signed [7:0]             e_conv,
  input  logic signed [7:0]             e_elt,
  // element-wise buffer
  input  logic [ELT_CNT_W-1:0]          elt_count,
  input  logic [LINE_W-1:0]             elt_dout,
  output logic                          elt_pop,
  // store unit
  input  logic [ST_FREE_W-1:0]          st_free,
  output logic                          st_push,
  output logic [LINE_W-1:0]             st_data,
  output logic                          stall
);
  typedef enum logic [2:0] {S_IDLE, S_MAX, S_MAX_END, S_CONV, S_CONV_END} st_e;
  st_e st;

  logic [15:0] p;
  logic [$clog2(N_PE)-1:0] pe_i;
  logic [OA_W-1:0] addr;
  logic d_max, d_conv;
  logic issue;
  logic [N_TILES-1:0] lane_en;
  logic [31:0] max_abs;
  logic [N_TILES-1:0][7:0] dc_out, ew_out, line_out;
  logic signed [7:0] ey;

  always_comb
    for (int i = 0; i < N_TILES; i++) lane_en[i] = (i < 32'(num_tiles));

  always_comb begin
    issue = 1'b0;
    if (st == S_MAX) issue = 1'b1;
    else if (st == S_CONV)
      issue = (32'(st_free) > 32'(d_conv)) &&
              (!eltwise || (32'(elt_count) > 32'(d_conv)));
  end
  assign stall      = (st == S_CONV) && !issue;
  assign drain_en   = issue;
  assign drain_pe   = pe_i;
  assign drain_addr = addr;
  assign busy       = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; p <= '0; pe_i <= '0; addr <= '0;
      d_max <= 1'b0; d_conv <= 1'b0; done <= 1'b0;
    end else begin
      done   <= 1'b0;
      d_max  <= issue && (st == S_MAX);
      d_conv <= issue && (st == S_CONV);
      if (issue) begin
        p <= p + 1'b1;
        if (32'(pe_i) == N_PE - 1) begin
          pe_i <= '0; addr <= addr + 1'b1;
        end else begin
          pe_i <= pe_i + 1'b1;
        end
      end
      unique case (st)
        S_IDLE: if (start) begin
          p <= '0; pe_i <= '0; addr <= '0;
          st <= (npix == 0) ? S_IDLE : S_MAX;
          done <= (npix == 0);
        end
        S_MAX: if (p == npix - 1'b1) st <= S_MAX_END;
        S_MAX_END: begin
          st <= S_CONV; p <= '0; pe_i <= '0; addr <= '0;
        end
        S_CONV: if (issue && p == npix - 1'b1) st <= S_CONV_END;
        S_CONV_END: begin
          st <= S_IDLE; done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end

  max_logic #(.LANES(N_TILES)) u_max (
    .clk, .rst_n, .clear(start && st == S_IDLE), .in_valid(d_max),
    .lane_en, .din(drain_q), .max_abs);

  down_convert #(.LANES(N_TILES), .P(P)) u_dc (
    .max_abs, .din(drain_q), .rs, .dout(dc_out));

  eltwise_unit #(.LANES(N_TILES)) u_ew (
    .a(dc_out), .ea(e_conv), .b(elt_dout[N_TILES*8-1:0]), .eb(e_elt), .y(ew_out), .ey);

  always_comb
    for (int i = 0; i < N_TILES; i++)
      line_out[i] = lane_en[i] ? (eltwise ? ew_out[i] : dc_out[i]) : 8'h00;

  assign st_push = d_conv;
  assign st_data = LINE_W'(line_out);
  assign elt_pop = d_conv && eltwise;
endmodule
