// iram_write_ctrl: IRAM write controller. Each 512-bit IFM line (one pixel,
// 64 input channels of 8 bits) that the load unit returns is written to the
// next IRAM address, starting from 0 at every start pulse, in all N_BANKS
// IRAM banks at once. Every bank thus holds the whole input tile, and each
// PE position reads its own pixel from its own bank at full rate.
// Timing: one registered stage, the write happens the cycle after in_valid.
// Writing every bank with the same data is this design's choice; the paper
// only says the 512 bits are distributed to the PEs.
module iram_write_ctrl #(
  parameter int unsigned N_BANKS = 4,
  parameter int unsigned DEPTH   = 128,
  parameter int unsigned W       = 512,
  parameter int unsigned AW      = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               in_valid,
  input  logic [W-1:0]       in_data,
  output logic [N_BANKS-1:0] we,
  output logic [AW-1:0]      waddr,
  output logic [W-1:0]       wdata,
  output logic               overflow
);
  logic [AW:0] cnt;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cnt <= '0; we <= '0; waddr <= '0; overflow <= 1'b0;
    end else begin
      we <= '0;
      if (start) begin
        cnt <= '0; overflow <= 1'b0;
      end else if (in_valid) begin
        if (32'(cnt) < DEPTH) begin
          we    <= '1;
          waddr <= cnt[AW-1:0];
        end else begin
          overflow <= 1'b1;
        end
        cnt <= cnt + 1'b1;
      end
    end

  always_ff @(posedge clk) if (in_valid) wdata <= in_data;
endmodule
