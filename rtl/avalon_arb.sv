// avalon_arb: the Avalon interface. Shares one Avalon-MM master port
// (512-bit data, byte address) between the load unit's reads and the store
// unit's writes. When both request, priority alternates after every
// accepted transfer. A request that sees waitrequest keeps the grant until
// it is accepted, since an Avalon master must hold its request stable.
// Read data and readdatavalid go straight to the load unit (reads return in
// order). rd_wait/wr_wait tell each side whether its request was taken this
// cycle. The arbitration scheme is this design's choice.
// Write data passes through unregistered and byteenable is all ones, since
// every transfer is a whole line.
module avalon_arb
  import dnn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_req,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic              rd_wait,
  input  logic              wr_req,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [LINE_W-1:0] wr_data,
  output logic              wr_wait,
  output logic [ADDR_W-1:0] avm_address,
  output logic              avm_read,
  output logic              avm_write,
  output logic [LINE_W-1:0] avm_writedata,
  output logic [LINE_B-1:0] avm_byteenable,
  input  logic              avm_waitrequest
);
  logic lock, lock_wr, prio_wr, grant_wr;

  always_comb begin
    if (lock)                  grant_wr = lock_wr;
    else if (rd_req && wr_req) grant_wr = prio_wr;
    else                       grant_wr = wr_req;
  end

  assign avm_read       = rd_req && !grant_wr;
  assign avm_write      = wr_req && grant_wr;
  assign avm_address    = grant_wr ? wr_addr : rd_addr;
  assign avm_writedata  = wr_data;
  assign avm_byteenable = '1;
  assign rd_wait        = grant_wr || avm_waitrequest;
  assign wr_wait        = !grant_wr || avm_waitrequest;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      lock <= 1'b0; lock_wr <= 1'b0; prio_wr <= 1'b0;
    end else begin
      lock    <= (avm_read || avm_write) && avm_waitrequest;
      lock_wr <= grant_wr;
      if ((avm_read || avm_write) && !avm_waitrequest) prio_wr <= !grant_wr;
    end

  assert property (@(posedge clk) disable iff (!rst_n) !(avm_read && avm_write))
    else $error("avalon_arb: read and write together");
endmodule
