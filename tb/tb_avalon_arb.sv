// tb_avalon_arb: a read requester and a write requester, both obeying the
// Avalon rule of holding a request until accepted, share the memory model
// through avalon_arb. Checks: never read and write together, a request is
// accepted only on the granted side, the winner is held through
// waitrequest, both sides finish (no starvation), all written lines are in
// memory and read data come back in order.
module tb_avalon_arb;
  import dnn_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic rd_req, rd_wait, wr_req, wr_wait, avm_read, avm_write, waitreq, rdv;
  logic [31:0] rd_addr, wr_addr, avm_address;
  logic [511:0] wr_data, avm_writedata, rdata;
  logic [63:0] avm_byteenable;
  int checks = 0, failures = 0, nr = 0, nw = 0, nret = 0, both = 0;
  avalon_arb dut (.clk, .rst_n, .rd_req, .rd_addr, .rd_wait, .wr_req, .wr_addr, .wr_data, .wr_wait,
    .avm_address, .avm_read, .avm_write, .avm_writedata, .avm_byteenable, .avm_waitrequest(waitreq));
  avalon_mem_model #(.WAIT_PCT(30)) mem (.clk, .rst_n, .address(avm_address), .read(avm_read), .write(avm_write),
    .writedata(avm_writedata), .waitrequest(waitreq), .readdata(rdata), .readdatavalid(rdv));

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (avm_read && avm_write) begin failures++; $display("read and write together"); end
    if (rd_req && wr_req) both++;
    if (rdv) begin
      checks++;
      if (rdata != {16{32'(nret)}}) begin failures++; $display("read %0d data", nret); end
      nret++;
    end
  end

  // requesters: change a request only after it was accepted
  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin rd_req <= 0; wr_req <= 0; rd_addr <= 0; wr_addr <= 0; wr_data <= 0; end
    else begin
      if (rd_req && !rd_wait) begin nr++; rd_req <= 0; end
      else if (!rd_req && nr < 200) begin rd_req <= ($urandom_range(0, 3) != 0); rd_addr <= 32'(nr * 64); end
      if (wr_req && !wr_wait) begin nw++; wr_req <= 0; end
      else if (!wr_req && nw < 200) begin
        wr_req <= ($urandom_range(0, 3) != 0); wr_addr <= 32'((1000 + nw) * 64); wr_data <= {16{32'(nw + 5)}};
      end
      if (rd_req && rd_wait && !avm_read && !waitreq && !wr_req) begin failures++; $display("read starved"); end
    end

  initial begin
    for (int i = 0; i < 4096; i++) mem.mem[i] = {16{32'(i)}};
    repeat (2) @(posedge clk); rst_n = 1;
    wait (nr == 200 && nw == 200);
    repeat (20) @(posedge clk);
    checks += 3;
    if (nret != 200) begin failures++; $display("returned %0d", nret); end
    if (mem.n_writes != 200 || mem.n_reads != 200) begin failures++; $display("counts %0d %0d", mem.n_reads, mem.n_writes); end
    if (both == 0) begin failures++; $display("no contention seen"); end
    for (int j = 0; j < 200; j++) begin
      checks++;
      if (mem.mem[1000 + j] != {16{32'(j + 5)}}) begin failures++; $display("write %0d", j); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
