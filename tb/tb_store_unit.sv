// tb_store_unit: pushes 50 lines (respecting free) into the store unit in
// front of the Avalon memory model with random waitrequest, then a second
// batch at a new base. Checks that line n lands at base + 64n, that idle
// and free are consistent, and that back-pressure happened.
module tb_store_unit;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start, push, idle, wr_req, wr_wait, rv;
  logic [31:0] base, wr_addr;
  logic [511:0] data, wr_data, rd;
  logic [2:0] free;
  int checks = 0, failures = 0;
  store_unit #(.DEPTH(4)) dut (.*);
  avalon_mem_model #(.WAIT_PCT(40)) mem (.clk, .rst_n, .address(wr_addr), .read(1'b0), .write(wr_req),
    .writedata(wr_data), .waitrequest(wr_wait), .readdata(rd), .readdatavalid(rv));

  task automatic batch(input int bl, input int n);
    int i = 0;
    @(negedge clk); start = 1; base = 32'(bl * 64); @(negedge clk); start = 0;
    while (i < n) begin
      push = (free != 0) && ($urandom_range(0, 3) != 0);
      data = {16{32'(bl + i)}};
      checks++;
      if (free > 4) begin failures++; $display("free %0d", free); end
      @(negedge clk);
      if (push) i++;
    end
    push = 0;
    repeat (60) @(negedge clk);
    checks++; if (!idle) begin failures++; $display("not idle"); end
    for (int j = 0; j < n; j++) begin
      checks++;
      if (mem.mem[bl + j] != {16{32'(bl + j)}}) begin failures++; $display("line %0d", j); end
    end
  endtask

  initial begin
    start = 0; push = 0; base = 0; data = '0;
    for (int i = 0; i < 4096; i++) mem.mem[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    batch(100, 50);
    batch(1000, 17);
    checks += 2;
    if (mem.n_wait == 0) begin failures++; $display("no back-pressure seen"); end
    if (mem.n_writes != 67) begin failures++; $display("writes %0d", mem.n_writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
