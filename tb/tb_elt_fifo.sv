// tb_elt_fifo: random push/pop traffic against a queue model on a 512 x 128
// FIFO, filling it completely, draining it to empty, and checking dout and
// count every cycle; then clear.
module tb_elt_fifo;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic clear, push, pop;
  logic [511:0] din, dout;
  logic [7:0] count;
  int checks = 0, failures = 0;
  logic [511:0] q[$];
  elt_fifo dut (.*);

  task automatic step(input bit pu, input bit po);
    push = pu && q.size() < 128; pop = po && q.size() > 0;
    din = {16{$urandom}};
    if (pop) begin
      checks++;
      if (dout != q[0]) begin failures++; $display("dout mismatch at size %0d", q.size()); end
    end
    @(posedge clk); #1;
    if (pop) void'(q.pop_front());
    if (push) q.push_back(din);
    checks++;
    if (count != 8'(q.size())) begin failures++; $display("count %0d exp %0d", count, q.size()); end
  endtask

  initial begin
    clear = 0; push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < 140; i++) step(1, 0);
    for (int i = 0; i < 20; i++) step(1, 1);
    for (int i = 0; i < 140; i++) step(0, 1);
    for (int i = 0; i < 2000; i++) step($urandom % 3 != 0, $urandom % 2);
    clear = 1; @(posedge clk); #1; clear = 0; q.delete();
    checks++; if (count != 0) begin failures++; $display("clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
