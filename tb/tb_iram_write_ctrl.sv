// tb_iram_write_ctrl: feeds lines with gaps, restarts with start, overruns
// the depth, and checks that line n lands at address n of every bank one
// cycle later, and that the overflow flag is raised past the depth.
module tb_iram_write_ctrl;
  localparam int NB = 4, D = 16;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start, in_valid, overflow;
  logic [511:0] in_data, wdata;
  logic [NB-1:0] we;
  logic [3:0] waddr;
  int checks = 0, failures = 0;
  iram_write_ctrl #(.N_BANKS(NB), .DEPTH(D)) dut (.*);

  logic [511:0] mem [NB][D];
  always @(posedge clk) for (int b = 0; b < NB; b++) if (we[b]) mem[b][waddr] <= wdata;

  task automatic load(input int n, input int seed);
    start = 1; @(posedge clk); #1; start = 0;
    for (int i = 0; i < n; i++) begin
      in_valid = 1; in_data = {16{32'(seed + i)}};
      @(posedge clk); #1;
      if (i % 3 == 0) begin in_valid = 0; @(posedge clk); #1; end
    end
    in_valid = 0; repeat (2) @(posedge clk); #1;
    for (int i = 0; i < n && i < D; i++)
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (mem[b][i] != {16{32'(seed + i)}}) begin failures++; $display("bank %0d addr %0d", b, i); end
      end
    checks++;
    if (overflow != (n > D)) begin failures++; $display("overflow %b for %0d lines", overflow, n); end
  endtask

  initial begin
    start = 0; in_valid = 0; in_data = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    load(10, 100);
    load(16, 500);
    load(5, 900);
    checks++;
    if (mem[0][7] != {16{32'(507)}}) begin failures++; $display("restart clobbered"); end
    load(20, 1300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
