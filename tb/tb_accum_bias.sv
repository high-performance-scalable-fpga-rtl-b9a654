// tb_accum_bias: drives runs of products framed by first/last into
// accum_bias, some starting from the bias, some from an ORAM partial sum,
// and checks the written value, address and write strobe against a sum
// computed in the testbench. Includes back-to-back single-product runs
// (1x1 kernels) and idle cycles inside a run.
module tb_accum_bias;
  logic clk = 0, rst_n = 0;
  logic p_valid, p_first, p_last, use_partial;
  logic [10:0] p_oaddr;
  logic signed [30:0] prod;
  logic signed [31:0] bias, oram_q;
  logic oram_we, acc_valid;
  logic [10:0] oram_waddr;
  logic signed [31:0] oram_wdata, acc;
  int checks = 0, failures = 0;
  accum_bias dut (.*);
  always #5 clk = ~clk;

  task automatic run(input int len, input bit partial, input int gap);
    int expv;
    logic [10:0] a;
    a = 11'($urandom);
    use_partial = partial;
    bias   = 32'($urandom_range(0, 20000)) - 10000;
    oram_q = 32'($urandom);
    expv = partial ? int'(oram_q) : int'(bias);
    for (int i = 0; i < len; i++) begin
      p_valid = 1; p_first = (i == 0); p_last = (i == len - 1); p_oaddr = a;
      prod = 31'($urandom);
      expv += int'(prod);
      #1;
      if (i == len - 1) begin
        checks++;
        if (!oram_we || oram_waddr != a || oram_wdata != expv || !acc_valid) begin
          failures++; $display("len %0d: we=%b addr=%0d data=%0d exp=%0d", len, oram_we, oram_waddr, oram_wdata, expv);
        end
      end else begin
        checks++;
        if (oram_we) begin failures++; $display("early write"); end
      end
      @(posedge clk); #1;
      p_valid = 0; p_first = 0; p_last = 0;
      // bias/ORAM data change after the first product must not matter
      bias = 32'($urandom); oram_q = 32'($urandom);
      repeat (gap) @(posedge clk);
      #1;
    end
  endtask

  initial begin
    p_valid = 0; p_first = 0; p_last = 0; use_partial = 0; p_oaddr = 0; prod = 0; bias = 0; oram_q = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int r = 0; r < 60; r++) run($urandom_range(1, 9), r % 2, (r % 5 == 0) ? 1 : 0);
    for (int r = 0; r < 20; r++) run(1, r % 2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
