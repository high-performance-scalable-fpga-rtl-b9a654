// tb_scale_unit: random and corner-case signed 15 x 16 bit products through
// scale_unit, checked against integer multiplication with a one-cycle
// latency.
module tb_scale_unit;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic signed [14:0] din;
  logic signed [15:0] alpha;
  logic signed [30:0] dout;
  int checks = 0, failures = 0;
  longint exp_v;
  scale_unit dut (.*);
  always #5 clk = ~clk;

  task automatic one(input logic signed [14:0] d, input logic signed [15:0] a);
    in_valid <= 1; din <= d; alpha <= a;
    @(posedge clk); in_valid <= 0;
    exp_v = longint'(d) * longint'(a);
    @(negedge clk);
    checks++;
    if (!out_valid || longint'(dout) != exp_v) begin
      failures++; $display("d=%0d a=%0d got %0d exp %0d v=%b", d, a, dout, exp_v, out_valid);
    end
    @(posedge clk);
  endtask

  initial begin
    in_valid = 0; din = 0; alpha = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    one(15'sh4000, 16'sh8000); one(15'sh3fff, 16'sh7fff); one(-15'sd1, 16'sd1);
    one(15'sh4000, 16'sh7fff); one(15'sd0, 16'sh1234);
    for (int i = 0; i < 200; i++) one(15'($urandom), 16'($urandom));
    @(negedge clk); checks++;
    if (out_valid) begin failures++; $display("valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
