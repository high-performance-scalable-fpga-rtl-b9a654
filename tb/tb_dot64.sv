// tb_dot64: streams random activation/weight sets into dot64 one per cycle
// (plus idle gaps) and checks every sum against a behavioural dot product,
// the 7-cycle latency (sampled at edge n, on out_valid after edge n+7, seen
// by the monitor at edge n+8), full throughput, and the extreme values +-8192
// (all activations -128 times all weights -1 / +1).
module tb_dot64;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [N-1:0][7:0] act;
  logic [N-1:0][1:0] wt;
  logic out_valid;
  logic signed [14:0] sum;
  int checks = 0, failures = 0;
  int exp_q[$];
  int tstamp_q[$];
  int cyc = 0;

  dot64 #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int ref_dot(input logic [N-1:0][7:0] a, input logic [N-1:0][1:0] w);
    int s = 0;
    for (int i = 0; i < N; i++)
      if (w[i] == 2'b01) s += int'(signed'(a[i]));
      else if (w[i] == 2'b11) s -= int'(signed'(a[i]));
    return s;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    int e, t;
    e = exp_q.pop_front(); t = tstamp_q.pop_front();
    checks++;
    if (int'(sum) != e) begin failures++; $display("mismatch sum=%0d exp=%0d", sum, e); end
    checks++;
    if (cyc - t != 8) begin failures++; $display("latency %0d", cyc - t); end
  end

  task automatic drive(input logic [N-1:0][7:0] a, input logic [N-1:0][1:0] w);
    in_valid <= 1; act <= a; wt <= w;
    exp_q.push_back(ref_dot(a, w)); tstamp_q.push_back(cyc);
    @(posedge clk);
  endtask

  initial begin
    in_valid = 0; act = '0; wt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    begin
      logic [N-1:0][7:0] a; logic [N-1:0][1:0] w;
      for (int i = 0; i < N; i++) a[i] = 8'h80;
      for (int i = 0; i < N; i++) w[i] = 2'b11;
      drive(a, w);
      for (int i = 0; i < N; i++) w[i] = 2'b01;
      drive(a, w);
      for (int v = 0; v < 300; v++) begin
        for (int i = 0; i < N; i++) begin a[i] = 8'($urandom); w[i] = 2'($urandom); end
        drive(a, w);
        if (v % 50 == 49) begin in_valid <= 0; repeat (3) @(posedge clk); end
      end
    end
    in_valid <= 0;
    repeat (12) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
