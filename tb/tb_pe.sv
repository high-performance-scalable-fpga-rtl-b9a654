// tb_pe: a PE with an ORAM model. Streams output pixels of K*K operand sets
// (K = 1 and 3), first with bias (use_partial = 0), then a second pass over
// the same pixels that adds onto the stored partial sums (use_partial = 1).
// Every ORAM write is checked against sum_k(dot64_k * alpha_k) + bias (+
// previous partial sum) computed in the testbench, and the write must come
// at the 9th clock edge counting the one that samples the last operand set
// of its pixel (the testbench counter lags that edge by one).
module tb_pe;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_first, in_last, use_partial;
  logic [10:0] in_oaddr;
  logic [N-1:0][7:0] act;
  logic [N-1:0][1:0] wt;
  logic signed [15:0] alpha;
  logic signed [31:0] bias, oram_q;
  logic oram_rd_en, oram_we;
  logic [10:0] oram_raddr, oram_waddr;
  logic signed [31:0] oram_wdata;
  int checks = 0, failures = 0, cyc = 0, writes = 0;

  pe #(.N(N)) dut (.*);

  int oram [2048];
  int expv [2048];
  int tlast [2048];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (oram_rd_en) oram_q <= oram[oram_raddr];
    if (oram_we) begin
      oram[oram_waddr] = oram_wdata;
      writes++;
      checks += 2;
      if (oram_wdata != expv[oram_waddr]) begin
        failures++; $display("addr %0d got %0d exp %0d", oram_waddr, oram_wdata, expv[oram_waddr]);
      end
      if (cyc - tlast[oram_waddr] != 8) begin
        failures++; $display("latency %0d", cyc - tlast[oram_waddr]);
      end
    end
  end

  task automatic pass(input int k, input int npix, input bit partial);
    use_partial = partial;
    for (int p = 0; p < npix; p++) begin
      int acc = partial ? expv[p] : int'(bias);
      for (int j = 0; j < k*k; j++) begin
        int d = 0;
        for (int i = 0; i < N; i++) begin
          act[i] = 8'($urandom); wt[i] = 2'($urandom);
          if (wt[i] == 2'b01) d += int'(signed'(act[i]));
          else if (wt[i] == 2'b11) d -= int'(signed'(act[i]));
        end
        alpha = 16'($urandom);
        acc += d * int'(alpha);
        in_valid = 1; in_first = (j == 0); in_last = (j == k*k-1); in_oaddr = 11'(p);
        if (j == k*k-1) begin expv[p] = acc; tlast[p] = cyc; end
        @(posedge clk); #1;
      end
    end
    in_valid = 0;
    repeat (12) @(posedge clk); #1;
  endtask

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_oaddr = 0; act = '0; wt = '0; alpha = 0;
    bias = 32'sd1234; use_partial = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    pass(3, 10, 0);
    pass(3, 10, 1);
    bias = -32'sd777;
    pass(1, 20, 0);
    pass(1, 20, 1);
    checks++;
    if (writes != 60) begin failures++; $display("writes %0d", writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
