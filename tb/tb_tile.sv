// tb_tile: one tile with 4 PEs. Fills BSRAM, SSRAM and BBSRAM through the
// write ports, then issues compute beats like the controller (9 kernel
// positions per output group, one PE masked off in the last group), with
// each PE's activations supplied one cycle after its beat, as the IRAM read
// does. A second pass with use_partial adds onto the first. The ORAMs are
// then read through the drain port and compared with a reference computed
// in the testbench.
module tb_tile;
  localparam int NPE = 4, N = 64, K = 3, GROUPS = 5;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [NPE-1:0] b_valid;
  logic b_first, b_last, use_partial, bs_we, ss_we, bb_we, drain_en;
  logic [10:0] b_oaddr, drain_addr;
  logic [6:0] b_waddr, bias_addr, bs_waddr, ss_waddr, bb_waddr;
  logic [NPE-1:0][N-1:0][7:0] act;
  logic [127:0] bs_wdata; logic [15:0] ss_wdata; logic [31:0] bb_wdata, drain_q;
  logic [1:0] drain_pe;
  int checks = 0, failures = 0;
  tile #(.N_PE(NPE), .N(N)) dut (.*);

  logic [127:0] wmem [K*K]; logic signed [15:0] amem [K*K];
  int expv [NPE][GROUPS];
  bit  vld  [NPE][GROUPS];

  function automatic int dotp(input logic [N-1:0][7:0] a, input logic [127:0] w);
    int s = 0;
    for (int i = 0; i < N; i++)
      if (w[2*i +: 2] == 2'b01) s += int'(signed'(a[i]));
      else if (w[2*i +: 2] == 2'b11) s -= int'(signed'(a[i]));
    return s;
  endfunction

  task automatic pass(input bit partial, input int bias);
    logic [NPE-1:0][N-1:0][7:0] a_next;
    use_partial = partial;
    for (int g = 0; g < GROUPS; g++)
      for (int j = 0; j < K*K; j++) begin
        @(negedge clk);
        for (int k = 0; k < NPE; k++) begin
          b_valid[k] = !(g == GROUPS-1 && k == NPE-1);
          for (int i = 0; i < N; i++) a_next[k][i] = 8'($urandom);
          if (b_valid[k]) begin
            if (j == 0) expv[k][g] = partial ? expv[k][g] : bias;
            expv[k][g] += dotp(a_next[k], wmem[j]) * int'(amem[j]);
            vld[k][g] = 1;
          end
        end
        b_first = (j == 0); b_last = (j == K*K-1); b_oaddr = 11'(g); b_waddr = 7'(j);
        @(negedge clk);
        // activations arrive one cycle after the beat
        act = a_next;
        b_valid = '0;
      end
    @(negedge clk); b_valid = '0;
    repeat (14) @(negedge clk);
  endtask

  initial begin
    b_valid = 0; b_first = 0; b_last = 0; use_partial = 0; bs_we = 0; ss_we = 0; bb_we = 0; drain_en = 0;
    b_oaddr = 0; drain_addr = 0; b_waddr = 0; bias_addr = 7'd3; bs_waddr = 0; ss_waddr = 0; bb_waddr = 0;
    act = '0; bs_wdata = 0; ss_wdata = 0; bb_wdata = 0; drain_pe = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int j = 0; j < K*K; j++) begin
      @(negedge clk);
      wmem[j] = {$urandom, $urandom, $urandom, $urandom}; amem[j] = 16'($urandom);
      bs_we = 1; bs_waddr = 7'(j); bs_wdata = wmem[j];
      ss_we = 1; ss_waddr = 7'(j); ss_wdata = amem[j];
    end
    @(negedge clk); bs_we = 0; ss_we = 0;
    bb_we = 1; bb_waddr = 7'd3; bb_wdata = 32'hFFFF_F000; @(negedge clk); bb_we = 0;
    @(negedge clk);
    pass(0, int'(32'hFFFF_F000));
    pass(1, 0);
    for (int g = 0; g < GROUPS; g++)
      for (int k = 0; k < NPE; k++) begin
        if (!vld[k][g]) continue;
        @(negedge clk); drain_en = 1; drain_pe = 2'(k); drain_addr = 11'(g);
        @(negedge clk); drain_en = 0;
        checks++;
        if (int'(drain_q) != expv[k][g]) begin failures++; $display("pe %0d g %0d got %0d exp %0d", k, g, $signed(drain_q), expv[k][g]); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
