// tb_config_regs: writes random words into several layer entries, reads
// them back through the host port, checks the decoded fields of cfg for
// each selected layer against the documented word map, and checks the
// NUM_LAYERS register, the start pulse, the status word and the exponent
// preset writes.
module tb_config_regs;
  import dnn_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic host_we, busy, start, exp_we;
  logic [10:0] host_addr;
  logic [31:0] host_wdata, host_rdata;
  logic [5:0] layer_idx;
  layer_cfg_t cfg;
  logic [6:0] num_layers;
  logic [3:0] exp_idx;
  logic [7:0] exp_wdata;
  int checks = 0, failures = 0, starts = 0, expw = 0;
  logic [31:0] shadow [64][16];
  config_regs dut (.*);

  always @(posedge clk) begin
    if (rst_n && start) starts++;
    if (rst_n && exp_we) begin
      expw++;
      checks++;
      if (exp_idx != 4'd5 || exp_wdata != 8'hF9) begin failures++; $display("exp write"); end
    end
  end

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); host_we = 1; host_addr = 11'(a); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask

  initial begin
    host_we = 0; host_addr = 0; host_wdata = 0; busy = 0; layer_idx = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int l = 0; l < 64; l += 9)
      for (int w = 0; w < 16; w++) begin
        shadow[l][w] = $urandom; wr(l*16 + w, shadow[l][w]);
      end
    for (int l = 0; l < 64; l += 9) begin
      layer_idx = 6'(l);
      for (int w = 0; w < 16; w++) begin
        host_addr = 11'(l*16 + w); #1;
        checks++; if (host_rdata != shadow[l][w]) begin failures++; $display("readback"); end
      end
      #1;
      checks += 12;
      if (cfg.in_w != shadow[l][0][7:0] || cfg.out_h != shadow[l][0][31:24]) begin failures++; $display("w0"); end
      if (cfg.k != shadow[l][1][3:0] || cfg.stride != shadow[l][1][7:4]) begin failures++; $display("k/stride"); end
      if (cfg.num_tiles != shadow[l][1][14:8] || cfg.first_pass != shadow[l][1][16]) begin failures++; $display("tiles"); end
      if (cfg.last_pass != shadow[l][1][17] || cfg.eltwise != shadow[l][1][18]) begin failures++; $display("flags"); end
      if (cfg.bias_addr != shadow[l][1][30:24]) begin failures++; $display("bias_addr"); end
      if (cfg.exp_act_idx != shadow[l][2][3:0] || cfg.exp_out_idx != shadow[l][2][11:8]) begin failures++; $display("exp idx"); end
      if (cfg.exp_wei != shadow[l][2][23:16] || cfg.exp_elt_idx != shadow[l][2][7:4]) begin failures++; $display("exp wei"); end
      if (cfg.ifm_base != shadow[l][3] || cfg.ifm_lines != shadow[l][4][15:0]) begin failures++; $display("ifm"); end
      if (cfg.wei_base != shadow[l][5] || cfg.wei_lines != shadow[l][6][15:0]) begin failures++; $display("wei"); end
      if (cfg.scl_base != shadow[l][7] || cfg.scl_lines != shadow[l][8][15:0]) begin failures++; $display("scl"); end
      if (cfg.bias_base != shadow[l][9] || cfg.bias_lines != shadow[l][10][15:0]) begin failures++; $display("bias"); end
      if (cfg.elt_base != shadow[l][11] || cfg.ofm_base != shadow[l][12]) begin failures++; $display("elt/ofm"); end
    end
    wr(1024, 32'd17);
    checks++; if (num_layers != 7'd17) begin failures++; $display("num_layers"); end
    host_addr = 11'd1024; #1;
    checks++; if (host_rdata != 32'd17) begin failures++; $display("num_layers read"); end
    wr(1025, 32'd1);
    @(negedge clk);
    checks++; if (starts != 1) begin failures++; $display("start pulses %0d", starts); end
    busy = 1; layer_idx = 6'd9; host_addr = 11'd1026; #1;
    checks++; if (host_rdata != {1'b1, 31'd9}) begin failures++; $display("status"); end
    wr(1024 + 32 + 5, 32'hF9);
    @(negedge clk);
    checks++; if (expw != 1) begin failures++; $display("exp writes %0d", expw); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
