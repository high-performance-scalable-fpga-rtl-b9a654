// tb_exp_unit: presets exponent registers from the host side, then runs a
// two-branch sequence like a ResNet module: conv layers chain their output
// exponent (act + wei + rs) into the next layer's activation exponent, and
// an element-wise layer takes the larger of the two branch exponents. All
// results are compared with a register-file model.
module tb_exp_unit;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic host_we, eltwise, commit;
  logic [3:0] host_idx, act_idx, elt_idx, out_idx;
  logic signed [7:0] host_wdata, exp_wei, e_conv, e_elt, e_out;
  logic [5:0] rs;
  int checks = 0, failures = 0;
  int model [16];
  exp_unit dut (.*);

  task automatic layer(input int act_i, input int ei, input int oi, input int wei, input int r, input bit elt);
    int ec, eo;
    act_idx = 4'(act_i); elt_idx = 4'(ei); out_idx = 4'(oi); exp_wei = 8'(wei); rs = 6'(r); eltwise = elt;
    ec = 8'(model[act_i] + wei + r); ec = int'($signed(8'(ec)));
    eo = (elt && model[ei] > ec) ? model[ei] : ec;
    #1;
    checks += 3;
    if (int'(e_conv) != ec) begin failures++; $display("e_conv %0d exp %0d", e_conv, ec); end
    if (int'(e_elt) != model[ei]) begin failures++; $display("e_elt"); end
    if (int'(e_out) != eo) begin failures++; $display("e_out %0d exp %0d", e_out, eo); end
    commit = 1; @(posedge clk); #1; commit = 0;
    model[oi] = eo;
  endtask

  initial begin
    host_we = 0; host_idx = 0; host_wdata = 0; eltwise = 0; commit = 0;
    act_idx = 0; elt_idx = 0; out_idx = 0; exp_wei = 0; rs = 0;
    for (int i = 0; i < 16; i++) model[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    host_we = 1; host_idx = 0; host_wdata = -8'sd7; model[0] = -7; @(posedge clk); #1;
    host_idx = 3; host_wdata = 8'sd2; model[3] = 2; @(posedge clk); #1; host_we = 0;
    for (int r = 0; r < 50; r++) begin
      layer(0, 0, 1, -int'($urandom_range(0, 4)), $urandom_range(0, 12), 0);   // right branch conv 1
      layer(1, 0, 2, -int'($urandom_range(0, 4)), $urandom_range(0, 12), 0);   // right branch conv 2
      layer(2, 0, 0, 0, 0, 1);                                                  // element-wise with left branch
      if (r % 10 == 0) layer(3, 1, 4, -3, 5, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
