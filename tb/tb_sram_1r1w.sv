// tb_sram_1r1w: writes random data to random addresses of a 32 x 1028
// buffer (the ORAM shape, a depth that is not a power of two) and of a
// 512 x 128 buffer (the IRAM shape), keeps a shadow copy, and checks every
// read one cycle after the request, including a read of the address being
// written (old data) and a read with re low (data held).
module tb_sram_1r1w;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we1, re1; logic [10:0] wa1, ra1; logic [31:0] wd1, rd1;
  logic we2, re2; logic [6:0] wa2, ra2; logic [511:0] wd2, rd2;
  sram_1r1w #(.W(32), .DEPTH(1028)) m1 (.clk, .we(we1), .waddr(wa1), .wdata(wd1), .re(re1), .raddr(ra1), .rdata(rd1));
  sram_1r1w #(.W(512), .DEPTH(128)) m2 (.clk, .we(we2), .waddr(wa2), .wdata(wd2), .re(re2), .raddr(ra2), .rdata(rd2));

  logic [31:0] sh1 [1028];
  logic [511:0] sh2 [128];

  initial begin
    we1 = 0; re1 = 0; we2 = 0; re2 = 0; wa1 = 0; ra1 = 0; wd1 = 0; wa2 = 0; ra2 = 0; wd2 = 0;
    for (int i = 0; i < 1028; i++) begin
      @(negedge clk); we1 = 1; wa1 = 11'(i); wd1 = $urandom; sh1[i] = wd1;
    end
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); we1 = 0; we2 = 1; wa2 = 7'(i);
      for (int j = 0; j < 16; j++) wd2[j*32 +: 32] = $urandom;
      sh2[i] = wd2;
    end
    @(negedge clk); we2 = 0;
    for (int n = 0; n < 400; n++) begin
      logic [31:0] e1; logic [511:0] e2;
      @(negedge clk);
      ra1 = 11'($urandom_range(0, 1027)); re1 = 1;
      ra2 = 7'($urandom); re2 = 1;
      we1 = 1; wa1 = (n % 3 == 0) ? ra1 : 11'($urandom_range(0, 1027)); wd1 = $urandom;
      e1 = sh1[ra1]; e2 = sh2[ra2];
      @(negedge clk);
      sh1[wa1] = wd1; we1 = 0; re1 = 0; re2 = 0;
      checks += 2;
      if (rd1 != e1) begin failures++; $display("m1 addr %0d got %h exp %h", ra1, rd1, e1); end
      if (rd2 != e2) begin failures++; $display("m2 addr %0d mismatch", ra2); end
      ra1 = 11'($urandom_range(0, 1027));
      @(negedge clk);
      checks++;
      if (rd1 != e1) begin failures++; $display("m1 data not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
