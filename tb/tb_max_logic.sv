// tb_max_logic: random 64-lane vectors, including -2^31 and lanes switched
// off, folded into max_logic; the registered maximum must equal the largest
// magnitude of the enabled lanes seen since clear.
module tb_max_logic;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic clear, in_valid;
  logic [63:0] lane_en;
  logic [63:0][31:0] din;
  logic [31:0] max_abs;
  int checks = 0, failures = 0;
  longint m;
  max_logic dut (.*);

  initial begin
    clear = 0; in_valid = 0; lane_en = '1; din = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int r = 0; r < 20; r++) begin
      clear = 1; @(posedge clk); #1; clear = 0; m = 0;
      lane_en = (r % 2) ? {$urandom, $urandom} : '1;
      for (int c = 0; c < 30; c++) begin
        automatic int sh = $urandom_range(0, 31);
        in_valid = (c % 5 != 4);
        for (int i = 0; i < 64; i++) begin
          din[i] = 32'($signed($urandom) >>> sh);
          if (r == 5 && c == 7 && i == 9) din[i] = 32'h8000_0000;
          if (lane_en[i] && in_valid) begin
            automatic longint a = longint'($signed(din[i]));
            if (a < 0) a = -a;
            if (a > m) m = a;
          end
        end
        if (!in_valid) begin
          // an idle cycle must not fold its data in
          @(posedge clk); #1;
          continue;
        end
        @(posedge clk); #1;
        checks++;
        if (longint'(max_abs) != m) begin failures++; $display("r%0d c%0d got %0h exp %0h", r, c, max_abs, m); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
