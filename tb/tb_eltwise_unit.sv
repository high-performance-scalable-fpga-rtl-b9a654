// tb_eltwise_unit: random 8-bit vectors with random exponents (equal, a
// larger, b larger, differences above 7) through eltwise_unit, against the
// alignment rule: the operand with the smaller exponent is shifted right by
// the difference, the sum saturates, the result exponent is the larger.
module tb_eltwise_unit;
  logic [63:0][7:0] a, b, y;
  logic signed [7:0] ea, eb, ey;
  int checks = 0, failures = 0;
  eltwise_unit dut (.*);
  initial begin
    for (int r = 0; r < 500; r++) begin
      ea = 8'($urandom_range(0, 20)) - 8'sd10;
      eb = (r % 4 == 0) ? ea : 8'($urandom_range(0, 20)) - 8'sd10;
      for (int i = 0; i < 64; i++) begin a[i] = 8'($urandom); b[i] = 8'($urandom); end
      #1;
      checks++;
      if (ey != ((ea > eb) ? ea : eb)) begin failures++; $display("ey"); end
      for (int i = 0; i < 64; i++) begin
        automatic int xa = int'($signed(a[i])), xb = int'($signed(b[i])), s;
        automatic int d = int'(ea) - int'(eb);
        if (d > 0) xb = xb >>> ((d > 7) ? 7 : d);
        if (d < 0) xa = xa >>> ((-d > 7) ? 7 : -d);
        s = xa + xb;
        if (s > 127) s = 127; if (s < -128) s = -128;
        checks++;
        if (int'($signed(y[i])) != s) begin failures++; $display("a=%0d b=%0d ea=%0d eb=%0d got %0d exp %0d", $signed(a[i]), $signed(b[i]), ea, eb, $signed(y[i]), s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
