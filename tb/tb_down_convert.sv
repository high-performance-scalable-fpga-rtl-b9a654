// tb_down_convert: vectors of 32-bit values of varying magnitude through
// down_convert. The reference computes rs = max(0, 25 - lzc(max|x|)), the
// arithmetic shift, +1 when both bits below the kept bits are 1, and
// saturation, using plain integer arithmetic.
module tb_down_convert;
  logic [31:0] max_abs;
  logic [63:0][31:0] din;
  logic [5:0] rs;
  logic [63:0][7:0] dout;
  int checks = 0, failures = 0;
  down_convert dut (.*);

  function automatic int ref_lzc(input longint v);
    for (int b = 31; b >= 0; b--) if (v[b]) return 31 - b;
    return 32;
  endfunction

  initial begin
    for (int r = 0; r < 400; r++) begin
      automatic longint m = 0; automatic int ers;
      automatic int sh = $urandom_range(0, 31);
      for (int i = 0; i < 64; i++) begin
        longint a;
        din[i] = 32'($signed($urandom) >>> sh);
        if (r % 50 == 0 && i == 0) din[i] = 32'h8000_0000;
        if (r % 50 == 1 && i == 0) din[i] = 32'd127;
        a = longint'($signed(din[i])); if (a < 0) a = -a;
        if (a > m) m = a;
      end
      max_abs = 32'(m);
      ers = 25 - ref_lzc(m); if (ers < 0) ers = 0;
      #1;
      checks++;
      if (int'(rs) != ers) begin failures++; $display("rs %0d exp %0d", rs, ers); end
      for (int i = 0; i < 64; i++) begin
        automatic longint x = longint'($signed(din[i]));
        automatic longint y = x >>> ers;
        automatic bit r1 = (ers >= 1) ? x[ers-1] : 0;
        automatic bit r2 = (ers >= 2) ? x[ers-2] : 0;
        if (r1 && r2) y++;
        if (y > 127) y = 127;
        if (y < -128) y = -128;
        checks++;
        if (longint'($signed(dout[i])) != y) begin
          failures++; $display("x=%0d rs=%0d got %0d exp %0d", x, ers, $signed(dout[i]), y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
