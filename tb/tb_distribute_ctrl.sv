// tb_distribute_ctrl: the three distribute-logic configurations (weights:
// 128-bit words, 4 blocks; scaling: 16-bit words, 2 blocks; bias: 32-bit
// words, 1 block) for 64 tiles. Lines of a known layout are fed in; each
// tile's buffer model must hold, at every address, the word the layout
// assigns it: line l, word w -> tile (l mod G)*WPL + w, address l div G.
module tb_distribute_ctrl;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, in_valid;
  logic [511:0] in_data;

  logic [63:0] we_b, we_s, we_a;
  logic [3:0][6:0] wa_b; logic [1:0][6:0] wa_s; logic [0:0][6:0] wa_a;
  logic [63:0][127:0] wd_b; logic [63:0][15:0] wd_s; logic [63:0][31:0] wd_a;

  distribute_ctrl #(.N_TILES(64), .WORD_W(128), .N_DIST(4)) ub (.clk, .rst_n, .start, .in_valid, .in_data, .we(we_b), .waddr(wa_b), .wdata(wd_b));
  distribute_ctrl #(.N_TILES(64), .WORD_W(16),  .N_DIST(2)) us (.clk, .rst_n, .start, .in_valid, .in_data, .we(we_s), .waddr(wa_s), .wdata(wd_s));
  distribute_ctrl #(.N_TILES(64), .WORD_W(32),  .N_DIST(1)) ua (.clk, .rst_n, .start, .in_valid, .in_data, .we(we_a), .waddr(wa_a), .wdata(wd_a));

  logic [127:0] mb [64][128]; logic [15:0] ms [64][128]; logic [31:0] ma [64][128];
  always @(posedge clk)
    for (int t = 0; t < 64; t++) begin
      if (we_b[t]) mb[t][wa_b[t/16]] <= wd_b[t];
      if (we_s[t]) ms[t][wa_s[t/32]] <= wd_s[t];
      if (we_a[t]) ma[t][wa_a[0]] <= wd_a[t];
    end

  // value of the 16-bit chunk c of line l
  function automatic logic [15:0] chunk(input int l, input int c);
    return 16'((l * 37 + c * 11) ^ 16'h5a5a);
  endfunction

  initial begin
    start = 0; in_valid = 0; in_data = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    start = 1; @(posedge clk); #1; start = 0;
    for (int l = 0; l < 64; l++) begin
      for (int c = 0; c < 32; c++) in_data[c*16 +: 16] = chunk(l, c);
      in_valid = 1; @(posedge clk); #1;
      if (l % 7 == 3) begin in_valid = 0; @(posedge clk); #1; end
    end
    in_valid = 0; repeat (3) @(posedge clk);
    // weights: G = 16 lines per address, WPL = 4 (8 chunks per word)
    for (int l = 0; l < 64; l++)
      for (int w = 0; w < 4; w++) begin
        automatic int t = (l % 16) * 4 + w; logic [127:0] e;
        for (int c = 0; c < 8; c++) e[c*16 +: 16] = chunk(l, w*8 + c);
        checks++; if (mb[t][l/16] != e) begin failures++; $display("bsram t%0d a%0d", t, l/16); end
      end
    // scaling: G = 2, WPL = 32
    for (int l = 0; l < 64; l++)
      for (int w = 0; w < 32; w++) begin
        automatic int t = (l % 2) * 32 + w;
        checks++; if (ms[t][l/2] != chunk(l, w)) begin failures++; $display("ssram t%0d a%0d", t, l/2); end
      end
    // bias: G = 4, WPL = 16
    for (int l = 0; l < 64; l++)
      for (int w = 0; w < 16; w++) begin
        automatic int t = (l % 4) * 16 + w;
        checks++; if (ma[t][l/4] != {chunk(l, 2*w+1), chunk(l, 2*w)}) begin failures++; $display("bbsram t%0d a%0d", t, l/4); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
