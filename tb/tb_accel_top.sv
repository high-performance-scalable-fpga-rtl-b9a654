// tb_accel_top: end-to-end test of the accelerator at its default size
// (64 tiles x 4 PEs), against the Avalon memory model and a behavioural
// model of the whole computation.
//
// The host writes a three-entry program through the register port:
//   A  : 3x3 convolution, stride 1, 6x6 input -> 4x4 output, 64 IFMs,
//        bias, down-conversion (left branch of a ResNet module);
//   B1 : 1x1 convolution, stride 2, 8x8 -> 4x4, input channels 0..63,
//        first pass (bias), result kept in ORAM;
//   B2 : same output, input channels 64..127, adds onto the ORAM partial
//        sums, then down-conversion and element-wise addition with the
//        output of A (right branch merging with the left one);
//   C  : 1x1 convolution on 3 pixels (one PE slot of the group idle)
//        using only 5 of the tiles.
// Input data, weights, scaling values and biases are random. The model
// computes every 32-bit accumulator, the layer maximum, the shift, the
// rounding, the saturation, the element-wise alignment and the exponent
// chain. All output lines in memory and the exponent registers are
// compared. Each mechanism must have occurred at least once: Avalon
// waitrequest stalls, several outstanding reads, store back-pressure,
// drain stalls, ORAM partial-sum feedback, bias add, rounding increments,
// saturation, element-wise shift, masked PE slots, masked tiles, and more
// than one layer entry.
module tb_accel_top;
  import dnn_pkg::*;
  localparam int NT = 64, NPE = 4, N = 64;

  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic host_we; logic [10:0] host_addr; logic [31:0] host_wdata, host_rdata;
  logic [31:0] avm_address; logic avm_read, avm_write, avm_waitrequest, avm_readdatavalid;
  logic [511:0] avm_writedata, avm_readdata; logic [63:0] avm_byteenable;
  logic busy, done; logic [5:0] layer_idx;
  int checks = 0, failures = 0;

  accel_top dut (.*);
  avalon_mem_model #(.DEPTH(4096), .WAIT_PCT(15), .MIN_LAT(4)) mem (
    .clk, .rst_n, .address(avm_address), .read(avm_read), .write(avm_write),
    .writedata(avm_writedata), .waitrequest(avm_waitrequest),
    .readdata(avm_readdata), .readdatavalid(avm_readdatavalid));

  // ------------ memory map (line indices) ------------
  localparam int GW = (NT + 3) / 4, GS = (NT + 31) / 32, GB = (NT + 15) / 16;
  localparam int IFM_A = 0, WEI_A = 100, SCL_A = 400, BIAS_A = 500, OFM_A = 600;
  localparam int IFM_B1 = 700, IFM_B2 = 800, WEI_B1 = 900, WEI_B2 = 950;
  localparam int SCL_B1 = 1000, SCL_B2 = 1010, BIAS_B = 1020, OFM_B = 1100;
  localparam int IFM_C = 1200, WEI_C = 1210, SCL_C = 1230, BIAS_C = 1240, OFM_C = 1300;

  // ------------ model state ------------
  typedef struct {
    int iw, ih, ow, oh, k, s, ntiles;
  } geo_t;
  logic signed [7:0] w_t [4][NT][9][N];   // ternary -1/0/1: A, B1, B2, C
  logic signed [15:0] alpha_m [4][NT][9];
  int bias_m [3][NT];
  int acc_a [16][NT], acc_b [16][NT], acc_c [16][NT];
  logic signed [7:0] out_a [16][NT], out_b [16][NT], out_c [16][NT];
  int n_round = 0, n_sat = 0, n_eshift = 0;

  function automatic logic [1:0] tcode(input int v);
    return (v > 0) ? 2'b01 : (v < 0) ? 2'b11 : (($urandom % 2) ? 2'b10 : 2'b00);
  endfunction

  // pixel (y, x) channel c of an IFM region at line base
  function automatic int px(input int base, input int iw, input int y, input int x, input int c);
    return int'($signed(mem.mem[base + y*iw + x][c*8 +: 8]));
  endfunction

  task automatic fill_ifm(input int base, input int lines);
    for (int l = 0; l < lines; l++)
      for (int c = 0; c < 16; c++) mem.mem[base + l][c*32 +: 32] = $urandom;
  endtask

  // weights set ws, kernel positions kk, into lines at base (GW lines per position)
  task automatic fill_w(input int ws, input int kk, input int base);
    for (int j = 0; j < kk; j++)
      for (int t = 0; t < NT; t++)
        for (int i = 0; i < N; i++) begin
          int v = int'($urandom_range(0, 2)) - 1;
          w_t[ws][t][j][i] = 8'(v);
          mem.mem[base + j*GW + t/4][(t%4)*128 + 2*i +: 2] = tcode(v);
        end
  endtask

  task automatic fill_a(input int as, input int kk, input int base, input int amax);
    for (int j = 0; j < kk; j++)
      for (int t = 0; t < NT; t++) begin
        alpha_m[as][t][j] = 16'(int'($urandom_range(0, 2*amax)) - amax);
        mem.mem[base + j*GS + t/32][(t%32)*16 +: 16] = alpha_m[as][t][j];
      end
  endtask

  task automatic fill_b(input int bs, input int base, input int bmax);
    for (int t = 0; t < NT; t++) begin
      bias_m[bs][t] = int'($urandom_range(0, 2*bmax)) - bmax;
      mem.mem[base + t/16][(t%16)*32 +: 32] = 32'(bias_m[bs][t]);
    end
  endtask

  function automatic int lzc(input longint v);
    for (int b = 31; b >= 0; b--) if (v[b]) return 31 - b;
    return 32;
  endfunction

  // down-convert a whole layer (npix pixels, nt tiles); returns rs
  function automatic int down(input int npix, input int nt, ref int acc [16][NT],
                              ref logic signed [7:0] o [16][NT]);
    longint m = 0; int rs;
    for (int p = 0; p < npix; p++) for (int t = 0; t < nt; t++) begin
      longint a = longint'(acc[p][t]); if (a < 0) a = -a; if (a > m) m = a;
    end
    rs = 25 - lzc(m); if (rs < 0) rs = 0;
    for (int p = 0; p < npix; p++) for (int t = 0; t < NT; t++) begin
      longint x = longint'(acc[p][t]);
      longint y = x >>> rs;
      if (rs >= 2 && x[rs-1] && x[rs-2]) begin y++; n_round++; end
      if (y > 127) begin y = 127; n_sat++; end
      if (y < -128) begin y = -128; n_sat++; end
      o[p][t] = (t < nt) ? 8'(y) : 8'(0);
    end
    return rs;
  endfunction

  // ------------ host programming ------------
  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); host_we = 1; host_addr = 11'(a); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask

  task automatic entry(input int idx, input geo_t g, input bit first, input bit last, input bit elt,
                       input int act_i, input int ei, input int oi, input int wei,
                       input int ifm, input int ifm_n, input int wb, input int wn,
                       input int sb, input int sn, input int bb, input int bn,
                       input int eb, input int ob);
    wr(idx*16 + 0, {8'(g.oh), 8'(g.ow), 8'(g.ih), 8'(g.iw)});
    wr(idx*16 + 1, {1'b0, 7'd0, 5'd0, elt, last, first, 1'b0, 7'(g.ntiles), 4'(g.s), 4'(g.k)});
    wr(idx*16 + 2, {8'd0, 8'(wei), 4'd0, 4'(oi), 4'(ei), 4'(act_i)});
    wr(idx*16 + 3, 32'(ifm*64));  wr(idx*16 + 4, 32'(ifm_n));
    wr(idx*16 + 5, 32'(wb*64));   wr(idx*16 + 6, 32'(wn));
    wr(idx*16 + 7, 32'(sb*64));   wr(idx*16 + 8, 32'(sn));
    wr(idx*16 + 9, 32'(bb*64));   wr(idx*16 + 10, 32'(bn));
    wr(idx*16 + 11, 32'(eb*64));  wr(idx*16 + 12, 32'(ob*64));
  endtask

  // ------------ mechanism counters ------------
  int c_partial = 0, c_drain_stall = 0, c_elt_pop = 0, c_masked = 0, c_st_full = 0, c_maxout = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.use_partial && |dut.b_valid) c_partial++;
    if (dut.dr_stall) c_drain_stall++;
    if (dut.elt_pop) c_elt_pop++;
    if (dut.u_ctrl.st == 4'd4 && dut.b_valid != '1) c_masked++;
    if (dut.st_free == 0) c_st_full++;
    if (int'(dut.u_load.outstanding) >= 2) c_maxout++;
  end

  geo_t ga, gb, gc;
  int rs_a, rs_b, rs_c, e_a, e_b_conv, e_b, e_c;

  initial begin
    host_we = 0; host_addr = 0; host_wdata = 0;
    for (int i = 0; i < 4096; i++) mem.mem[i] = '0;
    ga = '{iw: 6, ih: 6, ow: 4, oh: 4, k: 3, s: 1, ntiles: NT};
    gb = '{iw: 8, ih: 8, ow: 4, oh: 4, k: 1, s: 2, ntiles: NT};
    gc = '{iw: 3, ih: 1, ow: 3, oh: 1, k: 1, s: 1, ntiles: 5};
    fill_ifm(IFM_A, 36); fill_ifm(IFM_B1, 64); fill_ifm(IFM_B2, 64); fill_ifm(IFM_C, 3);
    fill_w(0, 9, WEI_A); fill_a(0, 9, SCL_A, 40); fill_b(0, BIAS_A, 100000);
    fill_w(1, 1, WEI_B1); fill_a(1, 1, SCL_B1, 2000);
    fill_w(2, 1, WEI_B2); fill_a(2, 1, SCL_B2, 2000); fill_b(1, BIAS_B, 1000);
    fill_w(3, 1, WEI_C); fill_a(3, 1, SCL_C, 30); fill_b(2, BIAS_C, 10);
    // C, tile 0: alpha 0 and bias 0x3ffff, so the layer maximum is
    // 18 ones: shift 11 leaves 127 and the round rule carries it to 128,
    // which must saturate back to 127.
    alpha_m[3][0][0] = 16'sd0;      mem.mem[SCL_C][15:0] = 16'd0;
    bias_m[2][0]     = 32'h3ffff;   mem.mem[BIAS_C][31:0] = 32'h3ffff;
    // ---- model: layer A ----
    for (int p = 0; p < 16; p++) for (int t = 0; t < NT; t++) begin
      automatic int oy = p / 4, ox = p % 4, acc = bias_m[0][t];
      for (int j = 0; j < 9; j++) begin
        automatic int d = 0;
        for (int c = 0; c < N; c++) d += px(IFM_A, 6, oy + j/3, ox + j%3, c) * int'(w_t[0][t][j][c]);
        acc += d * int'(alpha_m[0][t][j]);
      end
      acc_a[p][t] = acc;
    end
    rs_a = down(16, NT, acc_a, out_a);
    // ---- model: layer B (two input-channel blocks) ----
    for (int p = 0; p < 16; p++) for (int t = 0; t < NT; t++) begin
      automatic int oy = p / 4, ox = p % 4, d1 = 0, d2 = 0;
      for (int c = 0; c < N; c++) begin
        d1 += px(IFM_B1, 8, 2*oy, 2*ox, c) * int'(w_t[1][t][0][c]);
        d2 += px(IFM_B2, 8, 2*oy, 2*ox, c) * int'(w_t[2][t][0][c]);
      end
      acc_b[p][t] = bias_m[1][t] + d1 * int'(alpha_m[1][t][0]) + d2 * int'(alpha_m[2][t][0]);
    end
    rs_b = down(16, NT, acc_b, out_b);
    // exponents: input -4, weights A -2, B -5, C -1
    e_a = -4 - 2 + rs_a;
    e_b_conv = -4 - 5 + rs_b;
    e_b = (e_a > e_b_conv) ? e_a : e_b_conv;
    for (int p = 0; p < 16; p++) for (int t = 0; t < NT; t++) begin
      automatic int xa = int'(out_b[p][t]), xb = int'(out_a[p][t]), d = e_b_conv - e_a, s;
      if (d > 0) begin xb = xb >>> ((d > 7) ? 7 : d); n_eshift++; end
      if (d < 0) begin xa = xa >>> ((-d > 7) ? 7 : -d); n_eshift++; end
      s = xa + xb;
      if (s > 127) begin s = 127; n_sat++; end
      if (s < -128) begin s = -128; n_sat++; end
      out_b[p][t] = 8'(s);
    end
    // ---- model: layer C (5 tiles) ----
    for (int p = 0; p < 3; p++) for (int t = 0; t < NT; t++) begin
      automatic int d = 0;
      for (int c = 0; c < N; c++) d += px(IFM_C, 3, 0, p, c) * int'(w_t[3][t][0][c]);
      acc_c[p][t] = bias_m[2][t] + d * int'(alpha_m[3][t][0]);
    end
    for (int p = 3; p < 16; p++) for (int t = 0; t < NT; t++) acc_c[p][t] = 0;
    rs_c = down(3, 5, acc_c, out_c);
    e_c = e_b - 1 + rs_c;

    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    // exponent presets: reg0 = input exponent
    wr(1024 + 32 + 0, 32'(-4));
    entry(0, ga, 1, 1, 0, 0, 0, 1, -2, IFM_A, 36, WEI_A, 9*GW, SCL_A, 9*GS, BIAS_A, GB, 0, OFM_A);
    entry(1, gb, 1, 0, 0, 0, 0, 2, -5, IFM_B1, 64, WEI_B1, GW, SCL_B1, GS, BIAS_B, GB, 0, 0);
    entry(2, gb, 0, 1, 1, 0, 1, 2, -5, IFM_B2, 64, WEI_B2, GW, SCL_B2, GS, 0, 0, OFM_A, OFM_B);
    entry(3, gc, 1, 1, 0, 2, 0, 3, -1, IFM_C, 3, WEI_C, GW, SCL_C, GS, BIAS_C, GB, 0, OFM_C);
    wr(1024, 32'd4);
    wr(1025, 32'd1);
    wait (done);
    repeat (5) @(posedge clk);
    // ---- compare ----
    for (int p = 0; p < 16; p++) for (int t = 0; t < NT; t++) begin
      checks += 2;
      if (mem.mem[OFM_A + p][t*8 +: 8] != out_a[p][t]) begin
        failures++; if (failures < 10) $display("A p%0d t%0d got %0d exp %0d (acc %0d rs %0d)", p, t, $signed(mem.mem[OFM_A + p][t*8 +: 8]), out_a[p][t], acc_a[p][t], rs_a);
      end
      if (mem.mem[OFM_B + p][t*8 +: 8] != out_b[p][t]) begin
        failures++; if (failures < 10) $display("B p%0d t%0d got %0d exp %0d", p, t, $signed(mem.mem[OFM_B + p][t*8 +: 8]), out_b[p][t]);
      end
    end
    for (int p = 0; p < 3; p++) for (int t = 0; t < NT; t++) begin
      checks++;
      if (mem.mem[OFM_C + p][t*8 +: 8] != out_c[p][t]) begin
        failures++; if (failures < 10) $display("C p%0d t%0d got %0d exp %0d", p, t, $signed(mem.mem[OFM_C + p][t*8 +: 8]), out_c[p][t]);
      end
    end
    checks += 4;
    if (int'(dut.u_exp.regs[1]) != e_a) begin failures++; $display("exp A %0d exp %0d", dut.u_exp.regs[1], e_a); end
    if (int'(dut.u_exp.regs[2]) != e_b) begin failures++; $display("exp B %0d exp %0d", dut.u_exp.regs[2], e_b); end
    if (int'(dut.u_exp.regs[3]) != e_c) begin failures++; $display("exp C %0d exp %0d", dut.u_exp.regs[3], e_c); end
    if (mem.mem[OFM_C + 3] != '0) begin failures++; $display("C wrote past its pixels"); end
    $display("rs A/B/C %0d %0d %0d  exps %0d %0d %0d", rs_a, rs_b, rs_c, e_a, e_b, e_c);
    $display("mechanisms: avalon_wait=%0d outstanding>=2=%0d store_full=%0d drain_stall=%0d partial=%0d elt_pop=%0d masked_pe=%0d round=%0d sat=%0d elt_shift=%0d",
             mem.n_wait, c_maxout, c_st_full, c_drain_stall, c_partial, c_elt_pop, c_masked, n_round, n_sat, n_eshift);
    checks += 10;
    if (mem.n_wait == 0)      begin failures++; $display("no Avalon stall"); end
    if (c_maxout == 0)        begin failures++; $display("never 2 reads outstanding"); end
    if (c_st_full == 0)       begin failures++; $display("store FIFO never full"); end
    if (c_drain_stall == 0)   begin failures++; $display("no drain stall"); end
    if (c_partial == 0)       begin failures++; $display("no partial-sum feedback"); end
    if (c_elt_pop != 16*NPE/NPE) begin failures++; $display("element-wise pops %0d", c_elt_pop); end
    if (c_masked == 0)        begin failures++; $display("no masked PE slot"); end
    if (n_round == 0)         begin failures++; $display("no rounding"); end
    if (n_sat == 0)           begin failures++; $display("no saturation"); end
    if (n_eshift == 0)        begin failures++; $display("no element-wise shift"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog at layer %0d", layer_idx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
