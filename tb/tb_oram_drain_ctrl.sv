// tb_oram_drain_ctrl: checks the ORAM drain (max scan, down-conversion,
// element-wise add, store hand-off) with 8 tiles x 4 PEs.
//
// The TB plays the ORAMs (read data one cycle after drain_en, from a random
// 32-bit array), the store FIFO (random number of free slots, drained at
// random) and the element-wise buffer (random fill level, random lines).
// Each run uses a random pixel count, tile count, exponents and an
// element-wise flag; values are scaled by a random shift so rs varies.
// Every pushed line is compared with a reference that applies the same
// rules (layer maximum -> rs, shift, round, saturate, align, add). Also
// checked: rs, the number of pushes and pops, done, and that stalls and the
// element-wise path both occurred.
module tb_oram_drain_ctrl;
  localparam int NT = 8, NPE = 4;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start, eltwise, busy, done, drain_en, elt_pop, st_push, stall;
  logic [15:0] npix; logic [6:0] num_tiles;
  logic [1:0] drain_pe; logic [10:0] drain_addr;
  logic [NT-1:0][31:0] drain_q;
  logic [5:0] rs; logic signed [7:0] e_conv, e_elt;
  logic [7:0] elt_count; logic [511:0] elt_dout, st_data; logic [2:0] st_free;
  int checks = 0, failures = 0, n_stall = 0, n_elt = 0;

  oram_drain_ctrl #(.N_TILES(NT), .N_PE(NPE), .ST_FREE_W(3), .ELT_CNT_W(8)) dut (.*);

  logic [31:0] oram [NPE][64][NT];
  logic [511:0] eltq [64];
  int npush, npop, elt_avail, st_used;

  always @(posedge clk) begin
    if (drain_en) for (int t = 0; t < NT; t++) drain_q[t] <= oram[drain_pe][drain_addr][t];
    if (rst_n && stall) n_stall++;
  end
  assign elt_dout = eltq[npop % 64];
  assign elt_count = 8'(elt_avail - npop);
  assign st_free = 3'(4 - st_used);

  function automatic int lzc(input longint v);
    for (int b = 31; b >= 0; b--) if (v[b]) return 31 - b;
    return 32;
  endfunction

  initial begin
    start = 0; eltwise = 0; npix = 0; num_tiles = 0; e_conv = 0; e_elt = 0;
    npush = 0; npop = 0; elt_avail = 0; st_used = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 40; run++) begin
      automatic int np = $urandom_range(1, 40), nt = $urandom_range(1, NT), sh = $urandom_range(0, 24);
      automatic bit el = (run % 2 == 1);
      automatic longint m = 0;
      automatic int rsm, ec = int'($urandom_range(0, 20)) - 10, ee = int'($urandom_range(0, 20)) - 10;
      for (int p = 0; p < np; p++) for (int t = 0; t < NT; t++) begin
        automatic logic [31:0] v = $urandom;
        v = 32'($signed(v) >>> sh);
        oram[p % NPE][p / NPE][t] = v;
        if (t < nt) begin
          automatic longint a = longint'($signed(v)); if (a < 0) a = -a; if (a > m) m = a;
        end
      end
      for (int i = 0; i < 64; i++) for (int w = 0; w < 16; w++) eltq[i][w*32 +: 32] = $urandom;
      rsm = 25 - lzc(m); if (rsm < 0) rsm = 0;
      @(negedge clk);
      npush = 0; npop = 0; elt_avail = 0; st_used = 0;
      npix = 16'(np); num_tiles = 7'(nt); eltwise = el; e_conv = 8'(ec); e_elt = 8'(ee);
      start = 1; @(negedge clk); start = 0;
      while (!done) begin
        @(posedge clk); #1;
        if (st_push) begin
          automatic int p = npush;
          for (int t = 0; t < NT; t++) begin
            automatic longint x = longint'($signed(oram[p % NPE][p / NPE][t]));
            automatic longint y = x >>> rsm;
            automatic int r;
            if (rsm >= 2 && x[rsm-1] && x[rsm-2]) y++;
            if (y > 127) y = 127; if (y < -128) y = -128;
            r = int'(y);
            if (el) begin
              automatic int a = r, b = int'($signed(eltq[p % 64][t*8 +: 8])), d = ec - ee;
              if (d > 0) b = b >>> ((d > 7) ? 7 : d);
              if (d < 0) a = a >>> ((-d > 7) ? 7 : -d);
              r = a + b; if (r > 127) r = 127; if (r < -128) r = -128;
            end
            if (t >= nt) r = 0;
            checks++;
            if ($signed(st_data[t*8 +: 8]) != 8'(r)) begin
              failures++;
              if (failures < 8) $display("run %0d p%0d t%0d got %0d exp %0d", run, p, t, $signed(st_data[t*8 +: 8]), r);
            end
          end
          checks++; if (st_data[511:NT*8] != '0) failures++;
          npush++; st_used++;
        end
        if (elt_pop) begin npop++; n_elt++; end
        if (st_used > 0 && ($urandom % 3 == 0)) st_used--;
        if (el && elt_avail < np && ($urandom % 4 == 0)) elt_avail++;
      end
      checks += 3;
      if (rs != 6'(rsm)) begin failures++; $display("run %0d rs %0d exp %0d", run, rs, rsm); end
      if (npush != np) begin failures++; $display("run %0d pushes %0d exp %0d", run, npush, np); end
      if (npop != (el ? np : 0)) begin failures++; $display("run %0d pops %0d", run, npop); end
    end
    checks += 2;
    if (n_stall == 0) begin failures++; $display("never stalled"); end
    if (n_elt == 0) begin failures++; $display("no element-wise pops"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
