// tb_cnn_ctrl: checks the layer sequencing of the CNN controller.
//
// The TB answers the controller's handshakes with random delays (load done,
// drain done, store idle) and feeds it a random layer table: kernel 1..3,
// stride 1..2, output 1..6 x 1..6, random first/last/element-wise flags
// and random load regions. It checks, per layer: the four load jobs in
// order (channel, base, lines) and nothing else running meanwhile; every
// compute beat in the expected order (group, ky, kx) with the right PE
// valids, IRAM addresses, BSRAM address, ORAM address and first/last
// flags; use_partial; the drain (element-wise load, drain start, store
// start, exponent commit) only for last-pass layers; layer_idx; and done at
// the end of the table.
module tb_cnn_ctrl;
  import dnn_pkg::*;
  localparam int NPE = 4;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start; logic [6:0] num_layers; layer_cfg_t cfg; logic [5:0] layer_idx;
  logic busy, done, ld_start, ld_done, b_first, b_last, use_partial;
  ld_ch_e ld_ch; logic [31:0] ld_base; logic [15:0] ld_lines;
  logic [NPE-1:0] b_valid; logic [10:0] b_oaddr; logic [6:0] b_waddr;
  logic [NPE-1:0][6:0] iram_raddr;
  logic dr_start, dr_done, st_start, st_idle, elt_clear, exp_commit; logic [15:0] npix;
  int checks = 0, failures = 0;

  cnn_ctrl #(.N_PE(NPE)) dut (.*);

  layer_cfg_t tbl [8];
  assign cfg = tbl[layer_idx[2:0]];

  task automatic fail(input string s);
    failures++; if (failures < 12) $display("%0t layer %0d: %s", $time, layer_idx, s);
  endtask

  // handshake responders
  int ld_wait = -1, dr_wait = -1, st_busy = 0, n_ldjobs = 0;
  always @(posedge clk) begin
    ld_done <= 1'b0; dr_done <= 1'b0;
    if (ld_start) ld_wait <= $urandom_range(0, 6);
    else if (ld_wait == 0) begin ld_done <= 1'b1; ld_wait <= -1; end
    else if (ld_wait > 0) ld_wait <= ld_wait - 1;
    if (dr_start) dr_wait <= $urandom_range(1, 20);
    else if (dr_wait == 0) begin dr_done <= 1'b1; dr_wait <= -1; end
    else if (dr_wait > 0) dr_wait <= dr_wait - 1;
    if (st_start) st_busy <= $urandom_range(1, 30);
    else if (st_busy > 0) st_busy <= st_busy - 1;
  end
  assign st_idle = (st_busy == 0);

  // expected-event tracking
  int beat, ldj, n_commit, n_drain;
  int exp_beats;
  always @(posedge clk) if (rst_n && busy) begin
    automatic int K = int'(cfg.k), S = int'(cfg.stride), np = int'(cfg.out_w) * int'(cfg.out_h);
    if (ld_start) begin
      checks++;
      if (ld_ch == CH_ELT) begin
        if (!(cfg.eltwise && cfg.last_pass && dr_start) || ld_base != cfg.elt_base || ld_lines != 16'(np))
          fail("bad element-wise load");
      end else begin
        case (ldj)
          0: if (ld_ch != CH_IFM || ld_base != cfg.ifm_base || ld_lines != cfg.ifm_lines) fail("bad IFM job");
          1: if (ld_ch != CH_WEI || ld_base != cfg.wei_base || ld_lines != cfg.wei_lines) fail("bad weight job");
          2: if (ld_ch != CH_SCL || ld_base != cfg.scl_base || ld_lines != cfg.scl_lines) fail("bad scaling job");
          3: if (ld_ch != CH_BIAS || ld_base != cfg.bias_base || ld_lines != cfg.bias_lines) fail("bad bias job");
          default: fail("extra load job");
        endcase
        if (beat != 0) fail("load after compute");
        ldj++;
      end
    end
    if (|b_valid) begin
      automatic int g = beat / (K*K), j = beat % (K*K), ky = j / K, kx = j % K;
      checks++;
      if (ldj != 4 || ld_wait >= 0) fail("beat before loads finished");
      if (int'(b_oaddr) != g || int'(b_waddr) != j) fail($sformatf("beat %0d: oaddr %0d waddr %0d", beat, b_oaddr, b_waddr));
      if (b_first != (j == 0) || b_last != (j == K*K - 1)) fail("first/last");
      if (use_partial != !cfg.first_pass) fail("use_partial");
      for (int k = 0; k < NPE; k++) begin
        automatic int p = g*NPE + k, oy = p / int'(cfg.out_w), ox = p % int'(cfg.out_w);
        checks++;
        if (b_valid[k] != (p < np)) fail($sformatf("valid of PE %0d", k));
        else if (p < np && int'(iram_raddr[k]) != ((oy*S + ky) * int'(cfg.in_w) + ox*S + kx) % 128)
          fail($sformatf("IRAM address PE %0d got %0d", k, iram_raddr[k]));
      end
      beat++;
    end
    if (dr_start) begin
      checks++; n_drain++;
      if (!cfg.last_pass) fail("drain on a non-last pass");
      if (beat != ((np + NPE - 1) / NPE) * K * K) fail($sformatf("drain after %0d beats", beat));
      if (!st_start) fail("store not started with drain");
    end
    if (exp_commit) begin
      checks++; n_commit++;
      if (!cfg.last_pass || dr_wait >= 0 || !st_idle) fail("commit before drain finished");
    end
  end

  initial begin
    start = 0; num_layers = 0; beat = 0; ldj = 0; n_commit = 0; n_drain = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int prog = 0; prog < 25; prog++) begin
      automatic int nl = $urandom_range(1, 6), exp_commits = 0, seen_layer = 0;
      for (int l = 0; l < 8; l++) begin
        automatic int K = $urandom_range(1, 3), S = $urandom_range(1, 2);
        automatic int ow = $urandom_range(1, 6), oh = $urandom_range(1, 6);
        tbl[l] = '0;
        tbl[l].k = 4'(K); tbl[l].stride = 4'(S);
        tbl[l].out_w = 8'(ow); tbl[l].out_h = 8'(oh);
        tbl[l].in_w = 8'((ow - 1) * S + K); tbl[l].in_h = 8'((oh - 1) * S + K);
        tbl[l].num_tiles = 7'd64;
        tbl[l].first_pass = $urandom % 2; tbl[l].last_pass = $urandom % 2; tbl[l].eltwise = $urandom % 2;
        tbl[l].ifm_base = $urandom; tbl[l].ifm_lines = 16'($urandom_range(0, 50));
        tbl[l].wei_base = $urandom; tbl[l].wei_lines = 16'($urandom_range(0, 50));
        tbl[l].scl_base = $urandom; tbl[l].scl_lines = 16'($urandom_range(0, 50));
        tbl[l].bias_base = $urandom; tbl[l].bias_lines = 16'($urandom_range(0, 50));
        tbl[l].elt_base = $urandom; tbl[l].ofm_base = $urandom;
        if (l < nl && tbl[l].last_pass) exp_commits++;
      end
      n_commit = 0; n_drain = 0;
      @(negedge clk); num_layers = 7'(nl); start = 1; @(negedge clk); start = 0;
      fork
        begin : run
          automatic int last_li = 0;
          while (!done) begin
            @(posedge clk); #1;
            if (int'(layer_idx) != last_li) begin
              checks++;
              if (int'(layer_idx) != last_li + 1) fail("layer order");
              checks++;
              if (ldj != 4) fail("layer left with missing loads");
              last_li = int'(layer_idx); ldj = 0; beat = 0;
            end
          end
          checks += 3;
          if (last_li != nl - 1) fail("not all layers run");
          if (n_commit != exp_commits) fail($sformatf("commits %0d exp %0d", n_commit, exp_commits));
          if (n_drain != exp_commits) fail("drain count");
        end
      join
      @(posedge clk); #1; ldj = 0; beat = 0;
      checks++; if (busy) fail("busy after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
