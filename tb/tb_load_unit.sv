// tb_load_unit: the load unit against the Avalon memory model with random
// waitrequest and latency. Runs jobs of 0, 1, 5 and 40 lines on different
// channels and checks that every line of the job arrives once, in order,
// with the job's channel, that done pulses once at the end, that no more
// than MAX_OUT reads are ever outstanding, and that a small sink space
// (element-wise buffer) is never exceeded.
module tb_load_unit;
  import dnn_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic job_start, busy, done, rd_req, rd_wait, rd_valid, out_valid;
  ld_ch_e job_ch, out_ch;
  logic [31:0] job_base, rd_addr;
  logic [15:0] job_lines, space;
  logic [511:0] rd_data, out_data;
  logic mwait;
  int checks = 0, failures = 0, got = 0, dones = 0, outstanding = 0, max_out = 0, held = 0;

  load_unit #(.MAX_OUT(8)) dut (.*);
  avalon_mem_model #(.WAIT_PCT(30)) mem (.clk, .rst_n, .address(rd_addr), .read(rd_req), .write(1'b0),
    .writedata('0), .waitrequest(mwait), .readdata(rd_data), .readdatavalid(rd_valid));
  assign rd_wait = mwait;

  always @(posedge clk) begin
    if (rd_req && !rd_wait) outstanding++;
    if (rd_valid) outstanding--;
    if (outstanding > max_out) max_out = outstanding;
    if (done) dones++;
    if (out_valid) held++;
  end

  task automatic job(input ld_ch_e ch, input int base_line, input int n, input int sp);
    int idx = 0, t = 0, occ = 0;
    dones = 0;
    space = 16'(sp);
    @(negedge clk);
    job_start = 1; job_ch = ch; job_base = 32'(base_line * 64); job_lines = 16'(n);
    @(negedge clk); job_start = 0;
    while (dones == 0 && t < 2000) begin
      @(posedge clk); #1; t++;
      if (out_valid) begin
        checks += 2;
        if (out_data != mem.mem[base_line + idx]) begin failures++; $display("line %0d wrong", idx); end
        if (out_ch != ch) begin failures++; $display("channel"); end
        idx++;
      end
      if (sp < 100) begin
        // sink of sp lines that drains one line on half the cycles
        if (out_valid) occ++;
        if (occ > 0 && $urandom_range(0, 1) == 1) occ--;
        checks++;
        if (occ > sp) begin failures++; $display("sink overrun"); end
        space = 16'(sp - occ);
      end
    end
    repeat (10) @(posedge clk);
    checks += 3;
    if (idx != n) begin failures++; $display("got %0d lines of %0d", idx, n); end
    if (dones != 1) begin failures++; $display("done count %0d", dones); end
    if (busy) begin failures++; $display("still busy"); end
  endtask

  initial begin
    job_start = 0; job_ch = CH_IFM; job_base = 0; job_lines = 0; space = 16'hffff;
    for (int i = 0; i < 4096; i++) mem.mem[i] = {16{32'(i * 7919)}};
    repeat (2) @(posedge clk); rst_n = 1;
    job(CH_IFM, 10, 5, 65535);
    job(CH_WEI, 100, 40, 65535);
    job(CH_SCL, 7, 1, 65535);
    job(CH_BIAS, 0, 0, 65535);
    job(CH_ELT, 300, 60, 3);
    checks++;
    if (max_out > 8 || max_out < 2) begin failures++; $display("max outstanding %0d", max_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
