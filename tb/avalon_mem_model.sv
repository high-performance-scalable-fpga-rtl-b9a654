// avalon_mem_model: behavioural model of system memory behind an Avalon-MM
// slave with 512-bit data (testbench only). Byte addresses, one 64-byte
// line per transfer. waitrequest is raised at random (WAIT_PCT percent of
// cycles); reads return in order, MIN_LAT..MIN_LAT+3 cycles after they are
// accepted, on readdata/readdatavalid. The testbench reads and writes mem[]
// directly (index = byte address / 64). Counts accepted reads, writes and
// cycles with waitrequest high. Transfers during reset are ignored.
module avalon_mem_model #(
  parameter int DEPTH    = 4096,
  parameter int WAIT_PCT = 20,
  parameter int MIN_LAT  = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [31:0]  address,
  input  logic         read,
  input  logic         write,
  input  logic [511:0] writedata,
  output logic         waitrequest,
  output logic [511:0] readdata,
  output logic         readdatavalid
);
  logic [511:0] mem [DEPTH];
  int cyc = 0, n_reads = 0, n_writes = 0, n_wait = 0;
  logic [511:0] rq_data[$];
  int           rq_due[$];

  initial begin waitrequest = 0; readdatavalid = 0; readdata = '0; end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && (read || write) && waitrequest) n_wait++;
    if (rst_n && read && !waitrequest) begin
      rq_data.push_back(mem[(address / 64) % DEPTH]);
      rq_due.push_back(cyc + MIN_LAT + int'($urandom_range(0, 3)));
      n_reads++;
    end
    if (rst_n && write && !waitrequest) begin
      mem[(address / 64) % DEPTH] = writedata;
      n_writes++;
    end
    readdatavalid <= 1'b0;
    if (rq_due.size() > 0 && rq_due[0] <= cyc) begin
      readdata      <= rq_data.pop_front();
      readdatavalid <= 1'b1;
      void'(rq_due.pop_front());
    end
    waitrequest <= (int'($urandom_range(0, 99)) < WAIT_PCT);
  end
endmodule
