// load_unit: the load half of the load-store unit, an Avalon-MM read
// master.
//
// A job (job_start with channel, byte base address and number of 64-byte
// lines) makes the unit read lines base, base+64, ... . It keeps up to
// MAX_OUT reads outstanding and never more than the sink can take (space:
// free lines at the sink, counted without the reads already in flight).
// Avalon returns read data in order, so every returned line belongs to the
// current job and goes out on out_valid/out_ch/out_data. done pulses when
// the last line has returned; busy is high from job_start until then.
//
// Avalon side: rd_req/rd_addr held until rd_wait is low; rd_data/rd_valid
// are readdata/readdatavalid. Multiple outstanding requests follow the
// paper; MAX_OUT = 8, single-line reads and one job at a time are this
// design's choices.
// The returned line itself is not registered here: out_data is readdata
// as it arrives, tagged with the job's channel.
module load_unit
  import dnn_pkg::*;
#(
  parameter int unsigned MAX_OUT = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              job_start,
  input  ld_ch_e            job_ch,
  input  logic [ADDR_W-1:0] job_base,
  input  logic [15:0]       job_lines,
  input  logic [15:0]       space,
  output logic              busy,
  output logic              done,
  // Avalon-MM read side
  output logic              rd_req,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic              rd_wait,
  input  logic [LINE_W-1:0] rd_data,
  input  logic              rd_valid,
  // to the write controllers
  output logic              out_valid,
  output ld_ch_e            out_ch,
  output logic [LINE_W-1:0] out_data
);
  localparam int unsigned OW = $clog2(MAX_OUT + 1);

  ld_ch_e            ch_q;
  logic [ADDR_W-1:0] next_addr;
  logic [15:0]       to_issue, to_return;
  logic [OW-1:0]     outstanding;
  logic              accept;

  assign rd_req  = busy && (to_issue != 0) && (32'(outstanding) < MAX_OUT) &&
                   (16'(outstanding) < space);
  assign rd_addr = next_addr;
  assign accept  = rd_req && !rd_wait;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; ch_q <= CH_IFM; next_addr <= '0;
      to_issue <= '0; to_return <= '0; outstanding <= '0;
    end else begin
      done <= 1'b0;
      if (job_start && !busy) begin
        ch_q      <= job_ch;
        next_addr <= job_base;
        to_issue  <= job_lines;
        to_return <= job_lines;
        busy      <= (job_lines != 0);
        done      <= (job_lines == 0);
      end else begin
        if (accept) begin
          next_addr <= next_addr + ADDR_W'(LINE_B);
          to_issue  <= to_issue - 1'b1;
        end
        outstanding <= outstanding + OW'(accept) - OW'(rd_valid);
        if (rd_valid) begin
          to_return <= to_return - 1'b1;
          if (to_return == 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end

  assign out_valid = rd_valid && busy;
  assign out_ch    = ch_q;
  assign out_data  = rd_data;

  assert property (@(posedge clk) disable iff (!rst_n) rd_valid |-> outstanding != 0)
    else $error("load_unit: read data without a request");
  assert property (@(posedge clk) disable iff (!rst_n) job_start |-> !busy)
    else $error("load_unit: job started while busy");
endmodule
