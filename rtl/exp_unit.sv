// exp_unit: shared-exponent bookkeeping for dynamic fixed point.
//
// A value x with shared exponent E stands for x * 2^E. N_EXP 8-bit signed
// exponent registers hold the exponents of the tensors in flight; the host
// can preset them (host_we). For the current layer:
//   e_conv = reg[act_idx] + exp_wei + rs   (activation + weight exponent +
//                                           down-conversion shift)
//   e_elt  = reg[elt_idx]                  (exponent of the other branch)
//   e_out  = eltwise ? max(e_conv, e_elt) : e_conv
// commit writes e_out to reg[out_idx], where the next layer picks it up as
// its activation exponent. All combinational except the register file.
// The formulas follow the paper; the register file and its size are this
// design's choice; sums wrap at 8 bits.
module exp_unit
  import dnn_pkg::*;
#(
  parameter int unsigned N_EXP = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    host_we,
  input  logic [$clog2(N_EXP)-1:0] host_idx,
  input  logic signed [EXP_W-1:0] host_wdata,
  input  logic [$clog2(N_EXP)-1:0] act_idx,
  input  logic [$clog2(N_EXP)-1:0] elt_idx,
  input  logic [$clog2(N_EXP)-1:0] out_idx,
  input  logic signed [EXP_W-1:0] exp_wei,
  input  logic [5:0]              rs,
  input  logic                    eltwise,
  input  logic                    commit,
  output logic signed [EXP_W-1:0] e_conv,
  output logic signed [EXP_W-1:0] e_elt,
  output logic signed [EXP_W-1:0] e_out
);
  logic signed [EXP_W-1:0] regs [N_EXP];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < N_EXP; i++) regs[i] <= '0;
    end else begin
      if (host_we) regs[host_idx] <= host_wdata;
      else if (commit) regs[out_idx] <= e_out;
    end

  always_comb begin
    e_conv = regs[act_idx] + exp_wei + EXP_W'(rs);
    e_elt  = regs[elt_idx];
    e_out  = (eltwise && e_elt > e_conv) ? e_elt : e_conv;
  end
endmodule
