// dnn_pkg: types, constants and helper functions shared by the INT8 x ternary
// convolution accelerator.
//
// Numbers that come from the architecture: 512-bit (64-byte) memory lines,
// 8-bit activations, 2-bit ternary weights, 16-bit scaling values, 32-bit
// bias and accumulators, 8-bit shared exponents. The per-layer register map
// (16 words per layer entry) and the load channel codes are this design's
// own encoding.
package dnn_pkg;

  localparam int unsigned LINE_W  = 512;  // one Avalon line, 64 bytes
  localparam int unsigned LINE_B  = 64;   // bytes per line
  localparam int unsigned ADDR_W  = 32;   // Avalon byte address
  localparam int unsigned ACT_W   = 8;
  localparam int unsigned WT_W    = 2;
  localparam int unsigned ALPHA_W = 16;
  localparam int unsigned ACC_W   = 32;
  localparam int unsigned EXP_W   = 8;
  localparam int unsigned REGS_PER_LAYER = 16;

  // Ternary weight codes: 01 = +1, 11 = -1, 00 and 10 = 0.
  localparam logic [1:0] W_POS = 2'b01;
  localparam logic [1:0] W_NEG = 2'b11;

  // Load-unit read channels.
  typedef enum logic [2:0] {
    CH_IFM  = 3'd0,
    CH_WEI  = 3'd1,
    CH_SCL  = 3'd2,
    CH_BIAS = 3'd3,
    CH_ELT  = 3'd4
  } ld_ch_e;

  // One layer entry (core registers followed by LSU registers).
  // Word 0 : in_w[7:0] in_h[15:8] out_w[23:16] out_h[31:24]
  // Word 1 : k[3:0] stride[7:4] num_tiles[14:8] first_pass[16] last_pass[17]
  //          eltwise[18] bias_addr[30:24]
  // Word 2 : exp_act_idx[3:0] exp_elt_idx[7:4] exp_out_idx[11:8] exp_wei[23:16]
  // Word 3..12 : ifm_base, ifm_lines, wei_base, wei_lines, scl_base,
  //              scl_lines, bias_base, bias_lines, elt_base, ofm_base
  typedef struct packed {
    logic [7:0]  in_w;
    logic [7:0]  in_h;
    logic [7:0]  out_w;
    logic [7:0]  out_h;
    logic [3:0]  k;
    logic [3:0]  stride;
    logic [6:0]  num_tiles;
    logic        first_pass;
    logic        last_pass;
    logic        eltwise;
    logic [6:0]  bias_addr;
    logic [3:0]  exp_act_idx;
    logic [3:0]  exp_elt_idx;
    logic [3:0]  exp_out_idx;
    logic signed [EXP_W-1:0] exp_wei;
    logic [ADDR_W-1:0] ifm_base;
    logic [15:0]       ifm_lines;
    logic [ADDR_W-1:0] wei_base;
    logic [15:0]       wei_lines;
    logic [ADDR_W-1:0] scl_base;
    logic [15:0]       scl_lines;
    logic [ADDR_W-1:0] bias_base;
    logic [15:0]       bias_lines;
    logic [ADDR_W-1:0] elt_base;
    logic [ADDR_W-1:0] ofm_base;
  } layer_cfg_t;

  // Leading zero count of a 32-bit value (32 for zero).
  function automatic logic [5:0] lzc32(input logic [31:0] v);
    logic [5:0] n;
    n = 6'd32;
    for (int i = 0; i < 32; i++)
      if (v[i]) n = 6'(31 - i);
    return n;
  endfunction

  // Ternary weight applied to one activation.
  function automatic logic signed [8:0] tern_mul(input logic signed [7:0] a,
                                                 input logic [1:0] w);
    unique case (w)
      W_POS:   return 9'(a);
      W_NEG:   return -9'(a);
      default: return '0;
    endcase
  endfunction

endpackage
