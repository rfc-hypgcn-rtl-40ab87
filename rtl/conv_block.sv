// conv_block: one convolution block of the layer pipeline (the paper's conv
// block module).
//
// The block is a spatial conv module (graph computation and channel-pruned
// 1x1 convolution, with its shortcut), an RFC junction that ReLU-encodes,
// compactly stores and decodes the SCM result, and a temporal conv module
// (9x1 convolution with coarse- and fine-grained pruning, with its shortcut).
// Input vectors must already be ReLU-ed and decoded (they come from the
// previous junction or from the clip input); the output vector is the TCM
// result before ReLU, to be compressed by the next junction.
//
// All handshakes are valid/ready, one vector (one frame and joint, all
// channels) per transfer, frames in time order and joints 0..24 within a frame.
module conv_block
  import rfc_pkg::*;
#(
  parameter int unsigned IN_CH      = 64,
  parameter int unsigned OUT_CH     = 64,
  parameter int unsigned KEPT_CH    = 32,
  parameter int unsigned KEPT_OC    = 32,
  parameter int unsigned T_IN       = 150,
  parameter int unsigned STRIDE     = 1,
  parameter int unsigned BRAM_DEPTH = 512,
  parameter logic [3:0]  BLK_ID     = 4'd0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_t                cfg,
  input  logic                in_valid,
  output logic                in_ready,
  input  data_t [IN_CH-1:0]   in_vec,
  output logic                out_valid,
  input  logic                out_ready,
  output data_t [OUT_CH-1:0]  out_vec,
  output logic                ovf,
  output logic [31:0]         dyn_stall_cnt
);

  logic s_v, s_r, j_v, j_r;
  data_t [OUT_CH-1:0] s_vec, j_vec;

  scm #(.IN_CH(IN_CH), .OUT_CH(OUT_CH), .KEPT_CH(KEPT_CH), .BLK_ID(BLK_ID)) u_scm (
    .clk, .rst_n, .cfg,
    .in_valid, .in_ready, .in_vec,
    .out_valid(s_v), .out_ready(s_r), .out_vec(s_vec)
  );

  rfc_junction #(.C(OUT_CH), .BRAM_DEPTH(BRAM_DEPTH)) u_rfc (
    .clk, .rst_n,
    .in_valid(s_v), .in_ready(s_r), .in_vec(s_vec),
    .out_valid(j_v), .out_ready(j_r), .out_vec(j_vec), .ovf
  );

  tcm #(.C(OUT_CH), .KEPT_OC(KEPT_OC), .T_IN(T_IN), .STRIDE(STRIDE), .BLK_ID(BLK_ID)) u_tcm (
    .clk, .rst_n, .cfg,
    .in_valid(j_v), .in_ready(j_r), .in_vec(j_vec),
    .out_valid, .out_ready, .out_vec, .dyn_stall_cnt
  );

endmodule
