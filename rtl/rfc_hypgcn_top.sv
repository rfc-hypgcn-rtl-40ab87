// rfc_hypgcn_top: the layer-pipelined accelerator for a pruned 2s-AGCN
// stream (ten conv blocks, all mapped on chip).
//
// A clip of T_RAW skeleton frames (25 joints, 3 coordinates each, Q8.8)
// enters on in_vec one joint vector per transfer. With INPUT_SKIP set every
// second frame is dropped at the input (input skipping), halving the work.
// The frames then flow through NUM_BLOCKS conv blocks; after every block an
// RFC junction applies ReLU and keeps the result in compact sparse form until
// the next block fetches it. The decoded output of the last junction leaves on
// out_vec (256 channels per joint vector): the pooling and fully connected
// classifier that follow in the model are not part of this RTL.
//
// Block shapes follow the model (blocks 1-4: 64 channels, 5-7: 128, 8-10:
// 256, temporal stride 2 in blocks 5 and 8). The kept input channels of each
// SCM (channel pruning, "Drop-1") are this design's estimate from the paper's
// bar chart, since the paper prints no numbers; the kept filters of each TCM
// equal the kept input channels of the next SCM (coarse-grained pruning),
// and all 256 filters of block 10 are kept. All weights, graphs, batch-norm
// constants and kept-channel lists are on-chip ROMs written through cfg.
//
// Status outputs: ovf_cnt counts vectors truncated by any junction,
// dyn_stall_cnt the cycles in which any Dyn-Mult-PE of any block needed an
// extra cycle, skip_cnt the input vectors dropped by input skipping.
module rfc_hypgcn_top
  import rfc_pkg::*;
#(
  parameter int unsigned NUM_BLOCKS = 10,
  parameter int unsigned T_RAW      = 300,
  parameter bit          INPUT_SKIP = 1'b1,
  parameter int unsigned BRAM_DEPTH = 512,
  parameter int unsigned BLK_IN   [10] = '{3, 64, 64, 64, 64, 128, 128, 128, 256, 256},
  parameter int unsigned BLK_OUT  [10] = '{64, 64, 64, 64, 128, 128, 128, 256, 256, 256},
  parameter int unsigned BLK_KEPT [10] = '{3, 38, 48, 51, 54, 61, 64, 77, 13, 20},
  parameter int unsigned BLK_STR  [10] = '{1, 1, 1, 1, 2, 1, 1, 2, 1, 1},
  parameter int unsigned OUT_C = BLK_OUT[NUM_BLOCKS-1]
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_t                cfg,
  input  logic                in_valid,
  output logic                in_ready,
  input  data_t [2:0]         in_vec,
  output logic                out_valid,
  input  logic                out_ready,
  output data_t [OUT_C-1:0]   out_vec,
  output logic [31:0]         ovf_cnt,
  output logic [31:0]         dyn_stall_cnt,
  output logic [31:0]         skip_cnt
);

  localparam int unsigned T0 = INPUT_SKIP ? (T_RAW + 1) / 2 : T_RAW;

  // frames entering block b
  function automatic int unsigned t_in_of(input int unsigned b);
    int unsigned t;
    t = T0;
    for (int i = 0; i < 10; i++)
      if (i < int'(b)) t = (t + BLK_STR[i] - 1) / BLK_STR[i];
    return t;
  endfunction

  // ---------------- input skipping ----------------
  logic [4:0] j_cnt;
  logic       odd;        // current raw frame is an odd one
  logic       drop, b0_ready;
  assign drop     = INPUT_SKIP && odd;
  assign in_ready = drop ? 1'b1 : b0_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j_cnt <= '0; odd <= 1'b0; skip_cnt <= '0;
    end else if (in_valid && in_ready) begin
      if (drop) skip_cnt <= skip_cnt + 1'b1;
      if (j_cnt == 5'(JOINTS-1)) begin j_cnt <= '0; odd <= !odd; end
      else j_cnt <= j_cnt + 1'b1;
    end
  end

  // ---------------- block chain ----------------
  localparam int unsigned MAXC = 256;
  logic                bv [NUM_BLOCKS+1];   // valid into block b (b = NUM_BLOCKS: top output)
  logic                br [NUM_BLOCKS+1];
  data_t [MAXC-1:0]    bd [NUM_BLOCKS+1];
  logic [NUM_BLOCKS-1:0] ovf_b;
  logic [31:0]         stall_b [NUM_BLOCKS];

  assign bv[0]    = in_valid && !drop;
  assign b0_ready = br[0];
  always_comb begin
    bd[0] = '0;
    bd[0][2:0] = in_vec;
  end

  for (genvar b = 0; b < NUM_BLOCKS; b++) begin : g_blk
    localparam int unsigned CI = BLK_IN[b];
    localparam int unsigned CO = BLK_OUT[b];
    localparam int unsigned KO = (b == NUM_BLOCKS-1) ? BLK_OUT[b] : BLK_KEPT[b+1];
    logic tv, tr;
    data_t [CO-1:0] tvec, jvec;
    logic ovf_t, ovf_j;

    conv_block #(
      .IN_CH(CI), .OUT_CH(CO), .KEPT_CH(BLK_KEPT[b]), .KEPT_OC(KO),
      .T_IN(t_in_of(b)), .STRIDE(BLK_STR[b]), .BRAM_DEPTH(BRAM_DEPTH), .BLK_ID(4'(b))
    ) u_blk (
      .clk, .rst_n, .cfg,
      .in_valid(bv[b]), .in_ready(br[b]), .in_vec(bd[b][CI-1:0]),
      .out_valid(tv), .out_ready(tr), .out_vec(tvec),
      .ovf(ovf_t), .dyn_stall_cnt(stall_b[b])
    );

    rfc_junction #(.C(CO), .BRAM_DEPTH(BRAM_DEPTH)) u_rfc (
      .clk, .rst_n,
      .in_valid(tv), .in_ready(tr), .in_vec(tvec),
      .out_valid(bv[b+1]), .out_ready(br[b+1]), .out_vec(jvec), .ovf(ovf_j)
    );

    assign ovf_b[b] = ovf_t || ovf_j;
    always_comb begin
      bd[b+1] = '0;
      bd[b+1][CO-1:0] = jvec;
    end
  end

  assign out_valid        = bv[NUM_BLOCKS];
  assign br[NUM_BLOCKS]   = out_ready;
  assign out_vec          = bd[NUM_BLOCKS][OUT_C-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ovf_cnt <= '0; dyn_stall_cnt <= '0;
    end else begin
      logic [31:0] s;
      s = '0;
      for (int b = 0; b < NUM_BLOCKS; b++) s += stall_b[b];
      dyn_stall_cnt <= s;
      ovf_cnt <= ovf_cnt + 32'($countones(ovf_b));
    end
  end

endmodule
