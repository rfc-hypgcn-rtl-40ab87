// scm: spatial conv module (graph computation plus pruned 1x1 spatial
// convolution) of one conv block.
//
// Reorganised dataflow (paper eq. 5): X(h,w,oc) = sum_k sum_i (sum_p G_k(p,w)
// f(h,p,i)) W_k(i,oc), where G_k = A_k + B_k (the self-similarity graph C_k is
// dropped) and i runs only over the KEPT_CH input channels that survived
// channel pruning. Pruned channels are never fetched, so both their graph
// products and their convolution are skipped.
//
// Operation for each frame h:
//  1. Data-fetch: the 25 joint vectors of frame h arrive (decoded, all IN_CH
//     channels). Kept channels are written to the feature buffer, one line of
//     25 joints per kept channel; the whole vector goes to the shortcut buffer.
//  2. For each graph column w, for k = 0..2, for each line i (one per cycle):
//     the line is multiplied with column w of G_k (25 multipliers, summed) and
//     the result is broadcast to the Mult-PEs, which multiply it by W_k(i,oc)
//     for all output channels and accumulate. After 3*KEPT_CH lines the
//     accumulating buffer holds X(h,w,:).
//  3. Batch-norm (per-channel scale and shift, Q8.8), plus the shortcut
//     input vector f(h,w,:) when IN_CH == OUT_CH, gives the output vector for
//     joint w, sent channel-first on out_vec. ReLU is left to the RFC encoder
//     that follows, as in the paper.
// The paper's order (feature lines cycled for each graph column) is followed;
// running the three subsets back to back per column, and the absence of a
// shortcut when channel counts differ, are this design's choices.
//
// Timing: 25 load cycles, then per joint 3*KEPT_CH compute cycles, 2 drain
// cycles and one output cycle (if out_ready), i.e. 25 + 25*(3*KEPT_CH+3)
// cycles per frame without back-pressure. ROMs are written through cfg.
module scm
  import rfc_pkg::*;
#(
  parameter int unsigned IN_CH   = 64,
  parameter int unsigned OUT_CH  = 64,
  parameter int unsigned KEPT_CH = 32,
  parameter logic [3:0]  BLK_ID  = 4'd0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  data_t [IN_CH-1:0]    in_vec,
  output logic                 out_valid,
  input  logic                 out_ready,
  output data_t [OUT_CH-1:0]   out_vec
);

  localparam int unsigned N_PE     = (OUT_CH + 3) / 4;
  localparam bit          SHORTCUT = (IN_CH == OUT_CH);
  localparam int unsigned CI_W     = (IN_CH > 1) ? $clog2(IN_CH) : 1;
  localparam int unsigned KI_W     = (KEPT_CH > 1) ? $clog2(KEPT_CH) : 1;

  // ---------------- on-chip ROMs (loaded through cfg) ----------------
  data_t             graph    [NSUB][JOINTS][JOINTS];   // [k][p][w]
  data_t             wrom     [NSUB][KEPT_CH][N_PE*4];  // non-zero weights only
  data_t             bn_scale [OUT_CH];
  data_t             bn_shift [OUT_CH];
  logic [CI_W-1:0]   keep_idx [KEPT_CH];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.blk == BLK_ID) begin
      unique case (cfg.sel)
        CFG_GRAPH:   graph[cfg.addr / (JOINTS*JOINTS)][(cfg.addr / JOINTS) % JOINTS][cfg.addr % JOINTS] <= cfg.data;
        CFG_SWEIGHT: wrom[cfg.addr / (KEPT_CH*OUT_CH)][(cfg.addr / OUT_CH) % KEPT_CH][cfg.addr % OUT_CH] <= cfg.data;
        CFG_SBN:     if (cfg.addr[0]) bn_shift[cfg.addr[23:1] % OUT_CH] <= cfg.data;
                     else             bn_scale[cfg.addr[23:1] % OUT_CH] <= cfg.data;
        CFG_SKEEP:   keep_idx[cfg.addr % KEPT_CH] <= CI_W'(cfg.data);
        default: ;
      endcase
    end
  end

  // ---------------- feature and shortcut buffers ----------------
  data_t feat [KEPT_CH][JOINTS];
  data_t sc   [JOINTS][OUT_CH];

  typedef enum logic [1:0] {S_LOAD, S_COMP, S_DRAIN, S_OUT} state_e;
  state_e state;
  logic [4:0]      p_cnt, w_cnt;
  logic [1:0]      k_cnt;
  logic [KI_W-1:0] i_cnt;
  logic [1:0]      drain;

  assign in_ready = (state == S_LOAD);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      for (int i = 0; i < KEPT_CH; i++) feat[i][p_cnt] <= in_vec[keep_idx[i]];
      for (int c = 0; c < OUT_CH; c++)  sc[p_cnt][c]    <= SHORTCUT ? in_vec[c % IN_CH] : '0;
    end
  end

  // ---------------- graph product (stage 1) ----------------
  logic  issue, first;
  data_t y_q;
  logic  y_v, y_first;
  data_t w_q [N_PE*4];

  assign issue = (state == S_COMP);
  assign first = (k_cnt == 2'd0) && (i_cnt == '0);

  always_ff @(posedge clk) begin
    logic signed [47:0] s;
    s = '0;
    for (int p = 0; p < JOINTS; p++)
      s += 48'(feat[i_cnt][p]) * 48'(graph[k_cnt][p][w_cnt]);
    y_q     <= sat16(s >>> FRAC_W);
    y_first <= first;
    for (int c = 0; c < N_PE*4; c++) w_q[c] <= wrom[k_cnt][i_cnt][c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y_v <= 1'b0;
    else        y_v <= issue;
  end

  // ---------------- Mult-PEs (stage 2) ----------------
  acc_t acc [N_PE*4];
  for (genvar e = 0; e < N_PE; e++) begin : g_pe
    data_t wpe [4];
    acc_t  ape [4];
    for (genvar d = 0; d < 4; d++) begin : g_w
      assign wpe[d]       = w_q[e*4+d];
      assign acc[e*4+d]   = ape[d];
    end
    mult_pe u_pe (
      .clk, .rst_n, .en(y_v), .clr(y_first), .x(y_q), .w(wpe), .acc(ape)
    );
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD; p_cnt <= '0; w_cnt <= '0; k_cnt <= '0; i_cnt <= '0;
      drain <= '0; out_valid <= 1'b0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (p_cnt == 5'(JOINTS-1)) begin
            p_cnt <= '0; w_cnt <= '0; k_cnt <= '0; i_cnt <= '0; state <= S_COMP;
          end else p_cnt <= p_cnt + 1'b1;
        end
        S_COMP: begin
          if (i_cnt == KI_W'(KEPT_CH-1)) begin
            i_cnt <= '0;
            if (k_cnt == 2'(NSUB-1)) begin
              k_cnt <= '0; state <= S_DRAIN; drain <= 2'd1;
            end else k_cnt <= k_cnt + 1'b1;
          end else i_cnt <= i_cnt + 1'b1;
        end
        S_DRAIN: begin
          if (drain == 2'd0) begin
            state <= S_OUT; out_valid <= 1'b1;
          end else drain <= drain - 1'b1;
        end
        S_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          if (w_cnt == 5'(JOINTS-1)) begin
            w_cnt <= '0; state <= S_LOAD;
          end else begin
            w_cnt <= w_cnt + 1'b1; state <= S_COMP;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // ---------------- batch-norm and shortcut ----------------
  always_ff @(posedge clk) begin
    if (state == S_DRAIN && drain == 2'd0) begin
      for (int c = 0; c < OUT_CH; c++) begin
        data_t conv;
        logic signed [47:0] bn;
        conv = sat16(48'(acc[c] >>> FRAC_W));
        bn   = ((48'(conv) * 48'(bn_scale[c])) >>> FRAC_W) + 48'(bn_shift[c]);
        out_vec[c] <= sat16(bn + 48'(sc[w_cnt][c]));
      end
    end
  end

endmodule
