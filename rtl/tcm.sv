// tcm: temporal conv module (9x1 temporal convolution with mixed-grained
// pruning) of one conv block.
//
// Coarse grain: only the KEPT_OC filters listed in the kept-filter ROM are
// computed; the other output channels carry only the shortcut. Fine grain:
// every filter is cut into 1x1x16 sub-filters along input channels, and the
// static cavity pattern (rfc_pkg::CAV70_1, repeating every 8 input channels)
// keeps 6 or 4 weights in each of the 9 rows of a sub-filter. Only kept
// weights are stored.
//
// The feature buffer holds the last 9 frames (9 x 25 x C, written as frames
// arrive, frame f in slot f mod 9) together with their hot codes (feature hot
// storage). For an output centred on frame t, joint v and kept filter j, the
// module issues one job per sub-filter g to nine Dyn-Mult-PEs in parallel:
// PE r gets the 16 features of frame t+r-4 (zero outside the clip), their hot
// code, the row-r mask and the kept weights. The nine row sums go through an
// adder tree and are accumulated over g. Then batch-norm and the shortcut
// (the TCM input at frame t) give the output vector; ReLU is done by the RFC
// encoder that follows.
//
// Rows with 6 queues get ND6 multipliers and rows with 4 queues ND4 (defaults
// 4 and 3; the paper's table lists "4/6" DSPs per PE for the first layers and
// the exact split per queue count is this design's reading). Input is
// blocked while a frame's outputs are computed (a single 9-frame buffer);
// zero padding at both clip ends, output frames t = 0, STRIDE, 2*STRIDE ...,
// and the shortcut without projection are this design's choices.
//
// Timing: per output frame, 25*KEPT_OC*(C/16) jobs, one per cycle unless a
// PE stalls (dyn_stall_cnt counts such cycles), plus 3 cycles to drain the
// PEs and collect the last sums, then 25 output cycles.
module tcm
  import rfc_pkg::*;
#(
  parameter int unsigned C       = 64,
  parameter int unsigned KEPT_OC = 32,
  parameter int unsigned T_IN    = 150,
  parameter int unsigned STRIDE  = 1,
  parameter int unsigned ND6     = 4,
  parameter int unsigned ND4     = 3,
  parameter logic [3:0]  BLK_ID  = 4'd0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             in_valid,
  output logic             in_ready,
  input  data_t [C-1:0]    in_vec,
  output logic             out_valid,
  input  logic             out_ready,
  output data_t [C-1:0]    out_vec,
  output logic [31:0]      dyn_stall_cnt
);

  localparam int unsigned G     = C / BANK_W;
  localparam int unsigned J_W   = (KEPT_OC > 1) ? $clog2(KEPT_OC) : 1;
  localparam int unsigned G_W   = (G > 1) ? $clog2(G) : 1;
  localparam int unsigned C_W   = (C > 1) ? $clog2(C) : 1;
  localparam int unsigned T_W   = $clog2(T_IN + KT + 1);

  // ---------------- ROMs ----------------
  data_t          tw       [KEPT_OC][G][KT][MAXQ];
  data_t          bn_scale [C];
  data_t          bn_shift [C];
  logic [C_W-1:0] keep_oc  [KEPT_OC];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.blk == BLK_ID) begin
      unique case (cfg.sel)
        CFG_TWEIGHT: tw[cfg.addr / (G*KT*MAXQ)][(cfg.addr / (KT*MAXQ)) % G][(cfg.addr / MAXQ) % KT][cfg.addr % MAXQ] <= cfg.data;
        CFG_TBN:     if (cfg.addr[0]) bn_shift[cfg.addr[23:1] % C] <= cfg.data;
                     else             bn_scale[cfg.addr[23:1] % C] <= cfg.data;
        CFG_TKEEP:   keep_oc[cfg.addr % KEPT_OC] <= C_W'(cfg.data);
        default: ;
      endcase
    end
  end

  // ---------------- feature buffer and feature hot storage ----------------
  bank_t fbuf [KT][JOINTS][G];
  hot_t  fhot [KT][JOINTS][G];

  typedef enum logic [1:0] {S_IN, S_COMP, S_WAIT, S_OUT} state_e;
  state_e state;
  logic [T_W-1:0] f_in;        // frames received
  logic [4:0]     v_in;
  logic [T_W-1:0] t_c;         // centre frame of the output being built
  logic [3:0]     slot_in;
  logic           frame_ready; // frames t_c-4 .. t_c+4 are in the buffer

  assign in_ready = (state == S_IN) && (f_in < T_W'(T_IN)) && !frame_ready;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      for (int g = 0; g < G; g++)
        for (int c = 0; c < BANK_W; c++) begin
          fbuf[slot_in][v_in][g][c] <= in_vec[g*BANK_W+c];
          fhot[slot_in][v_in][g][c] <= (in_vec[g*BANK_W+c] != 0);
        end
    end
  end

  // ---------------- job issue ----------------
  logic [4:0]     v_is;
  logic [J_W-1:0] j_is;
  logic [G_W-1:0] g_is;
  logic           issue, all_ready, is_last;
  logic [KT-1:0]  pe_ready, pe_ov, pe_ol, pe_stall;
  acc_t           pe_sum [KT];

  assign all_ready = &pe_ready;
  assign issue     = (state == S_COMP) && all_ready;
  assign is_last   = (g_is == G_W'(G-1));

  for (genvar r = 0; r < KT; r++) begin : g_row
    localparam int unsigned NQ = cav_row_count(r);
    localparam int unsigned ND = (NQ == 6) ? ND6 : ND4;
    localparam hot_t MASK = cav_row_mask(r);
    logic [T_W:0]  f;
    logic          in_clip;
    logic [3:0]    slot;
    bank_t         x;
    hot_t          h;
    data_t         w [NQ];
    assign f      = {1'b0, t_c} + (T_W+1)'(r) - (T_W+1)'(KT/2);
    assign in_clip = ({1'b0, t_c} + (T_W+1)'(r) >= (T_W+1)'(KT/2)) && (f < (T_W+1)'(T_IN));
    assign slot   = 4'((f + (T_W+1)'(KT)) % KT);
    assign x      = in_clip ? fbuf[slot][v_is][g_is] : '0;
    assign h      = in_clip ? fhot[slot][v_is][g_is] : '0;
    for (genvar q = 0; q < NQ; q++) begin : g_w
      assign w[q] = tw[j_is][g_is][r][q];
    end
    dyn_mult_pe #(.NQ(NQ), .ND(ND)) u_pe (
      .clk, .rst_n,
      .in_valid (issue), .in_ready (pe_ready[r]), .in_last (is_last),
      .feat (x), .fhot (h), .wmask (MASK), .wts (w),
      .out_valid (pe_ov[r]), .out_last (pe_ol[r]), .out_sum (pe_sum[r]),
      .dyn_stall (pe_stall[r])
    );
  end

  // ---------------- adder tree and accumulation ----------------
  acc_t           tree;
  logic [3:0]     nlast;
  always_comb begin
    tree = '0; nlast = '0;
    for (int r = 0; r < KT; r++) begin
      if (pe_ov[r]) tree += pe_sum[r];
      nlast += 4'(pe_ol[r]);
    end
  end

  acc_t           acc;
  logic [3:0]     last_cnt;
  logic [4:0]     v_res;
  logic [J_W-1:0] j_res;
  logic           res_done;      // all results of this frame collected
  acc_t           obuf [JOINTS][C];
  logic [C-1:0]   okept;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; last_cnt <= '0; v_res <= '0; j_res <= '0; res_done <= 1'b0;
      okept <= '0;
    end else if (state == S_IN) begin
      acc <= '0; last_cnt <= '0; v_res <= '0; j_res <= '0; res_done <= 1'b0;
    end else if (last_cnt + nlast == 4'(KT)) begin
      obuf[v_res][keep_oc[j_res]]  <= acc + tree;
      okept[keep_oc[j_res]]        <= 1'b1;
      acc <= '0; last_cnt <= '0;
      if (j_res == J_W'(KEPT_OC-1)) begin
        j_res <= '0;
        if (v_res == 5'(JOINTS-1)) res_done <= 1'b1;
        else v_res <= v_res + 1'b1;
      end else j_res <= j_res + 1'b1;
    end else begin
      acc <= acc + tree; last_cnt <= last_cnt + nlast;
    end
  end

  // ---------------- control ----------------
  logic [4:0]     v_out;
  assign frame_ready = (f_in == T_W'(T_IN)) ? (t_c < T_W'(T_IN))
                                            : (f_in > t_c + T_W'(KT/2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN; f_in <= '0; v_in <= '0; slot_in <= '0; t_c <= '0;
      v_is <= '0; j_is <= '0; g_is <= '0; v_out <= '0; out_valid <= 1'b0;
      dyn_stall_cnt <= '0;
    end else begin
      if (|pe_stall) dyn_stall_cnt <= dyn_stall_cnt + 1'b1;
      unique case (state)
        S_IN: begin
          if (in_valid && in_ready) begin
            if (v_in == 5'(JOINTS-1)) begin
              v_in <= '0; f_in <= f_in + 1'b1;
              slot_in <= (slot_in == 4'(KT-1)) ? '0 : slot_in + 1'b1;
            end else v_in <= v_in + 1'b1;
          end else if (frame_ready) begin
            state <= S_COMP; v_is <= '0; j_is <= '0; g_is <= '0;
          end else if (f_in == T_W'(T_IN)) begin
            // clip finished: get ready for the next one
            f_in <= '0; t_c <= '0; slot_in <= '0;
          end
        end
        S_COMP: if (issue) begin
          if (is_last) begin
            g_is <= '0;
            if (j_is == J_W'(KEPT_OC-1)) begin
              j_is <= '0;
              if (v_is == 5'(JOINTS-1)) state <= S_WAIT;
              else v_is <= v_is + 1'b1;
            end else j_is <= j_is + 1'b1;
          end else g_is <= g_is + 1'b1;
        end
        S_WAIT: if (res_done) begin
          state <= S_OUT; v_out <= '0; out_valid <= 1'b1;
        end
        S_OUT: if (out_ready) begin
          if (v_out == 5'(JOINTS-1)) begin
            out_valid <= 1'b0; state <= S_IN; t_c <= t_c + T_W'(STRIDE);
          end else v_out <= v_out + 1'b1;
        end
        default: state <= S_IN;
      endcase
    end
  end

  // ---------------- batch-norm and shortcut ----------------
  logic [3:0] slot_c;
  assign slot_c = 4'(t_c % KT);
  always_comb begin
    for (int c = 0; c < C; c++) begin
      data_t conv;
      logic signed [47:0] bn;
      conv = sat16(48'(obuf[v_out][c] >>> FRAC_W));
      if (okept[c]) bn = ((48'(conv) * 48'(bn_scale[c])) >>> FRAC_W) + 48'(bn_shift[c]);
      else          bn = '0;
      out_vec[c] = sat16(bn + 48'(fbuf[slot_c][v_out][c / BANK_W][c % BANK_W]));
    end
  end

endmodule
