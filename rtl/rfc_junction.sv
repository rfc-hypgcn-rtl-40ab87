// rfc_junction: runtime sparse feature compression between two layers.
//
// A C-channel vector from the producing layer is split into NB = C/16 banks.
// Each bank has its own ReLU encoder, compact bank storage and decoder (the N
// parallel banks of the paper's storage figure), all working in lockstep, so
// one whole vector is encoded, stored, loaded and decoded per cycle. The
// consumer receives the sparse (ReLU-ed) vector back in the original channel
// order, first in first out.
//
// Flow control (this design's own): in_ready is high while fewer than
// 4*BRAM_DEPTH vectors are stored or in the encoder. A vector is loaded from
// storage only when the 8-entry output FIFO has room for it and for everything
// still in the 5-cycle load/decode pipeline. ovf pulses when any bank had to
// truncate a vector because a mini-bank was full.
//
// Latency: in_valid to out_valid is 4 (encode) + 1 (store) + 1 (load) + 4
// (decode) + 1 (FIFO) = 11 cycles when the junction is empty.
module rfc_junction
  import rfc_pkg::*;
#(
  parameter int unsigned C          = 64,
  parameter int unsigned BRAM_DEPTH = 512
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  data_t [C-1:0]  in_vec,
  output logic           out_valid,
  input  logic           out_ready,
  output data_t [C-1:0]  out_vec,
  output logic           ovf
);

  localparam int unsigned NB        = (C + BANK_W - 1) / BANK_W;
  localparam int unsigned VEC_DEPTH = MB_NUM * BRAM_DEPTH;
  localparam int unsigned OCC_W     = $clog2(VEC_DEPTH + 1);
  localparam int unsigned FIFO_D    = 8;

  logic [OCC_W-1:0] occ;      // vectors accepted and not yet loaded
  logic [OCC_W-1:0] stored;   // vectors in storage
  logic [3:0]       pend;     // vectors loaded and not yet popped from the FIFO
  logic             acc_in, enc_v, rd_en, dec_v;
  logic [NB-1:0]    enc_vb, dec_vb, ovf_b;

  assign in_ready = (occ < OCC_W'(VEC_DEPTH));
  assign acc_in   = in_valid && in_ready;
  assign rd_en    = (stored != '0) && (pend < 4'(FIFO_D));
  assign enc_v    = enc_vb[0];
  assign dec_v    = dec_vb[0];
  assign ovf      = |ovf_b;

  data_t [NB*BANK_W-1:0] in_pad, dec_pad;
  always_comb begin
    in_pad = '0;
    for (int c = 0; c < C; c++) in_pad[c] = in_vec[c];
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    bank_t  e_d, s_d, d_d;
    hot_t   e_h, s_h;
    mbhot_t e_m;
    logic   s_v, full_b, empty_b;

    relu_encoder u_enc (
      .clk, .rst_n, .in_valid(acc_in), .in_data(in_pad[b*BANK_W +: BANK_W]),
      .out_valid(enc_vb[b]), .out_data(e_d), .out_hot(e_h), .out_mbhot(e_m)
    );
    rfc_bank_storage #(.BRAM_DEPTH(BRAM_DEPTH)) u_store (
      .clk, .rst_n,
      .wr_en(enc_vb[b]), .wr_data(e_d), .wr_hot(e_h), .wr_mbhot(e_m), .ovf(ovf_b[b]),
      .rd_en(rd_en), .rd_valid(s_v), .rd_data(s_d), .rd_hot(s_h),
      .full(full_b), .empty(empty_b)
    );
    rfc_decoder u_dec (
      .clk, .rst_n, .in_valid(s_v), .in_data(s_d), .in_hot(s_h),
      .out_valid(dec_vb[b]), .out_data(d_d)
    );
    assign dec_pad[b*BANK_W +: BANK_W] = d_d;
  end

  // output FIFO
  data_t [C-1:0] fifo [FIFO_D];
  logic [2:0] fwp, frp;
  logic [3:0] fcnt;
  logic       pop;
  assign out_valid = (fcnt != '0);
  assign out_vec   = fifo[frp];
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (dec_v) fifo[fwp] <= dec_pad[C-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occ <= '0; stored <= '0; pend <= '0; fwp <= '0; frp <= '0; fcnt <= '0;
    end else begin
      occ    <= occ + OCC_W'(acc_in) - OCC_W'(rd_en);
      stored <= stored + OCC_W'(enc_v) - OCC_W'(rd_en);
      pend   <= pend + 4'(rd_en) - 4'(pop);
      if (dec_v) fwp <= fwp + 1'b1;
      if (pop)   frp <= frp + 1'b1;
      fcnt   <= fcnt + 4'(dec_v) - 4'(pop);
    end
  end

  a_fifo_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(dec_v && fcnt == 4'(FIFO_D) && !pop));

endmodule
