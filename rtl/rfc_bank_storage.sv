// rfc_bank_storage: compact storage of one 16-channel bank (one column of the
// RFC storage).
//
// Four mini-banks, each four data wide, hold the compact banks written by the
// encoder. Mini-bank m is enabled only when mbhot bit (3-m) is set, so a
// sparse vector occupies only the head mini-banks. Each mini-bank has its own
// address pointer (Pt) that advances only when it is written or read, so no
// random access is needed and both a write and a read take one cycle. The
// data-hot and mbhot codes of every vector are kept in their own storage,
// indexed by vector. On a read, disabled mini-banks output zero.
//
// Depths: mini-bank m is (4-m) BRAMs deep, as drawn in the paper's storage
// figure (4, 3, 2 and 1 BRAM), so a bank keeps up to 4*BRAM_DEPTH vectors and
// uses 10/16 of the memory of a plain sparse store. BRAM_DEPTH (512 words of
// 64 bits, one 36 Kb block) is an assumption.
//
// Overflow (this design's choice; the paper only says depths are chosen from
// the sparsity statistics so that vectors are rarely truncated): if a vector
// needs a mini-bank that is full, that mini-bank and those after it are not
// written, the vector's mbhot and hot codes are trimmed to what was stored,
// and ovf pulses. The dropped data read back as zero.
//
// The store is first-in first-out. wr_en must not be asserted while full,
// rd_en not while empty (checked by assertions). Read data appear one cycle
// after rd_en, with rd_valid.
module rfc_bank_storage
  import rfc_pkg::*;
#(
  parameter int unsigned BRAM_DEPTH = 512
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   wr_en,
  input  bank_t  wr_data,
  input  hot_t   wr_hot,
  input  mbhot_t wr_mbhot,
  output logic   ovf,
  input  logic   rd_en,
  output logic   rd_valid,
  output bank_t  rd_data,
  output hot_t   rd_hot,
  output logic   full,
  output logic   empty
);

  localparam int unsigned VEC_DEPTH = MB_NUM * BRAM_DEPTH;
  localparam int unsigned VA_W      = $clog2(VEC_DEPTH + 1);

  // vector-indexed hot storage
  hot_t   hot_mem   [VEC_DEPTH];
  mbhot_t mbhot_mem [VEC_DEPTH];
  logic [VA_W-1:0] vwr, vrd, vcnt;

  // mini-banks whose write is allowed (not full) and the trimmed codes
  logic [MB_NUM-1:0] mb_full;
  mbhot_t  wr_mb_eff;
  hot_t    wr_hot_eff;

  always_comb begin
    logic stop;
    int unsigned keep_n, r;
    stop = 1'b0; keep_n = 0;
    for (int m = 0; m < MB_NUM; m++) begin
      if (wr_mbhot[MB_NUM-1-m] && mb_full[m]) stop = 1'b1;
      wr_mb_eff[MB_NUM-1-m] = wr_mbhot[MB_NUM-1-m] && !stop;
      if (wr_mb_eff[MB_NUM-1-m]) keep_n = (m + 1) * MB_W;
    end
    // keep only the hot bits of data that were stored
    r = 0;
    for (int i = BANK_W-1; i >= 0; i--) begin
      wr_hot_eff[i] = wr_hot[i] && (r < keep_n);
      if (wr_hot[i]) r++;
    end
  end

  assign ovf = wr_en && (wr_mb_eff != wr_mbhot);

  mbhot_t rd_mb_q;
  logic [MB_NUM*MB_W*DATA_W-1:0] rd_raw;

  for (genvar m = 0; m < MB_NUM; m++) begin : g_mb
    localparam int unsigned D   = (MB_NUM - m) * BRAM_DEPTH;
    localparam int unsigned A_W = $clog2(D);
    logic [MB_W*DATA_W-1:0] mem [D];
    logic [A_W-1:0] wpt, rpt;
    logic [A_W:0]   cnt;
    logic we, re;

    assign mb_full[m] = (cnt == (A_W+1)'(D));
    assign we = wr_en && wr_mb_eff[MB_NUM-1-m];
    assign re = rd_en && mbhot_mem[vrd[VA_W-2:0]][MB_NUM-1-m];

    always_ff @(posedge clk) begin
      if (we) mem[wpt] <= wr_data[BANK_W-1-m*MB_W -: MB_W];
      if (re) rd_raw[(MB_NUM-m)*MB_W*DATA_W-1 -: MB_W*DATA_W] <= mem[rpt];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wpt <= '0; rpt <= '0; cnt <= '0;
      end else begin
        if (we) wpt <= (wpt == A_W'(D-1)) ? '0 : wpt + 1'b1;
        if (re) rpt <= (rpt == A_W'(D-1)) ? '0 : rpt + 1'b1;
        cnt <= cnt + (A_W+1)'(we) - (A_W+1)'(re);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      hot_mem[vwr[VA_W-2:0]]   <= wr_hot_eff;
      mbhot_mem[vwr[VA_W-2:0]] <= wr_mb_eff;
    end
    if (rd_en) begin
      rd_hot  <= hot_mem[vrd[VA_W-2:0]];
      rd_mb_q <= mbhot_mem[vrd[VA_W-2:0]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vwr <= '0; vrd <= '0; vcnt <= '0; rd_valid <= 1'b0;
    end else begin
      if (wr_en) vwr <= (vwr == VA_W'(VEC_DEPTH-1)) ? '0 : vwr + 1'b1;
      if (rd_en) vrd <= (vrd == VA_W'(VEC_DEPTH-1)) ? '0 : vrd + 1'b1;
      vcnt <= vcnt + VA_W'(wr_en) - VA_W'(rd_en);
      rd_valid <= rd_en;
    end
  end

  // disabled mini-banks read as zero
  always_comb begin
    for (int m = 0; m < MB_NUM; m++)
      for (int k = 0; k < MB_W; k++)
        rd_data[BANK_W-1-m*MB_W-k] = rd_mb_q[MB_NUM-1-m]
            ? data_t'(rd_raw[(MB_NUM-m)*MB_W*DATA_W-1-k*DATA_W -: DATA_W]) : '0;
  end

  assign full  = (vcnt == VA_W'(VEC_DEPTH));
  assign empty = (vcnt == '0);

  a_no_write_full: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_read_empty: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));

endmodule
