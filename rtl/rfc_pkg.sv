// rfc_pkg: types and constants shared by the whole accelerator.
//
// Data are 16-bit two's-complement fixed point with 8 fraction bits (Q8.8),
// the format the paper quantises the pruned model to. Features move between
// layers as vectors across channels; a vector is cut into banks of 16
// channels, which is the grain of ReLU, encoding, storage and decoding. A bank
// is split into four mini-banks of four data each. The temporal kernel has 9
// taps, the graph has 25 joints and 3 neighbour subsets.
//
// CAV70_1 is the recurrent fine-grained cavity pattern used by the temporal
// convolution: bit j of row r says whether tap r of the j-th kernel in the
// loop of eight is kept. The paper only gives its statistics (3 rows kept 3
// times, 6 rows kept 2 times, about 70% pruned); the exact cells here are this
// design's own choice with those statistics. Input channel c uses kernel
// column c mod 8, so a 16-channel sub-filter row keeps 6 or 4 weights.
package rfc_pkg;

  localparam int unsigned DATA_W   = 16;   // Q8.8
  localparam int unsigned FRAC_W   = 8;
  localparam int unsigned BANK_W   = 16;   // data per bank
  localparam int unsigned MB_NUM   = 4;    // mini-banks per bank
  localparam int unsigned MB_W     = 4;    // data per mini-bank
  localparam int unsigned JOINTS   = 25;
  localparam int unsigned KT       = 9;    // temporal kernel taps
  localparam int unsigned NSUB     = 3;    // graph subsets K_v
  localparam int unsigned CAV_LOOP = 8;
  localparam int unsigned MAXQ     = 6;    // largest number of kept weights in a sub-filter row

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [2*DATA_W+7:0] acc_t;      // Q24.16 accumulator

  // Targets of the on-chip ROM load port (parameters, graph, masks' companions).
  typedef enum logic [2:0] {
    CFG_GRAPH    = 3'd0,   // SCM graph ROM  G_k = A_k + B_k, addr = (k*25 + p)*25 + w
    CFG_SWEIGHT  = 3'd1,   // SCM weight ROM, addr = (k*KEPT + i)*OUT + oc
    CFG_SBN      = 3'd2,   // SCM batch-norm, addr = 2*oc (+1 for shift)
    CFG_SKEEP    = 3'd3,   // SCM kept input channel list, addr = i
    CFG_TWEIGHT  = 3'd4,   // TCM kept weights, addr = ((j*G + g)*9 + r)*6 + q
    CFG_TBN      = 3'd5,   // TCM batch-norm, addr = 2*oc (+1 for shift)
    CFG_TKEEP    = 3'd6    // TCM kept filter list, addr = j
  } cfg_sel_e;

  typedef struct packed {
    logic        we;
    logic [3:0]  blk;      // conv block index
    cfg_sel_e    sel;
    logic [23:0] addr;
    data_t       data;
  } cfg_t;
  typedef data_t [BANK_W-1:0]        bank_t;     // element i = channel i of the bank
  typedef logic [BANK_W-1:0]         hot_t;      // bit i: element i is non-zero
  typedef logic [MB_NUM-1:0]         mbhot_t;    // bit 3: mini-bank 0 (slots 15..12) used

  // Cavity pattern cav-70-1 style: row r, bit j (kernel j of the loop).
  localparam logic [CAV_LOOP-1:0] CAV70_1 [KT] = '{
    8'b1001_0010, 8'b0100_0100, 8'b0010_1001,
    8'b1001_0000, 8'b0100_1000, 8'b0010_0101,
    8'b1000_0010, 8'b0101_0000, 8'b0010_0100
  };

  // 16-bit weight mask of tap r for a 16-channel sub-filter (channel c uses column c mod 8).
  function automatic hot_t cav_row_mask(input int unsigned r);
    hot_t m;
    for (int c = 0; c < BANK_W; c++) m[c] = CAV70_1[r][c % CAV_LOOP];
    return m;
  endfunction

  // Number of kept weights in row r of a 16-channel sub-filter (6 or 4).
  function automatic int unsigned cav_row_count(input int unsigned r);
    int unsigned n;
    n = 0;
    for (int c = 0; c < BANK_W; c++) n += int'(CAV70_1[r][c % CAV_LOOP]);
    return n;
  endfunction

  // Saturate a wide signed value to the Q8.8 range.
  function automatic data_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return data_t'(16'sh7fff);
    else if (v < -48'sd32768) return data_t'(16'sh8000);
    else                      return data_t'(v[15:0]);
  endfunction

  // Number of mini-banks a bank with n non-zero data needs (ceil(n/4)) as mbhot.
  function automatic mbhot_t mbhot_of(input int unsigned n);
    mbhot_t m;
    for (int k = 0; k < MB_NUM; k++) m[MB_NUM-1-k] = (n > k*MB_W);
    return m;
  endfunction

endpackage
