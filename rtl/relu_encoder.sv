// relu_encoder: ReLU and runtime sparse encoding of one 16-channel bank.
//
// The paper's RFC encoder runs ReLU on a bank, produces a 16-bit data-hot code
// (one bit per positive element), packs the kept elements into the high slots
// and pads the rest with zero, and finally derives the mini-bank-hot code
// (mbhot): one bit per mini-bank of four slots that holds data, counted from
// the top. Example from the paper: hot 0001_1100_0000_0111 (5 non-zero) gives
// mbhot 1100.
//
// Packing order (this design's choice): elements are scanned from channel 15
// down to channel 0 and the k-th non-zero one goes to slot 15-k.
//
// Pipeline: four register stages (ReLU+hot, rank, scatter, mbhot), one bank per
// cycle, latency 4 cycles, matching the four-cycle encoding the paper states.
// No back-pressure: out_valid follows in_valid four cycles later.
module relu_encoder
  import rfc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  bank_t  in_data,     // pre-activation bank
  output logic   out_valid,
  output bank_t  out_data,    // compact bank, kept data in the high slots
  output hot_t   out_hot,
  output mbhot_t out_mbhot
);

  // stage 1: ReLU and hot code
  logic  v1; bank_t d1; hot_t h1;
  // stage 2: rank of each element among the non-zero ones, counted from the top
  logic  v2; bank_t d2; hot_t h2; logic [4:0] rank2 [BANK_W]; logic [4:0] cnt2;
  // stage 3: scatter into slots
  logic  v3; bank_t d3; hot_t h3; logic [4:0] cnt3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= in_valid; v2 <= v1; v3 <= v2; out_valid <= v3;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < BANK_W; i++) begin
      h1[i] <= (in_data[i] > 0);
      d1[i] <= (in_data[i] > 0) ? in_data[i] : '0;
    end
  end

  always_ff @(posedge clk) begin
    logic [4:0] r;
    r = '0;
    for (int i = BANK_W-1; i >= 0; i--) begin
      rank2[i] <= r;
      r = r + 5'(h1[i]);
    end
    cnt2 <= r;
    d2 <= d1; h2 <= h1;
  end

  always_ff @(posedge clk) begin
    bank_t s;
    s = '0;
    for (int i = 0; i < BANK_W; i++)
      if (h2[i]) s[BANK_W-1-rank2[i]] = d2[i];
    d3 <= s; h3 <= h2; cnt3 <= cnt2;
  end

  always_ff @(posedge clk) begin
    out_data  <= d3;
    out_hot   <= h3;
    out_mbhot <= mbhot_of(int'(cnt3));
  end

endmodule
