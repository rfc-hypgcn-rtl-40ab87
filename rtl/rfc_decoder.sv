// rfc_decoder: translation of one compact bank back into sparse form.
//
// The compact bank holds its non-zero data in the high slots (slot 15 holds
// the non-zero element of highest channel index, see relu_encoder). The
// decoder walks the data-hot code from the top: stage s takes slots 15-4s ..
// 12-4s and, for each, finds the highest hot bit not yet used, writing the
// slot value to that channel. As the paper describes, it works in four
// pipeline stages with four data per stage; the bit-search circuit inside a
// stage is this design's own.
//
// Timing: one bank per cycle, latency 4 cycles, no back-pressure.
module rfc_decoder
  import rfc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  bank_t in_data,   // compact bank
  input  hot_t  in_hot,
  output logic  out_valid,
  output bank_t out_data   // sparse bank, element i = channel i
);

  logic  v   [MB_NUM+1];
  bank_t cmp [MB_NUM+1];   // compact data carried along
  hot_t  rem [MB_NUM+1];   // hot bits not yet placed
  bank_t dec [MB_NUM+1];   // sparse result being built

  always_comb begin
    v[0] = in_valid; cmp[0] = in_data; rem[0] = in_hot; dec[0] = '0;
  end

  for (genvar s = 0; s < MB_NUM; s++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) v[s+1] <= 1'b0;
      else        v[s+1] <= v[s];
    end
    always_ff @(posedge clk) begin
      hot_t  r;
      bank_t d;
      logic  found;
      r = rem[s]; d = dec[s];
      for (int k = 0; k < MB_W; k++) begin
        found = 1'b0;
        for (int i = BANK_W-1; i >= 0; i--) begin
          if (!found && r[i]) begin
            d[i]  = cmp[s][BANK_W-1-(s*MB_W+k)];
            r[i]  = 1'b0;
            found = 1'b1;
          end
        end
      end
      rem[s+1] <= r; dec[s+1] <= d; cmp[s+1] <= cmp[s];
    end
  end

  assign out_valid = v[MB_NUM];
  assign out_data  = dec[MB_NUM];

endmodule
