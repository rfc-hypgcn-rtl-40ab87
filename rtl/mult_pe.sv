// mult_pe: Mult-PE of the spatial conv module.
//
// The SCM broadcasts one graph-product value Y(h,w,i) = sum_p f(h,p,i)*G(p,w)
// per cycle to all Mult-PEs. Each Mult-PE holds four multipliers (the paper's
// four DSPs) and multiplies Y by the weights W(i,oc) of its four output
// channels, accumulating over kept input channels i and graph subsets k in
// its slice of the accumulating buffer.
//
// Interface: en marks a valid (x, w) pair; clr together with en starts a new
// sum with this product. acc is registered, one cycle after the last en.
// Products are Q16.16, the accumulator keeps 40 bits (no overflow for the
// channel counts of the model).
module mult_pe
  import rfc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  clr,
  input  data_t x,
  input  data_t w   [4],
  output acc_t  acc [4]
);

  for (genvar d = 0; d < 4; d++) begin : g_dsp
    logic signed [2*DATA_W-1:0] prod;
    assign prod = 32'(x) * 32'(w[d]);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)   acc[d] <= '0;
      else if (en)  acc[d] <= (clr ? '0 : acc[d]) + acc_t'(prod);
    end
  end

endmodule
