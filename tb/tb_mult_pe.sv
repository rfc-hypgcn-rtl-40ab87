// tb_mult_pe: random broadcast values and weights, with random clear and
// enable; the four accumulators are compared with sums kept here.
module tb_mult_pe;
  import rfc_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  data_t x;
  data_t w [4];
  acc_t  acc [4];
  longint ref_acc [4];
  int checks = 0, failures = 0;

  mult_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int d = 0; d < 4; d++) ref_acc[d] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      for (int d = 0; d < 4; d++) begin
        checks++;
        if (acc[d] != acc_t'(ref_acc[d])) begin failures++; $display("pe %0d mismatch", d); end
      end
      en  = ($urandom_range(0, 3) != 0);
      clr = ($urandom_range(0, 15) == 0);
      x   = data_t'($urandom_range(0, 65535));
      for (int d = 0; d < 4; d++) w[d] = data_t'($urandom_range(0, 65535));
      if (en) for (int d = 0; d < 4; d++)
        ref_acc[d] = (clr ? 0 : ref_acc[d]) + longint'(x) * longint'(w[d]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
