// tb_rfc_decoder: random sparse banks are packed here (kept data in the high
// slots, highest channel first), sent through the decoder, and the output must
// equal the original sparse bank exactly four cycles later.
module tb_rfc_decoder;
  import rfc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  bank_t in_data, out_data;
  hot_t in_hot;
  int checks = 0, failures = 0, cyc = 0;

  rfc_decoder dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  bank_t e_d [$];
  int    e_c [$];

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    bank_t d; int c0;
    checks++;
    if (e_d.size() == 0) failures++;
    else begin
      d = e_d.pop_front(); c0 = e_c.pop_front();
      if (out_data !== d || cyc != c0 + 4) begin
        failures++; $display("mismatch at cyc %0d", cyc);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      bank_t d, cmp; hot_t h; int k, dens;
      @(negedge clk);
      dens = (n < 20) ? 100 : $urandom_range(0, 100);
      cmp = '0; k = 0;
      for (int i = 15; i >= 0; i--) begin
        d[i] = ($urandom_range(0, 99) < dens) ? data_t'($urandom_range(1, 32767)) : '0;
        h[i] = d[i] != 0;
        if (h[i]) begin cmp[15-k] = d[i]; k++; end
      end
      // padding slots carry garbage-free zeros in the design; put noise here to
      // check the decoder ignores slots beyond the hot count
      for (int s = 0; s < 16 - k; s++) cmp[s] = data_t'($urandom_range(0, 65535));
      in_valid = ($urandom_range(0, 4) != 0);
      in_data = cmp; in_hot = h;
      if (in_valid) begin e_d.push_back(d); e_c.push_back(cyc); end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++; if (e_d.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
