// tb_relu_encoder: random banks of varying sparsity through the encoder; the
// ReLU data, hot code, packed slots and mini-bank-hot code are compared with
// values computed here, and the latency must be exactly four cycles. Bank 5
// carries the hot code 0001_1100_0000_0111, which must give mbhot 1100.
module tb_relu_encoder;
  import rfc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  bank_t in_data, out_data;
  hot_t out_hot;
  mbhot_t out_mbhot;
  int checks = 0, failures = 0, cyc = 0;

  relu_encoder dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  bank_t  e_d [$];
  hot_t   e_h [$];
  mbhot_t e_m [$];
  int     e_c [$];

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // checker
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (e_d.size() == 0) failures++;
    else begin
      bank_t d; hot_t h; mbhot_t m; int c0;
      d = e_d.pop_front(); h = e_h.pop_front(); m = e_m.pop_front(); c0 = e_c.pop_front();
      if (out_data !== d || out_hot !== h || out_mbhot !== m || cyc != c0 + 4) begin
        failures++;
        $display("mismatch hot %h/%h mb %b/%b cyc %0d/%0d", out_hot, h, out_mbhot, m, cyc, c0+4);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      bank_t d, cmp; hot_t h; int k; int dens;
      @(negedge clk);
      dens = $urandom_range(0, 100);
      for (int i = 0; i < 16; i++) begin
        d[i] = data_t'($urandom_range(0, 65535));
        if (n == 5) d[i] = (i inside {0,1,2,10,11,12}) ? 16'sd100 : -16'sd3;   // paper's example
        else if ($urandom_range(0, 99) > dens) d[i] = ($urandom_range(0, 1) == 1) ? -data_t'(d[i] & 16'h7fff) : '0;
      end
      // reference: ReLU, hot, pack from the top, mbhot = ceil(n/4) ones from the left
      cmp = '0; k = 0;
      for (int i = 15; i >= 0; i--) begin
        h[i] = d[i] > 0;
        if (h[i]) begin cmp[15-k] = d[i]; k++; end
      end
      if (n == 5 && (h !== 16'b0001_1100_0000_0111 || k != 6)) failures++;   // the code has six ones; it still needs mbhot 1100
      e_d.push_back(cmp); e_h.push_back(h);
      e_m.push_back(k == 0 ? 4'b0000 : k <= 4 ? 4'b1000 : k <= 8 ? 4'b1100 : k <= 12 ? 4'b1110 : 4'b1111);
      e_c.push_back(cyc);
      in_data = d; in_valid = ($urandom_range(0, 3) != 0) || n == 5;
      if (!in_valid) begin e_d.pop_back(); e_h.pop_back(); e_m.pop_back(); e_c.pop_back(); end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++; if (e_d.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
