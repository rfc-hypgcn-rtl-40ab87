// tb_dyn_mult_pe: jobs with random features, feature hot codes and a fixed
// six-weight mask go into a PE with six queues and four multipliers. Each row
// sum must equal the masked dot product computed here, and each job must take
// max(1, ceil(n/4)) cycles where n counts the products left after the mask
// AND. Jobs with more than four products must raise dyn_stall.
module tb_dyn_mult_pe;
  import rfc_pkg::*;
  localparam int NQ = 6, ND = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_last, dyn_stall;
  bank_t feat; hot_t fhot, wmask;
  data_t wts [NQ];
  acc_t out_sum;
  int checks = 0, failures = 0, cyc = 0, stall_cycles = 0, exp_stall = 0;

  dyn_mult_pe #(.NQ(NQ), .ND(ND)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  longint e_sum [$];
  int     e_cyc [$];
  bit     e_last [$];
  int     next_free = 0;

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (dyn_stall) stall_cycles++;
    if (out_valid) begin
      longint s; int c0; bit l;
      checks++;
      s = e_sum.pop_front(); c0 = e_cyc.pop_front(); l = e_last.pop_front();
      if (out_sum != acc_t'(s) || cyc != c0 || out_last != l) begin
        failures++; $display("job mismatch sum %0d/%0d cyc %0d/%0d", out_sum, s, cyc, c0);
      end
    end
  end

  initial begin
    wmask = cav_row_mask(0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      longint s; int q, nv, k, acc_cyc;
      @(negedge clk);
      for (int i = 0; i < 16; i++) begin
        feat[i] = ($urandom_range(0, 99) < 60) ? data_t'($urandom_range(1, 3000)) : '0;
        fhot[i] = feat[i] != 0;
      end
      for (int i = 0; i < NQ; i++) wts[i] = data_t'($urandom_range(0, 65535));
      in_last = $urandom_range(0, 1);
      s = 0; q = 0; nv = 0;
      for (int i = 0; i < 16; i++) if (wmask[i]) begin
        if (fhot[i]) begin s += longint'(feat[i]) * longint'(wts[q]); nv++; end
        q++;
      end
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      acc_cyc = cyc;             // sampled at this edge (cyc updates after)
      k = (nv == 0) ? 1 : (nv + ND - 1) / ND;
      if (k > 1) exp_stall += k - 1;
      e_sum.push_back(s); e_cyc.push_back(acc_cyc + 1 + k); e_last.push_back(in_last);
      #1 in_valid = ($urandom_range(0, 3) == 0) ? 0 : 1;
      if (!in_valid) @(negedge clk);
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    checks++; if (e_sum.size() != 0) failures++;
    checks++; if (stall_cycles != exp_stall || exp_stall == 0) begin failures++; $display("stall %0d/%0d", stall_cycles, exp_stall); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
