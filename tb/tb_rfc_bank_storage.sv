// tb_rfc_bank_storage: writes compact banks of random density into one bank
// storage with small mini-banks (BRAM_DEPTH = 4, so mini-bank depths 16, 12,
// 8 and 4) and reads them back in order, in several fill/drain phases. A
// model here tracks the fill level of every mini-bank, so it knows which
// vectors must be truncated (ovf) and what they read back as: the kept
// mini-banks' data, zeros elsewhere, and the hot code trimmed to match.
module tb_rfc_bank_storage;
  import rfc_pkg::*;
  localparam int BD = 4;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, ovf, rd_valid, full, empty;
  bank_t wr_data, rd_data;
  hot_t wr_hot, rd_hot;
  mbhot_t wr_mbhot;
  int checks = 0, failures = 0, ovf_seen = 0, ovf_exp = 0;

  rfc_bank_storage #(.BRAM_DEPTH(BD)) dut (.*);
  always #5 clk = ~clk;

  int    mcnt [4];
  bank_t e_d [$];
  hot_t  e_h [$];
  int    k_q [$];   // mini-banks used by each stored vector

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && rd_valid) begin
    bank_t d; hot_t h;
    checks++;
    d = e_d.pop_front(); h = e_h.pop_front();
    if (rd_data !== d || rd_hot !== h) begin
      failures++; $display("read mismatch hot %h/%h", rd_hot, h);
    end
  end
  always @(negedge clk) if (rst_n && ovf) ovf_seen++;

  task automatic write_vec(input int nnz);
    bank_t cmp, exp_d; hot_t h, eh; int need, keep, r;
    logic [15:0] perm;
    h = '0;
    while ($countones(h) < nnz) h[$urandom_range(0, 15)] = 1'b1;
    cmp = '0;
    for (int s = 0; s < nnz; s++) cmp[15-s] = data_t'($urandom_range(1, 30000));
    need = (nnz + 3) / 4;
    keep = 0;
    for (int m = 0; m < need; m++) begin
      if (mcnt[m] == (4 - m) * BD) break;
      keep++;
    end
    for (int m = 0; m < keep; m++) mcnt[m]++;
    k_q.push_back(keep);
    if (keep < need) ovf_exp++;
    exp_d = '0;
    for (int s = 0; s < 4*keep; s++) exp_d[15-s] = cmp[15-s];
    eh = '0; r = 0;
    for (int i = 15; i >= 0; i--) if (h[i]) begin eh[i] = (r < 4*keep); r++; end
    e_d.push_back(exp_d); e_h.push_back(eh);
    wr_data = cmp; wr_hot = h;
    wr_mbhot = mbhot_of(nnz);
    wr_en = 1;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic read_vec();
    int n;
    n = k_q.pop_front();
    for (int m = 0; m < n; m++) mcnt[m]--;
    rd_en = 1;
    @(negedge clk); rd_en = 0;
  endtask

  int pending = 0;
  initial begin
    for (int m = 0; m < 4; m++) mcnt[m] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (!empty) failures++;
    // phase 1: sparse vectors fill the store to its vector limit
    for (int n = 0; n < 4*BD; n++) begin write_vec($urandom_range(0, 4)); pending++; end
    checks++; if (!full) failures++;
    checks++; if (ovf_seen != 0) failures++;
    while (pending > 0) begin read_vec(); pending--; end
    @(negedge clk);
    checks++; if (!empty) failures++;
    // phase 2: dense vectors overflow the short tail mini-banks
    for (int n = 0; n < 10; n++) begin write_vec($urandom_range(13, 16)); pending++; end
    // phase 3: mixed traffic with interleaved reads
    for (int n = 0; n < 300; n++) begin
      if (pending > 0 && ($urandom_range(0, 1) == 1 || pending == 4*BD)) begin
        read_vec(); pending--;
      end else begin
        write_vec($urandom_range(0, 16)); pending++;
      end
    end
    while (pending > 0) begin read_vec(); pending--; end
    repeat (3) @(negedge clk);
    checks++; if (ovf_seen != ovf_exp || ovf_exp == 0) begin failures++; $display("ovf %0d/%0d", ovf_seen, ovf_exp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
