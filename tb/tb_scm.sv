// tb_scm: a small spatial conv module (16 input and output channels, 5 kept
// channels) is loaded with random graphs, weights, batch-norm constants and a
// random kept-channel list, fed two frames of random joint vectors, and its
// 50 output vectors are compared with tb_ref_pkg::scm_ref. The time from the
// first input to the last output of a frame must be 25 + 25*(3*KEPT+3) cycles.
module tb_scm;
  import rfc_pkg::*;
  import tb_ref_pkg::*;
  localparam int IN = 16, OUT = 16, K = 5, T = 2;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  data_t [IN-1:0] in_vec;
  data_t [OUT-1:0] out_vec;
  int checks = 0, failures = 0, cyc = 0;

  scm #(.IN_CH(IN), .OUT_CH(OUT), .KEPT_CH(K), .BLK_ID(4'd3)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  int x[], g[], w[], keep[], scale[], shift[], y[];
  int n_out = 0, t_first = -1, t_last = 0;

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load(input cfg_sel_e sel, input int addr, input int data, input int blk = 3);
    cfg.we = 1; cfg.sel = sel; cfg.addr = 24'(addr); cfg.data = data_t'(data); cfg.blk = 4'(blk);
    @(negedge clk); cfg.we = 0;
  endtask

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    for (int c = 0; c < OUT; c++)
      if (int'(out_vec[c]) != y[n_out*OUT + c]) begin
        failures++; $display("out %0d ch %0d: %0d/%0d", n_out, c, int'(out_vec[c]), y[n_out*OUT + c]); break;
      end
    if (n_out == 24) t_last = cyc;
    n_out++;
  end

  initial begin
    cfg = '0;
    x = new[T*25*IN]; g = new[3*25*25]; w = new[3*K*OUT]; keep = new[K];
    scale = new[OUT]; shift = new[OUT];
    foreach (x[i]) x[i] = $urandom_range(0, 1) ? $urandom_range(0, 600) - 300 : 0;
    foreach (g[i]) g[i] = $urandom_range(0, 200) - 100;
    foreach (w[i]) w[i] = $urandom_range(0, 400) - 200;
    foreach (scale[i]) scale[i] = $urandom_range(128, 384);
    foreach (shift[i]) shift[i] = $urandom_range(0, 200) - 100;
    keep = '{1, 4, 6, 11, 15};
    scm_ref(x, T, IN, OUT, K, g, w, keep, scale, shift, y);
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (g[i]) load(CFG_GRAPH, i, g[i]);
    foreach (w[i]) load(CFG_SWEIGHT, i, w[i]);
    for (int c = 0; c < OUT; c++) begin load(CFG_SBN, 2*c, scale[c]); load(CFG_SBN, 2*c+1, shift[c]); end
    foreach (keep[i]) load(CFG_SKEEP, i, keep[i]);
    load(CFG_SKEEP, 0, 9, 2);           // another block's write must be ignored
    for (int v = 0; v < T*25; v++) begin
      @(negedge clk);
      for (int c = 0; c < IN; c++) in_vec[c] = data_t'(x[v*IN + c]);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      if (v == 0) t_first = cyc;
      #1 in_valid = 0;
    end
    while (n_out < T*25) @(posedge clk);
    checks++;
    if (t_last - t_first != 25 + 25*(3*K+3) - 1) begin
      failures++; $display("frame time %0d, expected %0d", t_last - t_first, 25 + 25*(3*K+3) - 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
