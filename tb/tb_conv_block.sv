// tb_conv_block: one conv block (16 channels in and out, 5 kept SCM input
// channels, 4 kept TCM filters, 10 frames, temporal stride 2) runs a clip of
// random signed joint vectors. Its output vectors are compared with the
// reference chain SCM -> ReLU -> TCM from tb_ref_pkg, which checks the RFC
// junction inside the block as well.
module tb_conv_block;
  import rfc_pkg::*;
  import tb_ref_pkg::*;
  localparam int IN = 16, OUT = 16, K = 5, KO = 4, T = 10, STR = 2;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, ovf;
  data_t [IN-1:0] in_vec;
  data_t [OUT-1:0] out_vec;
  logic [31:0] dyn_stall_cnt;
  int checks = 0, failures = 0, ovf_seen = 0;

  conv_block #(.IN_CH(IN), .OUT_CH(OUT), .KEPT_CH(K), .KEPT_OC(KO), .T_IN(T), .STRIDE(STR),
               .BRAM_DEPTH(64), .BLK_ID(4'd5)) dut (.*);
  always #5 clk = ~clk;

  int x[], g[], w[], keep[], sscale[], sshift[], s_y[], tw[], tkeep[], tscale[], tshift[], y[];
  int tout, n_out = 0;

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load(input cfg_sel_e sel, input int addr, input int data);
    cfg.we = 1; cfg.sel = sel; cfg.addr = 24'(addr); cfg.data = data_t'(data); cfg.blk = 4'd5;
    @(negedge clk); cfg.we = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (ovf) ovf_seen++;
    if (out_valid && out_ready) begin
      checks++;
      for (int c = 0; c < OUT; c++)
        if (int'(out_vec[c]) != y[n_out*OUT + c]) begin
          failures++; $display("out %0d ch %0d: %0d/%0d", n_out, c, int'(out_vec[c]), y[n_out*OUT + c]); break;
        end
      n_out++;
    end
  end

  initial begin
    cfg = '0;
    x = new[T*25*IN]; g = new[3*25*25]; w = new[3*K*OUT]; sscale = new[OUT]; sshift = new[OUT];
    tw = new[KO*(OUT/16)*9*6]; tscale = new[OUT]; tshift = new[OUT];
    foreach (x[i]) x[i] = $urandom_range(0, 600) - 300;
    foreach (g[i]) g[i] = $urandom_range(0, 120) - 40;
    foreach (w[i]) w[i] = $urandom_range(0, 400) - 200;
    foreach (sscale[i]) begin sscale[i] = $urandom_range(128, 384); sshift[i] = $urandom_range(0, 200) - 100; end
    foreach (tw[i]) tw[i] = $urandom_range(0, 400) - 200;
    foreach (tscale[i]) begin tscale[i] = $urandom_range(128, 384); tshift[i] = $urandom_range(0, 200) - 100; end
    keep = '{0, 3, 9, 12, 14};
    tkeep = '{2, 5, 11, 15};
    scm_ref(x, T, IN, OUT, K, g, w, keep, sscale, sshift, s_y);
    foreach (s_y[i]) s_y[i] = relu(s_y[i]);
    tcm_ref(s_y, T, OUT, KO, STR, tw, tkeep, tscale, tshift, y, tout);
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (g[i]) load(CFG_GRAPH, i, g[i]);
    foreach (w[i]) load(CFG_SWEIGHT, i, w[i]);
    for (int c = 0; c < OUT; c++) begin load(CFG_SBN, 2*c, sscale[c]); load(CFG_SBN, 2*c+1, sshift[c]); end
    foreach (keep[i]) load(CFG_SKEEP, i, keep[i]);
    foreach (tw[i]) load(CFG_TWEIGHT, i, tw[i]);
    for (int c = 0; c < OUT; c++) begin load(CFG_TBN, 2*c, tscale[c]); load(CFG_TBN, 2*c+1, tshift[c]); end
    foreach (tkeep[i]) load(CFG_TKEEP, i, tkeep[i]);
    for (int v = 0; v < T*25; v++) begin
      @(negedge clk);
      for (int c = 0; c < IN; c++) in_vec[c] = data_t'(x[v*IN + c]);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      #1 in_valid = 0;
    end
    while (n_out < tout*25) @(posedge clk);
    checks++; if (ovf_seen != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
