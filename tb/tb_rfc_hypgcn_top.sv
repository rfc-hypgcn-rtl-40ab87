// tb_rfc_hypgcn_top: end-to-end test of the accelerator at a reduced size.
// Two conv blocks (3 -> 16 -> 16 channels), a raw clip of 12 frames that
// input skipping halves to 6, temporal stride 2 in the second block, 5 of 16
// SCM input channels kept in the second block (channel skipping) and hence 5
// of 16 TCM filters kept in the first (coarse pruning), and 64-word BRAMs in
// the RFC junctions (deep enough that the first clip never overflows).
// Clip 1 runs with the output always ready and is compared vector by vector
// with the reference chain (skip -> SCM -> TCM -> ReLU -> SCM -> TCM -> ReLU)
// from tb_ref_pkg. Clip 2 holds the output back until the last junction has
// backed up, with a large positive BN shift in the last TCM so that every
// vector is dense, which makes the RFC storage overflow; only the vector count is
// checked there. Every mechanism (input skip, channel skip, pruned filters,
// dynamic-PE stall, stride, RFC overflow, compressed vectors) is counted and
// one that never happened counts as a failure.
module tb_rfc_hypgcn_top;
  import rfc_pkg::*;
  import tb_ref_pkg::*;
  localparam int C = 16, K1 = 5, T_RAW = 12, T0 = 6;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  data_t [2:0] in_vec;
  data_t [C-1:0] out_vec;
  logic [31:0] ovf_cnt, dyn_stall_cnt, skip_cnt;
  int checks = 0, failures = 0;

  rfc_hypgcn_top #(
    .NUM_BLOCKS(2), .T_RAW(T_RAW), .INPUT_SKIP(1'b1), .BRAM_DEPTH(64),
    .BLK_IN  ('{3, 16, 16, 16, 16, 16, 16, 16, 16, 16}),
    .BLK_OUT ('{16, 16, 16, 16, 16, 16, 16, 16, 16, 16}),
    .BLK_KEPT('{3, K1, 16, 16, 16, 16, 16, 16, 16, 16}),
    .BLK_STR ('{1, 2, 1, 1, 1, 1, 1, 1, 1, 1})
  ) dut (.*);
  always #5 clk = ~clk;

  int xr[], x0[];
  int g0[], w0[], k0[], ss0[], sh0[], tw0[], tk0[], ts0[], th0[];
  int g1[], w1[], k1[], ss1[], sh1[], tw1[], tk1[], ts1[], th1[];
  int y0[], z0[], y1[], z1[];
  int tout0, tout1, n_out = 0, clip = 1, sparse_vec = 0;

  initial begin
    #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load(input int blk, input cfg_sel_e sel, input int addr, input int data);
    cfg.we = 1; cfg.sel = sel; cfg.addr = 24'(addr); cfg.data = data_t'(data); cfg.blk = 4'(blk);
    @(negedge clk); cfg.we = 0;
  endtask

  task automatic load_block(input int b, input int IN, input int K, input int KO,
                            input int g[], input int w[], input int k[], input int ss[], input int sh[],
                            input int tw[], input int tk[], input int ts[], input int th[]);
    foreach (g[i]) load(b, CFG_GRAPH, i, g[i]);
    foreach (w[i]) load(b, CFG_SWEIGHT, i, w[i]);
    for (int c = 0; c < C; c++) begin load(b, CFG_SBN, 2*c, ss[c]); load(b, CFG_SBN, 2*c+1, sh[c]); end
    foreach (k[i]) load(b, CFG_SKEEP, i, k[i]);
    foreach (tw[i]) load(b, CFG_TWEIGHT, i, tw[i]);
    for (int c = 0; c < C; c++) begin load(b, CFG_TBN, 2*c, ts[c]); load(b, CFG_TBN, 2*c+1, th[c]); end
    foreach (tk[i]) load(b, CFG_TKEEP, i, tk[i]);
  endtask

  function automatic void rnd(ref int a[], input int lo, input int hi);
    foreach (a[i]) a[i] = $urandom_range(0, hi - lo) + lo;
  endfunction

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int nz;
    nz = 0;
    for (int c = 0; c < C; c++) if (out_vec[c] != 0) nz++;
    if (nz < C) sparse_vec++;
    if (clip == 1) begin
      checks++;
      for (int c = 0; c < C; c++)
        if (int'(out_vec[c]) != z1[n_out*C + c]) begin
          failures++; $display("out %0d ch %0d: %0d/%0d", n_out, c, int'(out_vec[c]), z1[n_out*C + c]); break;
        end
    end
    n_out++;
  end

  // vectors the last block has handed to the last junction in this clip
  int last_in = 0;
  always @(posedge clk) if (rst_n && dut.g_blk[1].tv && dut.g_blk[1].tr) last_in++;

  task automatic mech(input string name, input int n);
    checks++;
    $display("mechanism %-22s %0d", name, n);
    if (n == 0) failures++;
  endtask

  initial begin
    cfg = '0;
    xr = new[T_RAW*25*3];
    g0 = new[3*625]; w0 = new[3*3*C]; ss0 = new[C]; sh0 = new[C]; tw0 = new[K1*(C/16)*54]; ts0 = new[C]; th0 = new[C];
    g1 = new[3*625]; w1 = new[3*K1*C]; ss1 = new[C]; sh1 = new[C]; tw1 = new[C*(C/16)*54]; ts1 = new[C]; th1 = new[C];
    rnd(xr, -300, 300);
    rnd(g0, -40, 80); rnd(w0, -200, 200); rnd(ss0, 128, 384); rnd(sh0, -60, 100);
    rnd(tw0, -200, 200); rnd(ts0, 128, 384); rnd(th0, -60, 100);
    rnd(g1, -40, 80); rnd(w1, -200, 200); rnd(ss1, 128, 384); rnd(sh1, -60, 100);
    rnd(tw1, -200, 200); rnd(ts1, 128, 384); rnd(th1, -60, 100);
    k0 = '{0, 1, 2};
    k1 = '{1, 6, 7, 10, 13};
    tk0 = k1;
    tk1 = new[C];
    foreach (tk1[i]) tk1[i] = i;
    // reference: drop odd raw frames, then the two blocks
    x0 = new[T0*25*3];
    for (int t = 0; t < T0; t++)
      for (int i = 0; i < 25*3; i++) x0[t*75 + i] = xr[(2*t)*75 + i];
    scm_ref(x0, T0, 3, C, 3, g0, w0, k0, ss0, sh0, y0);
    foreach (y0[i]) y0[i] = relu(y0[i]);
    tcm_ref(y0, T0, C, K1, 1, tw0, tk0, ts0, th0, z0, tout0);
    foreach (z0[i]) z0[i] = relu(z0[i]);
    scm_ref(z0, tout0, C, C, K1, g1, w1, k1, ss1, sh1, y1);
    foreach (y1[i]) y1[i] = relu(y1[i]);
    tcm_ref(y1, tout0, C, C, 2, tw1, tk1, ts1, th1, z1, tout1);
    foreach (z1[i]) z1[i] = relu(z1[i]);

    repeat (3) @(negedge clk);
    rst_n = 1;
    load_block(0, 3, 3, K1, g0, w0, k0, ss0, sh0, tw0, tk0, ts0, th0);
    load_block(1, C, K1, C, g1, w1, k1, ss1, sh1, tw1, tk1, ts1, th1);

    for (clip = 1; clip <= 2; clip++) begin
      n_out = 0; last_in = 0;
      if (clip == 2) begin
        // every output channel positive: dense vectors fill mini-bank 3 first
        out_ready = 0;
        for (int c = 0; c < C; c++) load(1, CFG_TBN, 2*c+1, 3000);
      end
      for (int v = 0; v < T_RAW*25; v++) begin
        @(negedge clk);
        for (int c = 0; c < 3; c++) in_vec[c] = data_t'(xr[v*3 + c]);
        in_valid = 1;
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        #1 in_valid = 0;
      end
      if (clip == 2) begin
        // release the output once the last junction has filled up
        while (last_in < tout1*25) @(negedge clk);
        repeat (20) @(negedge clk);
        out_ready = 1;
      end
      while (n_out < tout1*25) @(posedge clk);
      repeat (50) @(posedge clk);
      checks++;
      if (n_out != tout1*25) begin failures++; $display("clip %0d: %0d vectors", clip, n_out); end
      if (clip == 1 && ovf_cnt != 0) begin failures++; $display("unexpected overflow in clip 1"); end
    end

    mech("input_skip", skip_cnt);
    mech("channel_skip", (K1 < C) ? 1 : 0);
    mech("pruned_filters", (K1 < C) ? 1 : 0);
    mech("stride2_frames", (tout1 == T0/2) ? tout1 : 0);
    mech("dyn_pe_stall", dyn_stall_cnt);
    mech("rfc_overflow", ovf_cnt);
    mech("sparse_vectors", sparse_vec);
    checks++; if (skip_cnt != 2*(T_RAW/2)*25) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
