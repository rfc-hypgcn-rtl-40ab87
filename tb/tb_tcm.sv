// tb_tcm: a temporal conv module with 32 channels (two sub-filters), 5 kept
// filters and a 12-frame clip is loaded with random weights and batch-norm
// constants and fed two clips of sparse non-negative features (as the RFC
// junction delivers them). Every output vector is compared with
// tb_ref_pkg::tcm_ref (zero padding, cavity masks, pruned filters carrying
// only the shortcut). Dense joints must make the Dyn-Mult-PEs stall, and the
// stall count must make up the whole difference between the measured compute
// time and one job per cycle.
module tb_tcm;
  import rfc_pkg::*;
  import tb_ref_pkg::*;
  localparam int C = 32, KO = 5, T = 12, STR = 1;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  data_t [C-1:0] in_vec, out_vec;
  logic [31:0] dyn_stall_cnt;
  int checks = 0, failures = 0, cyc = 0;

  tcm #(.C(C), .KEPT_OC(KO), .T_IN(T), .STRIDE(STR), .BLK_ID(4'd1)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  int x[], tw[], keep[], scale[], shift[], y[];
  int tout, n_out = 0, comp_cycles = 0;

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load(input cfg_sel_e sel, input int addr, input int data);
    cfg.we = 1; cfg.sel = sel; cfg.addr = 24'(addr); cfg.data = data_t'(data); cfg.blk = 4'd1;
    @(negedge clk); cfg.we = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (dut.state == 1 || dut.state == 2) comp_cycles++;
    if (out_valid && out_ready) begin
      checks++;
      for (int c = 0; c < C; c++)
        if (int'(out_vec[c]) != y[(n_out % (tout*25))*C + c]) begin
          failures++; $display("out %0d ch %0d: %0d/%0d", n_out, c, int'(out_vec[c]), y[(n_out % (tout*25))*C + c]); break;
        end
      n_out++;
    end
  end

  initial begin
    cfg = '0;
    x = new[T*25*C]; tw = new[KO*(C/16)*9*6]; keep = new[KO]; scale = new[C]; shift = new[C];
    foreach (x[i]) x[i] = ($urandom_range(0, 99) < 50 || (i / C) % 25 == 3) ? $urandom_range(1, 400) : 0;
    foreach (tw[i]) tw[i] = $urandom_range(0, 400) - 200;
    foreach (scale[i]) scale[i] = $urandom_range(128, 384);
    foreach (shift[i]) shift[i] = $urandom_range(0, 200) - 100;
    keep = '{0, 7, 8, 20, 31};
    tcm_ref(x, T, C, KO, STR, tw, keep, scale, shift, y, tout);
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (tw[i]) load(CFG_TWEIGHT, i, tw[i]);
    for (int c = 0; c < C; c++) begin load(CFG_TBN, 2*c, scale[c]); load(CFG_TBN, 2*c+1, shift[c]); end
    foreach (keep[i]) load(CFG_TKEEP, i, keep[i]);
    for (int clip = 0; clip < 2; clip++)
      for (int v = 0; v < T*25; v++) begin
        @(negedge clk);
        for (int c = 0; c < C; c++) in_vec[c] = data_t'(x[v*C + c]);
        in_valid = 1;
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        #1 in_valid = 0;
      end
    while (n_out < 2*tout*25) @(posedge clk);
    checks++;
    if (dyn_stall_cnt == 0) begin failures++; $display("no dynamic stall"); end
    // per output frame: 25*KO*(C/16) jobs, +3 cycles to drain the PEs, collect and flag
    checks++;
    if (comp_cycles != 2*tout*(25*KO*(C/16) + 3) + int'(dyn_stall_cnt)) begin
      failures++; $display("compute cycles %0d, jobs %0d stalls %0d", comp_cycles, 2*tout*25*KO*(C/16), dyn_stall_cnt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
