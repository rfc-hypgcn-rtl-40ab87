// tb_rfc_junction: random 32-channel vectors (two banks) go in, and the
// ReLU of each must come out in order. The consumer is randomly stalled, and
// once held off long enough to fill the store (BRAM_DEPTH = 4, 16 vectors)
// with sparse vectors, so in_ready must drop and nothing may be lost. The
// empty-junction latency must be 11 cycles.
module tb_rfc_junction;
  import rfc_pkg::*;
  localparam int C = 32;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, ovf;
  data_t [C-1:0] in_vec, out_vec;
  int checks = 0, failures = 0, cyc = 0, ovf_seen = 0, full_seen = 0;

  rfc_junction #(.C(C), .BRAM_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  data_t [C-1:0] exp_q [$];
  int first_in = -1, first_out = -1;

  initial begin
    #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      data_t [C-1:0] e;
      checks++;
      if (first_out < 0) first_out = cyc;
      e = exp_q.pop_front();
      if (out_vec !== e) begin failures++; $display("mismatch at %0d ovf so far %0d", cyc, ovf_seen); end
    end
    if (ovf) ovf_seen++;
    if (!in_ready) full_seen++;
  end

  task automatic send(input int dens);
    data_t [C-1:0] v, e;
    for (int c = 0; c < C; c++) begin
      v[c] = ($urandom_range(0, 99) < dens) ? data_t'($urandom_range(1, 30000)) : -data_t'($urandom_range(0, 30000));
      e[c] = (v[c] > 0) ? v[c] : '0;
    end
    in_vec = v; in_valid = 1;
    forever begin
      @(negedge clk);
      if (in_ready) break;       // in_ready only changes at clock edges
    end
    @(posedge clk);
    if (first_in < 0) first_in = cyc;
    exp_q.push_back(e);
    #1 in_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1; out_ready = 1;
    @(posedge clk); #1;
    send(50);
    repeat (20) @(posedge clk); #1;
    checks++; if (first_out - first_in != 11) begin failures++; $display("latency %0d", first_out - first_in); end
    // random back-pressure
    fork
      begin
        for (int n = 0; n < 300; n++) begin
          send($urandom_range(0, 100));
          repeat ($urandom_range(0, 2)) @(posedge clk);
          #1;
        end
      end
      begin
        repeat (2000) begin @(posedge clk); #1 out_ready = ($urandom_range(0, 4) != 0); end
      end
    join
    out_ready = 1;
    repeat (100) @(posedge clk);
    // consumer held off: sparse vectors (<= 4 per bank) fill the store
    #1 out_ready = 0;
    for (int n = 0; n < 16 + 8 + 1 + 4; n++) begin
      data_t [C-1:0] v, e;
      v = '0; e = '0;
      for (int k = 0; k < 3; k++) begin int c = $urandom_range(0, C-1); v[c] = 16'sd77; e[c] = 16'sd77; end
      in_vec = v; in_valid = 1;
      @(posedge clk);
      if (in_ready) exp_q.push_back(e);
      #1 in_valid = 0;
    end
    checks++; if (in_ready) failures++;
    full_seen = 0;
    repeat (5) @(posedge clk);
    checks++; if (full_seen == 0) failures++;
    #1 out_ready = 1;
    repeat (100) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("left %0d", exp_q.size()); end
    checks++; if (ovf_seen != 0) begin failures++; $display("unexpected ovf"); end
    // dense vectors with the consumer held off: the one-BRAM tail mini-bank
    // (4 deep) takes four after the 8-entry output FIFO has filled; the next
    // two lose their last four channels
    #1 out_ready = 0;
    for (int n = 0; n < 14; n++) begin
      data_t [C-1:0] v, e;
      for (int c = 0; c < C; c++) begin
        v[c] = data_t'(100 + n*64 + c);
        e[c] = (n >= 12 && (c % 16) < 4) ? '0 : v[c];
      end
      in_vec = v; in_valid = 1;
      @(posedge clk);
      exp_q.push_back(e);
      #1 in_valid = 0;
    end
    repeat (8) @(posedge clk);
    checks++; if (ovf_seen != 2) begin failures++; $display("ovf %0d", ovf_seen); end
    #1 out_ready = 1;
    repeat (40) @(posedge clk);
    checks++; if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
