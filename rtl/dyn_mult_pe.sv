// dyn_mult_pe: Dyn-Mult-PE of the temporal conv module.
//
// One Dyn-Mult-PE takes one row (one temporal tap) of a 1x1x16 sub-filter.
// The row keeps NQ weights (6 or 4 under the cavity pattern), each bound to a
// waiting queue. For a job, the feature's hot code is ANDed with the weight
// mask; every surviving feature enters the queue of its weight, zero features
// and pruned weights are skipped. ND multipliers (fewer than NQ) take work
// dynamically from whichever queues hold data, lowest queue first, so the
// DSPs are shared instead of one per weight. The products are summed inside
// the PE and the row sum is sent on to the TCM adder tree.
//
// Queues are one entry deep here because a new job is accepted only in the
// cycle its predecessor's last items are dispatched; this keeps the jobs of
// the nine PEs in lockstep. That depth, and the lowest-index-first dispatch,
// are this design's choices.
//
// Timing: a job with n valid products takes max(1, ceil(n/ND)) cycles; the
// sum appears on out_valid/out_sum one cycle after its last dispatch. in_ready
// is low while a job needs more than one further cycle (dyn_stall high), which
// is the extra delay the paper trades for fewer DSPs. out_last echoes in_last.
module dyn_mult_pe
  import rfc_pkg::*;
#(
  parameter int unsigned NQ = 6,
  parameter int unsigned ND = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  logic  in_last,
  input  bank_t feat,          // 16 features of this tap, one per input channel
  input  hot_t  fhot,          // non-zero flags of feat
  input  hot_t  wmask,         // kept weight positions (NQ bits set)
  input  data_t wts [NQ],      // kept weights in ascending channel order
  output logic  out_valid,
  output logic  out_last,
  output acc_t  out_sum,
  output logic  dyn_stall
);

  // queue entry for each kept weight, from the masks
  logic  qv_in [NQ];
  data_t qx_in [NQ];
  always_comb begin
    int unsigned q;
    q = 0;
    for (int q2 = 0; q2 < NQ; q2++) begin qv_in[q2] = 1'b0; qx_in[q2] = '0; end
    for (int c = 0; c < BANK_W; c++) begin
      if (wmask[c] && q < NQ) begin
        qv_in[q] = fhot[c];
        qx_in[q] = feat[c];
        q++;
      end
    end
  end

  logic  busy, last_q;
  logic  q_v [NQ];
  data_t q_x [NQ];
  data_t q_w [NQ];
  acc_t  acc;

  // dynamic dispatch: the first ND waiting entries go to the ND DSPs
  logic  sel [NQ];
  logic  rem_any, done;
  acc_t  psum;
  always_comb begin
    int unsigned used;
    used = 0; psum = '0; rem_any = 1'b0;
    for (int q = 0; q < NQ; q++) begin
      sel[q] = busy && q_v[q] && (used < ND);
      if (sel[q]) begin
        used++;
        psum += acc_t'(q_x[q]) * acc_t'(q_w[q]);
      end
      if (busy && q_v[q] && !sel[q]) rem_any = 1'b1;
    end
  end
  assign done      = busy && !rem_any;
  assign in_ready  = !busy || done;
  assign dyn_stall = busy && rem_any;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; out_valid <= 1'b0; out_last <= 1'b0; out_sum <= '0;
      acc <= '0; last_q <= 1'b0;
      for (int q = 0; q < NQ; q++) begin q_v[q] <= 1'b0; q_x[q] <= '0; q_w[q] <= '0; end
    end else begin
      out_valid <= done;
      out_last  <= done && last_q;
      if (done) out_sum <= acc + psum;
      if (in_valid && in_ready) begin
        busy   <= 1'b1;
        acc    <= '0;
        last_q <= in_last;
        for (int q = 0; q < NQ; q++) begin
          q_v[q] <= qv_in[q]; q_x[q] <= qx_in[q]; q_w[q] <= wts[q];
        end
      end else if (busy) begin
        acc <= acc + psum;
        for (int q = 0; q < NQ; q++) if (sel[q]) q_v[q] <= 1'b0;
        if (done) busy <= 1'b0;
      end
    end
  end

endmodule
