// poison_tracker: tensor poison tracing and the verification barrier.
//
// With delayed verification an NPU tensor can be used before its tensor MAC
// has been checked. Each of the TENSORS tensors has a poison state made of
// two bits:
//   self     set when a read pass of the tensor starts (it is unverified),
//            cleared when its MAC check passes;
//   derived  set on a kernel's output tensor when any input is poisoned
//            (self or derived); the poison propagates along the dataflow.
// A derived bit records only that some ancestor may be unverified. This
// design clears all derived bits at once when no tensor is unverified any
// more (the ancestors are all verified); that is conservative and needs no
// per-tensor ancestor list.
// A failed check sets the sticky `fail` flag: the enclave has seen tampering.
// The number of unverified tensors is counted; `limit_stall` asks the
// control processor not to start another tensor read while MAX_UNVERIFIED are
// outstanding, bounding wasted work after a failure.
// Barrier: a communication instruction for tensor `bar_id` waits while
// `bar_valid` and the tensor is poisoned; `bar_pass` rises when its poison is
// clear and no failure has been seen; `bar_fail` when a failure was seen.
// All updates take effect on the next clock; several events may coincide.
module poison_tracker #(
  parameter int unsigned TENSORS        = 512,
  parameter int unsigned MAX_UNVERIFIED = 16,
  parameter int unsigned NIN            = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       ev_rd_start,
  input  logic                       ev_verify,
  input  logic                       ev_ok,
  input  logic [$clog2(TENSORS)-1:0] ev_id,
  // kernel completed: output tensor and up to NIN inputs
  input  logic                       prop_valid,
  input  logic [$clog2(TENSORS)-1:0] prop_out,
  input  logic [NIN-1:0]             prop_in_vld,
  input  logic [$clog2(TENSORS)-1:0] prop_in [NIN],
  // barrier
  input  logic                       bar_valid,
  input  logic [$clog2(TENSORS)-1:0] bar_id,
  output logic                       bar_pass,
  output logic                       bar_fail,
  output logic                       limit_stall,
  output logic                       fail,
  output logic [$clog2(TENSORS+1)-1:0] unverified,
  output logic [TENSORS-1:0]         poison
);
  localparam int unsigned CW = $clog2(TENSORS + 1);

  logic [TENSORS-1:0] self_q, der_q;
  assign poison = self_q | der_q;

  logic in_poison;
  always_comb begin
    in_poison = 1'b0;
    for (int k = 0; k < NIN; k++)
      if (prop_in_vld[k] && poison[prop_in[k]]) in_poison = 1'b1;
  end

  logic start_new, verify_clr;
  assign start_new  = ev_rd_start && !self_q[ev_id];
  assign verify_clr = ev_verify && self_q[ev_id];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      self_q <= '0; der_q <= '0; fail <= 1'b0; unverified <= '0;
    end else begin
      unverified <= unverified + CW'(start_new) - CW'(verify_clr);
      if (ev_verify && !ev_ok) fail <= 1'b1;
      if (unverified == CW'(verify_clr) && !start_new) der_q <= '0;
      else if (prop_valid) der_q[prop_out] <= in_poison;
      if (ev_verify) self_q[ev_id] <= 1'b0;
      if (ev_rd_start) self_q[ev_id] <= 1'b1;
    end
  end

  assign limit_stall = unverified >= CW'(MAX_UNVERIFIED);
  assign bar_fail    = bar_valid && fail;
  assign bar_pass    = bar_valid && !fail && !poison[bar_id];

  a_count: assert property (@(posedge clk) disable iff (!rst_n) unverified <= CW'(TENSORS));

endmodule
