// nfc_filter: the filter inside each NAND flash controller (second step of dual-step loading).
//
// Flash is read in whole pages, so a fetched page still holds weak units: token rows
// outside the top-k set (token-indexed pages, Algorithm 1 step 9) or hidden-embedding
// columns outside the top-r set (hidden-indexed pages, step 3). The filter looks at the
// tag of each beat and lets through only beats of strong units, so the attention kernels
// never see the weak ones. Beats past the end of the sequence are dropped as well.
//
// Interface: a valid/ready stage without storage. A dropped beat is consumed at once
// (in_ready high, `dropped` pulses); a kept beat waits for out_ready. Zero latency.
// The drop rule is the paper's; checking the tag per beat of 16 elements (one token
// slice, or 16 tokens of one hidden dim) is this design's choice.
module nfc_filter
  import instinfer_pkg::*;
#(
  parameter int S_MAX_P  = instinfer_pkg::S_MAX,
  parameter int D_HEAD_P = instinfer_pkg::D_HEAD
) (
  input  logic                     in_valid,
  output logic                     in_ready,
  input  kv_beat_t                 in_beat,
  input  logic [D_HEAD_P-1:0]      hid_mask,
  input  logic [S_MAX_P-1:0]       tok_mask,
  input  logic [$clog2(S_MAX_P):0] seq_len,
  output logic                     out_valid,
  input  logic                     out_ready,
  output kv_beat_t                 out_beat,
  output logic                     kept,
  output logic                     dropped
);
  logic is_strong;
  always_comb begin
    if (in_beat.kind == KV_KHID)
      is_strong = hid_mask[in_beat.hid] && (int'(in_beat.tok) < int'(seq_len));
    else
      is_strong = tok_mask[in_beat.tok] && (int'(in_beat.tok) < int'(seq_len));
  end

  assign out_beat  = in_beat;
  assign out_valid = in_valid && is_strong;
  assign in_ready  = is_strong ? out_ready : 1'b1;
  assign kept      = in_valid && is_strong && out_ready;
  assign dropped   = in_valid && !is_strong;
endmodule
