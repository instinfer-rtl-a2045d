// beat_arbiter: the interconnect that merges the filtered beats of all flash channels.
//
// Each NFC offers at most one beat per cycle; the attention kernels absorb one beat per
// cycle. The arbiter grants one requesting channel per cycle in round-robin order,
// starting after the last channel served, so no channel starves.
//
// Interface: N valid/ready inputs, one valid/ready output, combinational grant (no
// added latency). The pointer moves only on a completed transfer.
// The paper lists an interconnect among the engine's parts without describing it; the
// round-robin merge is this design's choice.
module beat_arbiter
  import instinfer_pkg::*;
#(
  parameter int N = instinfer_pkg::NCH
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [N-1:0]   in_valid,
  output logic [N-1:0]   in_ready,
  input  kv_beat_t       in_beat [N],
  output logic           out_valid,
  input  logic           out_ready,
  output kv_beat_t       out_beat
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr, sel;
  logic          found;

  always_comb begin
    found = 1'b0;
    sel   = '0;
    for (int i = 0; i < N; i++) begin
      if (!found && in_valid[(int'(ptr) + 1 + i) % N]) begin
        found = 1'b1;
        sel   = IW'((int'(ptr) + 1 + i) % N);
      end
    end
    out_valid = found;
    out_beat  = in_beat[sel];
    in_ready  = '0;
    if (found) in_ready[sel] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      ptr <= IW'(N-1);
    else if (out_valid && out_ready) ptr <= sel;
  end
endmodule
