// argtopk: selects the K largest keys of a stream and reports them as an index mask.
//
// The SparF engine uses one such unit twice per attention head: first on |q| to pick the
// top-r hidden embeddings (Algorithm 1 step 1), then on the approximate scores plus the
// local-window bonus to pick the top-k tokens (step 6). Each candidate also carries a
// value; the unit sums the values of the selected candidates, which gives alpha's
// numerator (step 7) without a second pass.
//
// How it works: a sorted list of up to K_MAX (key, index, value) entries is kept in
// registers. Every accepted candidate is compared against all entries in parallel and
// inserted in place, the smallest entry falling off once k entries are held. Equal keys
// keep the earlier candidate first, so when candidates arrive in ascending index order a
// tie goes to the lower index. After `in_last`, the unit walks the list, one entry per
// cycle, setting mask bits and accumulating values, then raises `done` for one cycle.
//
// Interface: pulse `start` with the runtime `k` (1..K_MAX); then stream candidates
// with in_valid (one per cycle, always accepted while `busy`), the last marked in_last.
// Timing: N candidates take N cycles, the read-out k more; `mask`/`sel_sum` are valid
// from `done` until the next `start`.
// The selection rule is the paper's; the sorted insertion list is this design's choice.
module argtopk #(
  parameter int N_MAX = 2048,  // candidates per selection
  parameter int K_MAX = 256,   // largest k
  parameter int KEYW  = 18,
  parameter int VALW  = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(K_MAX+1)-1:0] k,
  input  logic                      in_valid,
  input  logic                      in_last,
  input  logic [$clog2(N_MAX)-1:0]  in_idx,
  input  logic [KEYW-1:0]           in_key,
  input  logic [VALW-1:0]           in_val,
  output logic                      busy,
  output logic                      done,
  output logic [N_MAX-1:0]          mask,
  output logic [31:0]               sel_sum
);
  localparam int IW = $clog2(N_MAX);
  localparam int CW = $clog2(K_MAX+1);

  typedef enum logic [1:0] {S_IDLE, S_COLLECT, S_READOUT} state_e;
  state_e state;

  logic [KEYW-1:0] key_q [K_MAX];
  logic [IW-1:0]   idx_q [K_MAX];
  logic [VALW-1:0] val_q [K_MAX];
  logic [CW-1:0]   cnt, k_q, rd;

  // Position where a new candidate goes: the number of entries with key >= in_key.
  logic [K_MAX-1:0] ge;
  always_comb begin
    for (int p = 0; p < K_MAX; p++)
      ge[p] = (CW'(p) < cnt) && (key_q[p] >= in_key);
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      k_q     <= '0;
      rd      <= '0;
      done    <= 1'b0;
      mask    <= '0;
      sel_sum <= '0;
      for (int p = 0; p < K_MAX; p++) begin
        key_q[p] <= '0; idx_q[p] <= '0; val_q[p] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_COLLECT;
          cnt     <= '0;
          k_q     <= k;
          mask    <= '0;
          sel_sum <= '0;
        end
        S_COLLECT: if (in_valid) begin
          // ge is a thermometer code (list sorted descending), so entry p shifts down
          // when p is at or past the insertion point.
          for (int p = K_MAX-1; p >= 0; p--) begin
            if (CW'(p) < k_q) begin
              if (!ge[p]) begin
                if (p == 0 || ge[p-1]) begin
                  key_q[p] <= in_key; idx_q[p] <= in_idx; val_q[p] <= in_val;
                end else begin
                  key_q[p] <= key_q[p-1]; idx_q[p] <= idx_q[p-1]; val_q[p] <= val_q[p-1];
                end
              end
            end
          end
          if (cnt < k_q) cnt <= cnt + 1'b1;
          if (in_last) begin
            state <= S_READOUT;
            rd    <= '0;
          end
        end
        S_READOUT: begin
          if (rd < cnt) begin
            mask[idx_q[$clog2(K_MAX)'(rd)]] <= 1'b1;
            sel_sum         <= sel_sum + 32'(val_q[$clog2(K_MAX)'(rd)]);
            rd              <= rd + 1'b1;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Candidates arrive only while collecting.
  a_in_only_collect: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> state == S_COLLECT);
endmodule
