// attention_kernel: logit, softmax and attend for one attention head over filtered KV beats.
//
// The SparF engine holds two identical kernels. Kernel 1 computes the approximate
// scores of Algorithm 1 step 4 from hidden-indexed key beats; kernel 2 computes the
// exact scores of step 10 from token-indexed key beats and then the weighted sum of
// value rows of step 11. Which of the two computations a kernel performs is set only by
// the kind of beat it receives, so either kernel can serve either step.
//
// How it works. A score memory holds one 40-bit entry per token (S_MAX entries, organised
// as rows of ELEMS tokens) and an accumulator holds one 48-bit entry per hidden dim.
// Every input beat is absorbed in the cycle it arrives, through one gemv_unit:
//   KV_KHID beat (dim h, tokens t..t+ELEMS-1): score[t+l] += q[h] * K[t+l][h]
//   KV_KTOK beat (token t, dims h..h+ELEMS-1): score[t]   += sum_l q[h+l] * K[t][h+l]
//   KV_VTOK beat (token t, dims h..h+ELEMS-1): acc[h+l]   += w[t] * V[t][h+l]
// `cmd_softmax` runs two passes over the rows in use: the first finds the largest
// scaled score among the live tokens (t < seq_len, and in tok_mask when sel_only), the
// second replaces each live score with w = exp(scaled - max) in U1.15 (others with 0)
// and sums them into e_sum. ELEMS softmax_unit lanes work on one row per cycle.
// `cmd_emit` then streams (token, w) for every token below seq_len, one per cycle, for
// the argtopk unit.
//
// Interface: commands are one-cycle pulses accepted when !busy; `done` pulses when a
// command finishes. Beats may arrive whenever no command runs. Timing: clear, max and
// exp passes take ceil(seq_len/ELEMS) cycles each, emit takes seq_len cycles.
// The split into logit/softmax/attend follows the paper; the memory organisation,
// deferred normalisation and fixed-point format are this design's choices.
module attention_kernel
  import instinfer_pkg::*;
#(
  parameter int S_MAX_P  = instinfer_pkg::S_MAX,
  parameter int D_HEAD_P = instinfer_pkg::D_HEAD,
  parameter int SW       = 40,
  parameter int AW       = 48
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [D_HEAD_P-1:0][15:0]     q,
  input  logic [$clog2(S_MAX_P):0]      seq_len,
  input  logic [S_MAX_P-1:0]            tok_mask,
  input  logic                          sel_only,
  input  logic [15:0]                   y,
  input  logic                          cmd_clear,
  input  logic                          cmd_softmax,
  input  logic                          cmd_emit,
  input  logic                          beat_valid,
  input  kv_beat_t                      beat,
  output logic                          busy,
  output logic                          done,
  output logic                          ev_valid,
  output logic                          ev_last,
  output logic [$clog2(S_MAX_P)-1:0]    ev_idx,
  output logic [15:0]                   ev_w,
  output logic [31:0]                   e_sum,
  output logic signed [D_HEAD_P-1:0][AW-1:0] acc
);
  localparam int ROWS = S_MAX_P / ELEMS;
  localparam int RW   = $clog2(ROWS);
  localparam int LW   = $clog2(ELEMS);
  localparam int TW   = $clog2(S_MAX_P);

  typedef enum logic [2:0] {K_IDLE, K_CLEAR, K_MAX, K_EXP, K_EMIT} kstate_e;
  kstate_e state;

  logic signed [SW-1:0] score [ROWS][ELEMS];
  logic [RW:0]          row, nrows;
  logic [TW:0]          cnt;
  logic signed [31:0]   run_max;

  assign nrows = (RW+1)'((int'(seq_len) + ELEMS - 1) / ELEMS);
  assign busy  = (state != K_IDLE);

  // ---------------- beat datapath ----------------
  logic signed [ELEMS-1:0][16:0] ga;
  logic signed [ELEMS-1:0][15:0] gb;
  logic signed [ELEMS-1:0][32:0] gprod;
  logic signed [36:0]            gdot;
  logic [RW-1:0]                 brow;
  logic [LW-1:0]                 blane;

  assign brow  = RW'(beat.tok / ELEMS);
  assign blane = LW'(beat.tok % ELEMS);

  always_comb begin
    for (int l = 0; l < ELEMS; l++) begin
      gb[l] = beat.data[l];
      unique case (beat.kind)
        KV_KHID: ga[l] = 17'($signed(q[beat.hid]));
        KV_KTOK: ga[l] = 17'($signed(q[int'(beat.hid) + l]));
        default: ga[l] = $signed({1'b0, score[brow][blane][15:0]});
      endcase
    end
  end

  gemv_unit #(.ELEMS(ELEMS), .AW(17), .BW(16)) u_gemv (
    .a(ga), .b(gb), .prod(gprod), .dot(gdot)
  );

  // ---------------- softmax lanes ----------------
  logic [ELEMS-1:0]              live;
  logic signed [ELEMS-1:0][31:0] sc;
  logic [ELEMS-1:0][15:0]        ex;
  logic signed [31:0]            row_max;
  logic [31:0]                   row_sum;
  logic [RW-1:0]                 srow;

  assign srow = row[RW-1:0];

  for (genvar l = 0; l < ELEMS; l++) begin : g_lane
    softmax_unit #(.SW(SW)) u_sm (
      .score(score[srow][l]), .y(y), .max_val(run_max),
      .scaled(sc[l]), .e(ex[l])
    );
  end

  always_comb begin
    row_max = run_max;
    row_sum = '0;
    for (int l = 0; l < ELEMS; l++) begin
      live[l] = ((int'(srow) * ELEMS + l) < int'(seq_len)) &&
                (!sel_only || tok_mask[int'(srow) * ELEMS + l]);
      if (live[l] && $signed(sc[l]) > row_max) row_max = $signed(sc[l]);
      if (live[l]) row_sum = row_sum + 32'(ex[l]);
    end
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= K_IDLE;
      row      <= '0;
      cnt      <= '0;
      run_max  <= '0;
      e_sum    <= '0;
      done     <= 1'b0;
      ev_valid <= 1'b0;
      ev_last  <= 1'b0;
      ev_idx   <= '0;
      ev_w     <= '0;
      acc      <= '0;
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < ELEMS; l++) score[r][l] <= '0;
    end else begin
      done     <= 1'b0;
      ev_valid <= 1'b0;
      ev_last  <= 1'b0;

      if (beat_valid) begin
        unique case (beat.kind)
          KV_KHID: for (int l = 0; l < ELEMS; l++)
                     score[brow][l] <= score[brow][l] + SW'($signed(gprod[l]));
          KV_KTOK: score[brow][blane] <= score[brow][blane] + SW'(gdot);
          default: for (int l = 0; l < ELEMS; l++)
                     acc[int'(beat.hid) + l] <= acc[int'(beat.hid) + l] + AW'($signed(gprod[l]));
        endcase
      end

      unique case (state)
        K_IDLE: begin
          if (cmd_clear) begin
            state <= K_CLEAR; row <= '0; acc <= '0;
          end else if (cmd_softmax) begin
            state <= K_MAX; row <= '0; run_max <= 32'sh8000_0000; e_sum <= '0;
          end else if (cmd_emit) begin
            state <= K_EMIT; cnt <= '0;
          end
        end
        K_CLEAR: begin
          for (int l = 0; l < ELEMS; l++) score[srow][l] <= '0;
          if (row == (RW+1)'(ROWS-1)) begin state <= K_IDLE; done <= 1'b1; end
          row <= row + 1'b1;
        end
        K_MAX: begin
          if (row >= nrows) begin
            state <= K_EXP; row <= '0;
          end else begin
            run_max <= row_max;
            row     <= row + 1'b1;
          end
        end
        K_EXP: begin
          if (row >= nrows) begin
            state <= K_IDLE; done <= 1'b1;
          end else begin
            for (int l = 0; l < ELEMS; l++)
              score[srow][l] <= live[l] ? SW'(ex[l]) : '0;
            e_sum <= e_sum + row_sum;
            row   <= row + 1'b1;
          end
        end
        K_EMIT: begin
          if (cnt >= (TW+1)'(seq_len)) begin
            state <= K_IDLE; done <= 1'b1;
          end else begin
            ev_valid <= 1'b1;
            ev_last  <= (cnt == (TW+1)'(seq_len) - 1'b1);
            ev_idx   <= TW'(cnt);
            ev_w     <= score[cnt[TW-1:LW]][cnt[LW-1:0]][15:0];
            cnt      <= cnt + 1'b1;
          end
        end
        default: state <= K_IDLE;
      endcase
    end
  end

  // Beats are absorbed only while no command walks the score memory.
  a_no_beat_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    beat_valid |-> !busy);
endmodule
