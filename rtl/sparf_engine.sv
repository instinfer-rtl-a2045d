// sparf_engine: the SparF attention engine that runs Algorithm 1 for one head at a time.
//
// A request carries one attention head of one sequence: its query q, the mean value
// vector vbar, the context length S, and the sparsity settings r (hidden embeddings
// kept), k (tokens kept) and l (most recent tokens always kept). The engine:
//   1  streams |q| through argtopk to get the top-r hidden mask, and starts the
//      temperature factor 1/sqrt(d_h * ||q_[i]||_1 / ||q||_1);
//   2  fetches every hidden-indexed K page that holds at least one top-r dim
//      (pages with none are skipped: the first, page-level step of dual-step loading);
//   3  the NFC filters drop the other dims of those pages;
//   4  kernel 1 accumulates q_[i] . K_[:,i] per token and takes the softmax;
//   5,6 the scores, plus 1.0 for the last l tokens, go through argtopk for the top-k mask;
//   7  the same pass sums the selected scores (alpha's numerator);
//   8  fetches every token-indexed K page holding a top-k token, then the V pages;
//   9  the NFC filters drop the other tokens;
//   10 kernel 2 forms q . K_[j] for the kept tokens and their softmax weights;
//   11 kernel 2 accumulates the weighted V rows and the summation unit blends the result
//      with vbar by alpha.
// A page fetch phase ends when every issued page has been reported done by its NFC.
//
// Interface: req_* valid/ready (accepted in IDLE); resp_valid pulses with resp_out and
// resp_alpha. Page reads leave on pcmd_* towards the NFC of channel pch; filtered beats
// come back on beat_* (always accepted) and pages_done counts pages finished this cycle.
// hid_mask/tok_mask/seq_len_o are the masks the NFC filters use.
// The step order follows the paper. Departures, all this design's choices: K and V
// pages of step 8 are fetched one after the other rather than overlapped; kernel 1 is
// used for step 4 and kernel 2 for steps 10-11 rather than scheduled by load; the local
// window mask is read as "the last l tokens" (Algorithm 1 prints i > S with l as input).
module sparf_engine
  import instinfer_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // request
  input  logic                        req_valid,
  output logic                        req_ready,
  input  logic [$clog2(NSEQ)-1:0]     req_seq,
  input  logic [$clog2(NLAYERS)-1:0]  req_layer,
  input  logic [$clog2(NHEADS)-1:0]   req_head,
  input  logic [TOKW:0]               req_seq_len,
  input  logic [$clog2(K_TOP+1)-1:0]  req_r,
  input  logic [$clog2(K_TOP+1)-1:0]  req_k,
  input  logic [TOKW:0]               req_l,
  input  logic [D_HEAD-1:0][15:0]     req_q,
  input  logic [D_HEAD-1:0][15:0]     req_vbar,
  // response
  output logic                        resp_valid,
  output logic [D_HEAD-1:0][15:0]     resp_out,
  output logic [15:0]                 resp_alpha,
  // page reads
  output logic                        pcmd_valid,
  input  logic                        pcmd_ready,
  output page_cmd_t                   pcmd,
  output logic [$clog2(NCH)-1:0]      pch,
  // filter masks
  output logic [D_HEAD-1:0]           hid_mask,
  output logic [S_MAX-1:0]            tok_mask,
  output logic [TOKW:0]               seq_len_o,
  // filtered beats
  input  logic                        beat_valid,
  output logic                        beat_ready,
  input  kv_beat_t                    beat,
  input  logic [$clog2(NCH+1)-1:0]    pages_done,
  // statistics
  output logic [31:0]                 st_pages_read,
  output logic [31:0]                 st_pages_skipped,
  output logic [31:0]                 st_heads
);
  typedef enum logic [3:0] {
    E_IDLE, E_TOPR, E_TOPR_WAIT, E_ISSUE_H, E_WAIT_H, E_SM1, E_TOPK, E_TOPK_WAIT,
    E_ISSUE_K, E_WAIT_K, E_SM2, E_ISSUE_V, E_WAIT_V, E_SUM
  } estate_e;
  estate_e state;

  // ---- latched request ----
  logic [$clog2(NSEQ)-1:0]    seq_q;
  logic [$clog2(NLAYERS)-1:0] layer_q;
  logic [$clog2(NHEADS)-1:0]  head_q;
  logic [TOKW:0]              slen_q, l_q;
  logic [$clog2(K_TOP+1)-1:0] k_q;
  logic [D_HEAD-1:0][15:0]    q_q, vbar_q;

  assign seq_len_o = slen_q;
  assign beat_ready = 1'b1;

  // |q| and its L1 norm
  logic [D_HEAD-1:0][15:0] qabs;
  logic [31:0]             l1_all;
  always_comb begin
    l1_all = '0;
    for (int h = 0; h < D_HEAD; h++) begin
      qabs[h] = q_q[h][15] ? 16'(-$signed(q_q[h])) : q_q[h];
      l1_all  = l1_all + 32'(qabs[h]);
    end
  end

  // ---- argtopk (shared by steps 1 and 6) ----
  logic                        tk_start, tk_valid, tk_last, tk_busy, tk_done;
  logic [$clog2(K_TOP+1)-1:0]  tk_k;
  logic [TOKW-1:0]             tk_idx;
  logic [17:0]                 tk_key;
  logic [15:0]                 tk_val;
  logic [S_MAX-1:0]            tk_mask;
  logic [31:0]                 tk_sum;

  argtopk #(.N_MAX(S_MAX), .K_MAX(K_TOP), .KEYW(18), .VALW(16)) u_topk (
    .clk, .rst_n, .start(tk_start), .k(tk_k), .in_valid(tk_valid), .in_last(tk_last),
    .in_idx(tk_idx), .in_key(tk_key), .in_val(tk_val), .busy(tk_busy), .done(tk_done),
    .mask(tk_mask), .sel_sum(tk_sum)
  );

  // ---- temperature factors ----
  logic        rs0_start, rs0_done, rs1_done, rs0_busy, rs1_busy;
  logic [15:0] y0, y1;
  logic [31:0] l1_sel;
  rsqrt_unit #(.D(D_HEAD)) u_rs0 (
    .clk, .rst_n, .start(rs0_start), .l1_sel(l1_sel), .l1_all(l1_all),
    .busy(rs0_busy), .done(rs0_done), .y(y0)
  );
  rsqrt_unit #(.D(D_HEAD)) u_rs1 (
    .clk, .rst_n, .start(rs0_start), .l1_sel(32'd1), .l1_all(32'd1),
    .busy(rs1_busy), .done(rs1_done), .y(y1)
  );

  // ---- kernels ----
  logic k1_clear, k1_sm, k1_emit, k1_busy, k1_done, k1_evv, k1_evl;
  logic [TOKW-1:0] k1_evi;
  logic [15:0]     k1_evw;
  logic [31:0]     k1_esum, k2_esum;
  logic signed [D_HEAD-1:0][47:0] k1_acc, k2_acc;
  logic k2_clear, k2_sm, k2_busy, k2_done, k2_evv, k2_evl;
  logic [TOKW-1:0] k2_evi;
  logic [15:0]     k2_evw;

  attention_kernel u_kernel1 (
    .clk, .rst_n, .q(q_q), .seq_len(slen_q), .tok_mask(tok_mask), .sel_only(1'b0), .y(y0),
    .cmd_clear(k1_clear), .cmd_softmax(k1_sm), .cmd_emit(k1_emit),
    .beat_valid(beat_valid && beat.kind == KV_KHID), .beat(beat),
    .busy(k1_busy), .done(k1_done), .ev_valid(k1_evv), .ev_last(k1_evl), .ev_idx(k1_evi),
    .ev_w(k1_evw), .e_sum(k1_esum), .acc(k1_acc)
  );
  attention_kernel u_kernel2 (
    .clk, .rst_n, .q(q_q), .seq_len(slen_q), .tok_mask(tok_mask), .sel_only(1'b1), .y(y1),
    .cmd_clear(k2_clear), .cmd_softmax(k2_sm), .cmd_emit(1'b0),
    .beat_valid(beat_valid && beat.kind != KV_KHID), .beat(beat),
    .busy(k2_busy), .done(k2_done), .ev_valid(k2_evv), .ev_last(k2_evl), .ev_idx(k2_evi),
    .ev_w(k2_evw), .e_sum(k2_esum), .acc(k2_acc)
  );

  // ---- summation unit ----
  logic        su_start, su_busy, su_done;
  logic [31:0] sel_sum_q, all_sum_q;
  sum_unit #(.D(D_HEAD), .AW(48)) u_sum (
    .clk, .rst_n, .start(su_start), .sel_sum(sel_sum_q), .all_sum(all_sum_q),
    .e_sel(k2_esum), .acc(k2_acc), .vbar(vbar_q), .busy(su_busy), .done(su_done),
    .alpha(resp_alpha), .out(resp_out)
  );

  // ---- page walk ----
  localparam int NHG = D_HEAD / HID_GROUP;          // hidden groups
  localparam int NTC = S_MAX / TOK_PER_HPAGE;       // token chunks
  localparam int NG  = S_MAX / GROUP_TOK;           // token groups
  logic [15:0] pidx;          // walk index
  logic [31:0] issued, done_cnt;
  logic        cand_ok;       // page at pidx is needed
  logic        cand_end;      // walk finished
  kv_kind_e    cand_kind;
  logic [TOKW-1:0] cand_tok;
  logic [HIDW-1:0] cand_hid;
  logic [$clog2(NCH)-1:0] m_ch;
  logic [ADDRW-1:0]       m_row, m_block;
  logic [$clog2(PAGES_PER_BLOCK)-1:0] m_page;
  int ntc, ng;

  always_comb begin
    ntc       = (int'(slen_q) + TOK_PER_HPAGE - 1) / TOK_PER_HPAGE;
    ng        = (int'(slen_q) + GROUP_TOK - 1) / GROUP_TOK;
    cand_kind = (state == E_ISSUE_H) ? KV_KHID : (state == E_ISSUE_V) ? KV_VTOK : KV_KTOK;
    cand_tok  = '0;
    cand_hid  = '0;
    cand_ok   = 1'b0;
    cand_end  = 1'b1;
    if (state == E_ISSUE_H) begin
      cand_hid = HIDW'((int'(pidx) / NTC) * HID_GROUP);
      cand_tok = TOKW'((int'(pidx) % NTC) * TOK_PER_HPAGE);
      cand_end = int'(pidx) >= NHG * NTC;
      cand_ok  = !cand_end && (int'(pidx) % NTC) < ntc &&
                 (hid_mask[int'(cand_hid) +: HID_GROUP] != '0);
    end else begin
      cand_tok = TOKW'(int'(pidx) * GROUP_TOK);
      cand_end = int'(pidx) >= ng;
      cand_ok  = !cand_end && (tok_mask[int'(cand_tok) +: GROUP_TOK] != '0);
    end
  end

  kv_addr_map u_map (
    .kind(cand_kind), .seq(seq_q), .layer(layer_q), .head(head_q), .tok(cand_tok),
    .hid(cand_hid), .ch(m_ch), .row(m_row), .block(m_block), .page(m_page)
  );

  logic issuing;
  assign issuing    = (state == E_ISSUE_H || state == E_ISSUE_K || state == E_ISSUE_V);
  assign pcmd_valid = issuing && cand_ok;
  assign pch        = m_ch;
  always_comb begin
    pcmd       = '0;
    pcmd.write = 1'b0;
    pcmd.kind  = cand_kind;
    pcmd.row   = m_row;
    pcmd.tok0  = cand_tok;
    pcmd.hid0  = cand_hid;
  end

  // argtopk feed
  always_comb begin
    tk_valid = 1'b0; tk_last = 1'b0; tk_idx = '0; tk_key = '0; tk_val = '0;
    if (state == E_TOPR) begin
      tk_valid = !tk_start;           // argtopk takes its start pulse first
      tk_idx   = TOKW'(pidx);
      tk_key   = 18'(qabs[pidx[HIDW-1:0]]);
      tk_val   = qabs[pidx[HIDW-1:0]];
      tk_last  = (int'(pidx) == D_HEAD-1);
    end else if (state == E_TOPK_WAIT) begin
      tk_valid = k1_evv;
      tk_last  = k1_evl;
      tk_idx   = k1_evi;
      tk_val   = k1_evw;
      tk_key   = 18'(k1_evw) +
                 ((int'(k1_evi) + int'(l_q) >= int'(slen_q)) ? 18'd32768 : 18'd0);
    end
  end

  assign req_ready = (state == E_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE; seq_q <= '0; layer_q <= '0; head_q <= '0; slen_q <= '0; l_q <= '0;
      k_q <= '0; q_q <= '0; vbar_q <= '0; hid_mask <= '0; tok_mask <= '0; l1_sel <= '0;
      tk_start <= 1'b0; tk_k <= '0; rs0_start <= 1'b0; k1_clear <= 1'b0; k2_clear <= 1'b0;
      k1_sm <= 1'b0; k1_emit <= 1'b0; k2_sm <= 1'b0; su_start <= 1'b0; resp_valid <= 1'b0;
      pidx <= '0; issued <= '0; done_cnt <= '0; sel_sum_q <= '0; all_sum_q <= '0;
      st_pages_read <= '0; st_pages_skipped <= '0; st_heads <= '0;
    end else begin
      tk_start <= 1'b0; rs0_start <= 1'b0; k1_clear <= 1'b0; k2_clear <= 1'b0;
      k1_sm <= 1'b0; k1_emit <= 1'b0; k2_sm <= 1'b0; su_start <= 1'b0; resp_valid <= 1'b0;
      done_cnt <= done_cnt + 32'(pages_done);

      if (issuing && !cand_end) begin
        if (!cand_ok) begin
          pidx <= pidx + 1'b1;
          if (state != E_ISSUE_H || (int'(pidx) % NTC) < ntc)
            st_pages_skipped <= st_pages_skipped + 1'b1;
        end else if (pcmd_ready) begin
          pidx          <= pidx + 1'b1;
          issued        <= issued + 1'b1;
          st_pages_read <= st_pages_read + 1'b1;
        end
      end

      unique case (state)
        E_IDLE: if (req_valid) begin
          seq_q <= req_seq; layer_q <= req_layer; head_q <= req_head;
          slen_q <= req_seq_len; l_q <= req_l; k_q <= req_k;
          q_q <= req_q; vbar_q <= req_vbar;
          tk_start <= 1'b1; tk_k <= req_r;
          k1_clear <= 1'b1; k2_clear <= 1'b1;
          hid_mask <= '0; tok_mask <= '0;
          pidx <= '0;
          state <= E_TOPR;
        end
        E_TOPR: if (!tk_start) begin
          pidx <= pidx + 1'b1;
          if (int'(pidx) == D_HEAD-1) state <= E_TOPR_WAIT;
        end
        E_TOPR_WAIT: if (tk_done) begin
          hid_mask  <= tk_mask[D_HEAD-1:0];
          l1_sel    <= tk_sum;
          rs0_start <= 1'b1;
          pidx      <= '0;
          issued    <= '0;
          done_cnt  <= '0;
          state     <= E_ISSUE_H;
        end
        E_ISSUE_H: if (cand_end) state <= E_WAIT_H;
        E_WAIT_H: if (done_cnt == issued && !k1_busy && !rs0_busy && !rs0_start) begin
          k1_sm <= 1'b1;
          state <= E_SM1;
        end
        E_SM1: if (k1_done) begin
          all_sum_q <= k1_esum;
          tk_start  <= 1'b1;
          tk_k      <= k_q;
          k1_emit   <= 1'b1;
          state     <= E_TOPK_WAIT;
        end
        E_TOPK_WAIT: if (tk_done) begin
          tok_mask  <= tk_mask;
          sel_sum_q <= tk_sum;
          pidx      <= '0;
          issued    <= '0;
          done_cnt  <= '0;
          state     <= E_ISSUE_K;
        end
        E_ISSUE_K: if (cand_end) state <= E_WAIT_K;
        E_WAIT_K: if (done_cnt == issued && !k2_busy) begin
          k2_sm <= 1'b1;
          state <= E_SM2;
        end
        E_SM2: if (k2_done) begin
          pidx     <= '0;
          issued   <= '0;
          done_cnt <= '0;
          state    <= E_ISSUE_V;
        end
        E_ISSUE_V: if (cand_end) state <= E_WAIT_V;
        E_WAIT_V: if (done_cnt == issued) begin
          su_start <= 1'b1;
          state    <= E_SUM;
        end
        E_SUM: if (su_done) begin
          resp_valid <= 1'b1;
          st_heads   <= st_heads + 1'b1;
          state      <= E_IDLE;
        end
        default: state <= E_IDLE;
      endcase
    end
  end
endmodule
