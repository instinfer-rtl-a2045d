// tb_kv_pkg: test data and a reference model of SparF attention for the testbenches.
//
// kv_val() defines the content of the whole KV cache as a hash of (sequence, layer,
// head, K/V, token, hidden dim), so no table is stored: the flash model produces page
// contents from it and the reference model reads the same values. page_of() inverts the
// page mapping (channel, row) -> which KV data a page holds, written independently of
// the mapping logic. sparf_ref() computes Algorithm 1 in the same fixed-point format as
// the hardware (Q8.8 elements, U1.15 exponentials) from first principles: a plain
// selection loop for top-r/top-k (ties to the lower index), direct sums for the logits.
package tb_kv_pkg;
  import instinfer_pkg::*;

  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x ^ (x >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // One KV element, Q8.8 in [-2, 2).
  function automatic logic [15:0] kv_val(input int seq, input int layer, input int head,
                                         input bit is_v, input int tok, input int hid);
    logic [31:0] h;
    h = mix32(32'(seq) * 32'd2654435761 ^ 32'(layer) * 32'd40503 ^ 32'(head) * 32'd97 ^
              (is_v ? 32'h5bd1e995 : 32'h0) ^ (32'(tok) << 8) ^ 32'(hid) ^ 32'h1234_5678);
    return 16'(int'(h[9:0]) - 512);   // [-2, 2)
  endfunction

  // What a flash page holds: decode (channel, row).
  typedef struct {
    int seq, layer, head, region, tok0, hid0;
  } page_id_t;

  function automatic page_id_t page_of(input int ch, input longint row);
    page_id_t p;
    int region_sz, off, x;
    longint qd;
    region_sz = (S_MAX / GROUP_TOK / NCH) * NHEADS;   // equals the hidden-indexed region
    qd = row / region_sz;
    off = int'(row % region_sz);
    p.region = int'(qd % 3);
    p.layer  = int'((qd / 3) % NLAYERS);
    p.seq    = int'((qd / 3) / NLAYERS);
    p.head   = off % NHEADS;
    x        = off / NHEADS;
    if (p.region == 2) begin
      p.hid0 = ((x / (S_MAX / TOK_PER_HPAGE)) * NCH + ch) * HID_GROUP;
      p.tok0 = (x % (S_MAX / TOK_PER_HPAGE)) * TOK_PER_HPAGE;
    end else begin
      p.tok0 = (x * NCH + ch) * GROUP_TOK;
      p.hid0 = 0;
    end
    return p;
  endfunction

  // Element e (0..PAGE_ELEMS-1) of a page.
  function automatic logic [15:0] page_elem(input page_id_t p, input int e);
    if (p.region == 2)
      return kv_val(p.seq, p.layer, p.head, 1'b0, p.tok0 + e % TOK_PER_HPAGE,
                    p.hid0 + e / TOK_PER_HPAGE);
    else
      return kv_val(p.seq, p.layer, p.head, p.region == 1, p.tok0 + e / D_HEAD, e % D_HEAD);
  endfunction

  // exp(x) lane, as defined for the hardware: 2^-z by table of 2^(-i/64) and a shift.
  function automatic logic [15:0] exp_q15(input longint diff);   // diff <= 0, Q.8
    longint z, v;
    int fi;
    if (diff > 0) diff = 0;
    z  = ((-diff) * 47274) >>> 15;
    if ((z >>> 8) >= 16) return 16'd0;
    fi = int'((z >>> 2) & 63);
    v  = longint'(1) << 30;
    for (int i = 0; i < fi; i++) v = (v * 1062175491) >>> 30;
    return 16'((v >>> 15) >>> (z >>> 8));
  endfunction

  function automatic int rsqrt_ref(input longint l1_sel, input longint l1_all);
    longint y, c;
    y = 0;
    for (int b = 15; b >= 0; b--) begin
      c = y | (longint'(1) << b);
      if (c * c * D_HEAD * l1_sel <= (l1_all << 30)) y = c;
    end
    return int'(y);
  endfunction

  typedef struct {
    logic [15:0] out [D_HEAD];
    int          alpha;
    bit          hsel [D_HEAD];
    bit          tsel [S_MAX];
    int          n_hsel, n_tsel;
  } sparf_res_t;

  function automatic sparf_res_t sparf_ref(input int seq, input int layer, input int head,
      input int S, input int r, input int k, input int l,
      input logic [15:0] q [D_HEAD], input logic [15:0] vbar [D_HEAD]);
    sparf_res_t res;
    longint qa [D_HEAD];
    longint l1a, l1s, sc, mx, sel_sum, all_sum, e_sel, y0, y1, alpha, inv, attn, o;
    longint s0 [S_MAX];
    longint e0 [S_MAX];
    longint key [S_MAX];
    longint acc [D_HEAD];
    bit     taken [S_MAX];
    int     best;
    l1a = 0;
    for (int h = 0; h < D_HEAD; h++) begin
      qa[h] = $signed(q[h]) < 0 ? -longint'($signed(q[h])) : longint'($signed(q[h]));
      l1a += qa[h];
      res.hsel[h] = 0;
    end
    // step 1: top-r of |q|
    l1s = 0;
    for (int n = 0; n < r; n++) begin
      best = -1;
      for (int h = 0; h < D_HEAD; h++)
        if (!res.hsel[h] && (best < 0 || qa[h] > qa[best])) best = h;
      res.hsel[best] = 1;
      l1s += qa[best];
    end
    res.n_hsel = r;
    // steps 2-4
    y0 = rsqrt_ref(l1s, l1a);
    mx = -(longint'(1) << 40);
    for (int t = 0; t < S; t++) begin
      s0[t] = 0;
      for (int h = 0; h < D_HEAD; h++)
        if (res.hsel[h])
          s0[t] += longint'($signed(q[h])) * longint'($signed(kv_val(seq, layer, head, 0, t, h)));
      sc = (s0[t] * y0) >>> 23;
      if (sc > mx) mx = sc;
    end
    all_sum = 0;
    for (int t = 0; t < S; t++) begin
      e0[t] = exp_q15(((s0[t] * y0) >>> 23) - mx);
      all_sum += e0[t];
      key[t] = e0[t] + ((t + l >= S) ? 32768 : 0);
      taken[t] = 0;
    end
    // steps 5-7: top-k
    sel_sum = 0;
    res.n_tsel = (k < S) ? k : S;
    for (int n = 0; n < res.n_tsel; n++) begin
      best = -1;
      for (int t = 0; t < S; t++)
        if (!taken[t] && (best < 0 || key[t] > key[best])) best = t;
      taken[best] = 1;
      sel_sum += e0[best];
    end
    for (int t = 0; t < S_MAX; t++) res.tsel[t] = (t < S) ? taken[t] : 0;
    // step 10
    y1 = rsqrt_ref(1, 1);
    mx = -(longint'(1) << 40);
    for (int t = 0; t < S; t++) if (taken[t]) begin
      s0[t] = 0;
      for (int h = 0; h < D_HEAD; h++)
        s0[t] += longint'($signed(q[h])) * longint'($signed(kv_val(seq, layer, head, 0, t, h)));
      sc = (s0[t] * y1) >>> 23;
      if (sc > mx) mx = sc;
    end
    e_sel = 0;
    for (int h = 0; h < D_HEAD; h++) acc[h] = 0;
    for (int t = 0; t < S; t++) if (taken[t]) begin
      e0[t] = exp_q15(((s0[t] * y1) >>> 23) - mx);
      e_sel += e0[t];
      for (int h = 0; h < D_HEAD; h++)
        acc[h] += e0[t] * longint'($signed(kv_val(seq, layer, head, 1, t, h)));
    end
    // step 11
    alpha = (sel_sum << 15) / all_sum;
    if (alpha > 32768) alpha = 32768;
    inv = (longint'(1) << 46) / e_sel;
    for (int h = 0; h < D_HEAD; h++) begin
      attn = (acc[h] * inv) >>> 46;   // |acc| <= e_sel * 2^9, so this stays below 2^55
      o = (alpha * attn + (32768 - alpha) * longint'($signed(vbar[h]))) >>> 15;
      res.out[h] = 16'(o);
    end
    res.alpha = int'(alpha);
    return res;
  endfunction
endpackage
