// tb_attention_kernel: self-checking test of one attention kernel (logit, softmax, attend).
//
// Uses a kernel sized for 64 tokens and a 50-token sequence. Reference values are
// computed here from the beats sent, with tb_kv_pkg::exp_q15 for the exponential.
//   1. clear (checks its ROWS-cycle length);
//   2. approximate-score pass: hidden-indexed K beats for 6 hidden dims, softmax over
//      all live tokens, emit; every emitted weight, e_sum and the emit length (one token
//      per cycle) are compared;
//   3. exact pass: clear, token-indexed K beats of 9 selected tokens, softmax restricted
//      to the token mask, then token-indexed V beats; e_sum and all 128 accumulators are
//      compared with sum_j w_j * V[j].
module tb_attention_kernel;
  import instinfer_pkg::*;
  import tb_kv_pkg::*;
  localparam int SM = 64, ROWS = SM / ELEMS, SL = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [D_HEAD-1:0][15:0] q;
  logic [$clog2(SM):0] seq_len = 7'(SL);
  logic [SM-1:0] tok_mask = '0;
  logic sel_only = 0;
  logic [15:0] y = '0;
  logic cmd_clear = 0, cmd_softmax = 0, cmd_emit = 0, beat_valid = 0;
  kv_beat_t beat = '0;
  logic busy, done, ev_valid, ev_last;
  logic [$clog2(SM)-1:0] ev_idx;
  logic [15:0] ev_w;
  logic [31:0] e_sum;
  logic signed [D_HEAD-1:0][47:0] acc;

  attention_kernel #(.S_MAX_P(SM), .D_HEAD_P(D_HEAD)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] kval(input bit v, input int t, input int h);
    return kv_val(9, 9, 9, v, t, h);
  endfunction

  task automatic pulse(ref logic sig, output int cycles);
    @(negedge clk); sig = 1;
    @(negedge clk); sig = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  task automatic send(input kv_beat_t b);
    @(negedge clk); beat = b; beat_valid = 1;
    @(negedge clk); beat_valid = 0;
  endtask

  initial begin
    int cyc, hs [6], sel [9], n_ev, bad;
    longint s [SM], mx, esum, w [SM], a;
    for (int h = 0; h < D_HEAD; h++) q[h] = kv_val(1, 2, 3, 0, 4, h);
    hs = '{3, 17, 40, 64, 99, 127};
    sel = '{0, 5, 6, 17, 31, 32, 40, 48, 49};
    repeat (2) @(negedge clk); rst_n = 1;

    // 1. clear
    pulse(cmd_clear, cyc);
    check(cyc == ROWS + 1, $sformatf("clear took %0d cycles", cyc));

    // 2. hidden-indexed pass
    for (int i = 0; i < 6; i++)
      for (int t0 = 0; t0 < SM; t0 += ELEMS) begin
        kv_beat_t b;
        b = '0; b.kind = KV_KHID; b.hid = HIDW'(hs[i]); b.tok = TOKW'(t0);
        for (int l = 0; l < ELEMS; l++) b.data[l] = kval(0, t0 + l, hs[i]);
        send(b);
      end
    y = 16'd5000;
    mx = -(longint'(1) << 40);
    for (int t = 0; t < SL; t++) begin
      s[t] = 0;
      for (int i = 0; i < 6; i++)
        s[t] += longint'($signed(q[hs[i]])) * longint'($signed(kval(0, t, hs[i])));
      s[t] = (s[t] * 5000) >>> 23;
      if (s[t] > mx) mx = s[t];
    end
    esum = 0;
    for (int t = 0; t < SL; t++) begin w[t] = exp_q15(s[t] - mx); esum += w[t]; end
    pulse(cmd_softmax, cyc);
    check(cyc == 2 * (ROWS + 1) + 1, $sformatf("softmax took %0d cycles", cyc));
    check(e_sum == 32'(esum), $sformatf("approximate e_sum %0d vs %0d", e_sum, esum));
    @(negedge clk); cmd_emit = 1;
    @(negedge clk); cmd_emit = 0;
    n_ev = 0; bad = 0;
    while (!done) begin
      if (ev_valid) begin
        if (int'(ev_idx) != n_ev || ev_w != 16'(w[n_ev]) || ev_last != (n_ev == SL - 1)) bad++;
        n_ev++;
      end
      @(negedge clk);
    end
    check(n_ev == SL && bad == 0, $sformatf("emitted %0d weights, %0d wrong", n_ev, bad));

    // 3. exact pass over selected tokens
    pulse(cmd_clear, cyc);
    for (int i = 0; i < 9; i++) tok_mask[sel[i]] = 1;
    for (int i = 0; i < 9; i++)
      for (int h0 = 0; h0 < D_HEAD; h0 += ELEMS) begin
        kv_beat_t b;
        b = '0; b.kind = KV_KTOK; b.tok = TOKW'(sel[i]); b.hid = HIDW'(h0);
        for (int l = 0; l < ELEMS; l++) b.data[l] = kval(0, sel[i], h0 + l);
        send(b);
      end
    y = 16'd2896; sel_only = 1;
    mx = -(longint'(1) << 40);
    for (int i = 0; i < 9; i++) begin
      int t;
      t = sel[i];
      s[t] = 0;
      for (int h = 0; h < D_HEAD; h++) s[t] += longint'($signed(q[h])) * longint'($signed(kval(0, t, h)));
      s[t] = (s[t] * 2896) >>> 23;
      if (s[t] > mx) mx = s[t];
    end
    esum = 0;
    for (int i = 0; i < 9; i++) begin w[sel[i]] = exp_q15(s[sel[i]] - mx); esum += w[sel[i]]; end
    pulse(cmd_softmax, cyc);
    check(e_sum == 32'(esum), $sformatf("exact e_sum %0d vs %0d", e_sum, esum));
    for (int i = 0; i < 9; i++)
      for (int h0 = 0; h0 < D_HEAD; h0 += ELEMS) begin
        kv_beat_t b;
        b = '0; b.kind = KV_VTOK; b.tok = TOKW'(sel[i]); b.hid = HIDW'(h0);
        for (int l = 0; l < ELEMS; l++) b.data[l] = kval(1, sel[i], h0 + l);
        send(b);
      end
    @(negedge clk);
    bad = 0;
    for (int h = 0; h < D_HEAD; h++) begin
      a = 0;
      for (int i = 0; i < 9; i++) a += w[sel[i]] * longint'($signed(kval(1, sel[i], h)));
      if (longint'($signed(acc[h])) != a) begin bad++; if (bad < 4) $display("acc[%0d] %0d vs %0d", h, acc[h], a); end
    end
    check(bad == 0, $sformatf("%0d accumulators wrong", bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
