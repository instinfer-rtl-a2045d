// tb_nfc_filter: self-checking test of the NFC filter (second step of dual-step loading).
//
// Random beats of all three kinds against random masks: a hidden-indexed K beat passes
// only when its hidden dim is in the top-r mask, a token-indexed beat only when its
// token is in the top-k mask, and no beat of a token at or past the sequence length
// passes. Passing beats must keep their tag and data and wait for out_ready; dropped
// beats are consumed at once. Combinational: checked after a settle delay.
module tb_nfc_filter;
  import instinfer_pkg::*;
  int checks = 0, failures = 0;
  int n_kept = 0, n_dropped = 0;
  logic in_valid, in_ready, out_valid, out_ready, kept, dropped;
  kv_beat_t in_beat, out_beat;
  logic [D_HEAD-1:0] hid_mask;
  logic [S_MAX-1:0]  tok_mask;
  logic [TOKW:0]     seq_len;

  nfc_filter dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int it = 0; it < 3000; it++) begin
      bit is_strong;
      for (int h = 0; h < D_HEAD; h++) hid_mask[h] = ($urandom_range(7) == 0);
      for (int t = 0; t < S_MAX; t++) tok_mask[t] = ($urandom_range(7) == 0);
      seq_len   = (TOKW+1)'($urandom_range(S_MAX, 1));
      in_valid  = 1'($urandom);
      out_ready = 1'($urandom);
      in_beat.kind = kv_kind_e'($urandom_range(2));
      in_beat.tok  = TOKW'($urandom);
      in_beat.hid  = HIDW'($urandom);
      for (int l = 0; l < ELEMS; l++) in_beat.data[l] = 16'($urandom);
      #1;
      is_strong = (in_beat.kind == KV_KHID ? hid_mask[in_beat.hid] : tok_mask[in_beat.tok]) &&
               (int'(in_beat.tok) < int'(seq_len));
      check(out_valid == (in_valid && is_strong), "out_valid");
      check(in_ready == (is_strong ? out_ready : 1'b1), "in_ready");
      check(out_beat == in_beat, "beat passes unchanged");
      check(kept == (in_valid && is_strong && out_ready) && dropped == (in_valid && !is_strong),
            "kept/dropped strobes");
      if (kept) n_kept++;
      if (dropped) n_dropped++;
    end
    check(n_kept > 20 && n_dropped > 20, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
