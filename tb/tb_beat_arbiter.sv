// tb_beat_arbiter: self-checking test of the round-robin beat merger.
//
// Eight sources each send a numbered sequence of beats with random valid gaps while the
// sink applies random back-pressure. Checked: every beat arrives exactly once and in
// order per source; a source that waits is served within N grants (fairness of the
// round-robin); with all sources busy the grants rotate 0,1,...,7; no beat is lost
// under back-pressure (valid held until ready).
module tb_beat_arbiter;
  import instinfer_pkg::*;
  localparam int N = NCH, PER = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] in_valid = '0, in_ready;
  kv_beat_t     in_beat [N];
  logic         out_valid, out_ready = 0;
  kv_beat_t     out_beat;

  beat_arbiter #(.N(N)) dut (.*);

  int sent [N], got [N], waited [N];
  int order_bad = 0, unfair = 0, maxwait = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic kv_beat_t mk(input int src, input int n);
    kv_beat_t b;
    b = '0;
    b.kind = KV_KTOK;
    b.tok  = TOKW'(n);
    b.hid  = HIDW'(src);
    for (int l = 0; l < ELEMS; l++) b.data[l] = 16'(src * 1000 + n + l);
    return b;
  endfunction

  bit phase_full = 0;
  int rot_bad = 0, last_src = -1;

  logic [N-1:0] fired = '0;
  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < N; s++) if (fired[s]) in_valid[s] = 0;
    // sink
    out_ready = phase_full ? 1'b1 : 1'($urandom_range(3) != 0);
    for (int s = 0; s < N; s++) begin
      if (!in_valid[s] && sent[s] < PER && (phase_full || $urandom_range(1) == 0)) begin
        in_valid[s] = 1;
        in_beat[s]  = mk(s, sent[s]);
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < N; s++) begin
      fired[s] = in_valid[s] && in_ready[s];
      if (fired[s]) begin
        sent[s]++;
        waited[s] = 0;
      end else if (in_valid[s] && out_ready && out_valid) begin
        waited[s]++;
        if (waited[s] > maxwait) maxwait = waited[s];
      end
    end
    if (out_valid && out_ready) begin
      int src;
      src = int'(out_beat.hid);
      if (int'(out_beat.tok) != got[src] || out_beat != mk(src, got[src])) order_bad++;
      got[src]++;
      if (phase_full && last_src >= 0 && src != (last_src + 1) % N) rot_bad++;
      last_src = src;
    end
  end

  initial begin
    for (int s = 0; s < N; s++) begin sent[s] = 0; got[s] = 0; waited[s] = 0; in_beat[s] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    wait (sent[0] >= PER / 2);
    phase_full = 1;
    repeat (4 * N) @(posedge clk);
    phase_full = 0;
    wait (sent[0] == PER && sent[1] == PER && sent[2] == PER && sent[3] == PER &&
          sent[4] == PER && sent[5] == PER && sent[6] == PER && sent[7] == PER);
    repeat (5) @(posedge clk);
    for (int s = 0; s < N; s++) check(got[s] == PER, $sformatf("source %0d: %0d beats arrived", s, got[s]));
    check(order_bad == 0, $sformatf("%0d beats out of order or corrupted", order_bad));
    check(maxwait < N, $sformatf("longest wait %0d grants", maxwait));
    check(rot_bad == 0, $sformatf("rotation broken %0d times with all sources busy", rot_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
