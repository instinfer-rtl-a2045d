// tb_instcsd: end-to-end test of the in-storage attention device at its full default size.
//
// Eight flash channel models hold the KV cache of OPT-13B-sized heads (128-wide heads,
// up to 2048 tokens), with contents defined by tb_kv_pkg::kv_val. The test:
//   1. runs SparF attention on a 2048-token head with r = 16, k = 256 (1/8 ratio), l = 16;
//   2. runs a 1000-token head (partial last pages) with r = 16, k = 125, l = 8;
//   3. appends 16 decode-phase tokens of all 40 heads of one layer through the group
//      buffer, checks the 80 flushed pages (40 K, 40 V) on the flash side, and runs
//      attention on one of those heads over them (reading the written pages back).
// Every response is compared with tb_kv_pkg::sparf_ref (output vector, alpha, and the
// hidden and token masks inside the engine). Each mechanism must happen at least once:
// page skipping, filter drops, group flushes, a full flash command queue, two channels
// competing for the engine, and the local-window tokens being kept.
module tb_instcsd;
  import instinfer_pkg::*;
  import tb_kv_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  // ---- DUT ----
  logic                        req_valid = 0, req_ready;
  logic [$clog2(NSEQ)-1:0]     req_seq = '0;
  logic [$clog2(NLAYERS)-1:0]  req_layer = '0;
  logic [$clog2(NHEADS)-1:0]   req_head = '0;
  logic [TOKW:0]               req_seq_len = '0, req_l = '0;
  logic [$clog2(K_TOP+1)-1:0]  req_r = '0, req_k = '0;
  logic [D_HEAD-1:0][15:0]     req_q = '0, req_vbar = '0;
  logic                        resp_valid;
  logic [D_HEAD-1:0][15:0]     resp_out;
  logic [15:0]                 resp_alpha;
  logic                        app_valid = 0, app_ready;
  logic [$clog2(NSEQ)-1:0]     app_seq = '0;
  logic [$clog2(NLAYERS)-1:0]  app_layer = '0;
  logic [$clog2(NHEADS)-1:0]   app_head = '0;
  logic [TOKW-1:0]             app_tok = '0;
  logic [D_HEAD-1:0][15:0]     app_k = '0, app_v = '0;
  logic [NCH-1:0]              f_cmd_valid, f_cmd_ready, f_cmd_write, f_rd_valid, f_rd_ready;
  logic [NCH-1:0]              f_wr_valid, f_wr_ready;
  logic [NCH-1:0][ADDRW-1:0]   f_cmd_row;
  logic [NCH-1:0][ELEMS-1:0][15:0] f_rd_data, f_wr_data;
  logic [31:0] st_pages_read, st_pages_skipped, st_beats_kept, st_beats_dropped;
  logic [31:0] st_pages_written, st_heads;

  instcsd dut (.*);

  for (genvar c = 0; c < NCH; c++) begin : g_flash
    flash_channel_model #(.CH(c)) u_flash (
      .clk, .f_cmd_valid(f_cmd_valid[c]), .f_cmd_ready(f_cmd_ready[c]),
      .f_cmd_write(f_cmd_write[c]), .f_cmd_row(f_cmd_row[c]),
      .f_rd_valid(f_rd_valid[c]), .f_rd_ready(f_rd_ready[c]), .f_rd_data(f_rd_data[c]),
      .f_wr_valid(f_wr_valid[c]), .f_wr_ready(f_wr_ready[c]), .f_wr_data(f_wr_data[c])
    );
  end

  // ---- mechanism counters ----
  int contention = 0, local_kept = 0;
  always @(posedge clk) if ($countones(dut.n_out_valid) > 1) contention++;

  function automatic int queue_full_cycles();
    return g_flash[0].u_flash.full_cycles + g_flash[1].u_flash.full_cycles +
           g_flash[2].u_flash.full_cycles + g_flash[3].u_flash.full_cycles +
           g_flash[4].u_flash.full_cycles + g_flash[5].u_flash.full_cycles +
           g_flash[6].u_flash.full_cycles + g_flash[7].u_flash.full_cycles;
  endfunction
  function automatic int write_mismatches();
    return g_flash[0].u_flash.write_mismatch + g_flash[1].u_flash.write_mismatch +
           g_flash[2].u_flash.write_mismatch + g_flash[3].u_flash.write_mismatch +
           g_flash[4].u_flash.write_mismatch + g_flash[5].u_flash.write_mismatch +
           g_flash[6].u_flash.write_mismatch + g_flash[7].u_flash.write_mismatch;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Query with a few dominant dims, mean value vector over the S tokens.
  task automatic run_head(input int seq, input int layer, input int head, input int S,
                          input int r, input int k, input int l);
    logic [15:0] q [D_HEAD];
    logic [15:0] vb [D_HEAD];
    sparf_res_t  ref_r;
    longint      t0, sum;
    int          bad, mbad;
    for (int h = 0; h < D_HEAD; h++) begin
      q[h] = kv_val(seq + 1000, layer, head, 0, 7, h);
      if (h % 9 == 2) q[h] = 16'($signed(q[h]) * 3);
      sum = 0;
      for (int t = 0; t < S; t++) sum += longint'($signed(kv_val(seq, layer, head, 1, t, h)));
      vb[h] = 16'(sum / S);
    end
    ref_r = sparf_ref(seq, layer, head, S, r, k, l, q, vb);

    @(negedge clk);
    req_seq = $bits(req_seq)'(seq); req_layer = $bits(req_layer)'(layer);
    req_head = $bits(req_head)'(head); req_seq_len = $bits(req_seq_len)'(S);
    req_r = $bits(req_r)'(r); req_k = $bits(req_k)'(k); req_l = $bits(req_l)'(l);
    for (int h = 0; h < D_HEAD; h++) begin req_q[h] = q[h]; req_vbar[h] = vb[h]; end
    req_valid = 1;
    do @(posedge clk); while (!req_ready);
    t0 = cycles;
    @(negedge clk);
    req_valid = 0;
    do @(posedge clk); while (!resp_valid);
    $display("head seq=%0d layer=%0d head=%0d S=%0d: %0d cycles, alpha=%0d (ref %0d)",
             seq, layer, head, S, cycles - t0, resp_alpha, ref_r.alpha);
    bad = 0;
    for (int h = 0; h < D_HEAD; h++) if (resp_out[h] !== ref_r.out[h]) begin
      if (bad < 4) $display("  out[%0d] = %0d, ref %0d", h, $signed(resp_out[h]),
                            $signed(ref_r.out[h]));
      bad++;
    end
    check(bad == 0, $sformatf("output vector of head S=%0d (%0d dims differ)", S, bad));
    check(int'(resp_alpha) == ref_r.alpha, "alpha");
    mbad = 0;
    for (int h = 0; h < D_HEAD; h++) if (dut.u_engine.hid_mask[h] != ref_r.hsel[h]) mbad++;
    check(mbad == 0, "top-r hidden mask");
    mbad = 0;
    for (int t = 0; t < S_MAX; t++) if (dut.u_engine.tok_mask[t] != ref_r.tsel[t]) mbad++;
    check(mbad == 0, $sformatf("top-k token mask (%0d differ)", mbad));
    check($countones(dut.u_engine.tok_mask) == ref_r.n_tsel, "top-k count");
    for (int t = S - l; t < S; t++) if (dut.u_engine.tok_mask[t]) local_kept++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    run_head(0, 3, 5, 2048, R_TOP, K_TOP, 16);
    run_head(2, 39, 39, 1000, R_TOP, 125, 8);

    // decode-phase append of tokens 16..31 of all heads of (seq 3, layer 1)
    for (int t = 16; t < 32; t++)
      for (int hd = 0; hd < NHEADS; hd++) begin
        @(negedge clk);
        app_seq = 3; app_layer = 1; app_head = $bits(app_head)'(hd); app_tok = TOKW'(t);
        for (int h = 0; h < D_HEAD; h++) begin
          app_k[h] = kv_val(3, 1, hd, 0, t, h);
          app_v[h] = kv_val(3, 1, hd, 1, t, h);
        end
        app_valid = 1;
        do @(posedge clk); while (!app_ready);
        @(negedge clk);
        app_valid = 0;
      end
    wait (!dut.u_gbuf.flushing);
    repeat (20) @(posedge clk);
    check(st_pages_written == 2 * NHEADS, "group flush wrote the K and V pages of all heads");
    check(g_flash[1].u_flash.pages_written == 2 * NHEADS, "flushed pages went to channel 1 (group 1)");
    check(write_mismatches() == 0, "content of flushed pages");
    run_head(3, 1, 7, 32, R_TOP, 4, 2);

    $display("pages read %0d, skipped %0d, beats kept %0d, dropped %0d, written %0d",
             st_pages_read, st_pages_skipped, st_beats_kept, st_beats_dropped,
             st_pages_written);
    $display("queue-full cycles %0d, channel contention cycles %0d, local tokens kept %0d",
             queue_full_cycles(), contention, local_kept);
    check(st_heads == 3, "three heads served");
    check(st_pages_skipped > 0, "mechanism: page-level skip (first loading step)");
    check(st_beats_dropped > 0, "mechanism: filter drop (second loading step)");
    check(st_beats_kept > 0, "mechanism: filter keep");
    check(queue_full_cycles() > 0, "mechanism: outstanding-read queue full");
    check(contention > 0, "mechanism: channels competing for the engine");
    check(local_kept == 16 + 8 + 2, "mechanism: local window tokens kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
