// tb_nfc: self-checking test of one flash channel controller with its filter.
//
// A flash_channel_model (array read latency 200 cycles, one beat per cycle) sits on the
// channel. The test:
//   1. issues 24 page reads of all three kinds back to back with random filter masks and
//      checks the beats that come out (tag, data, order) against the expected page
//      contents after filtering, the page_done count and the kept/dropped strobes;
//   2. checks the read pipeline: with 8 reads outstanding the 24 pages must stream in
//      at most 200 + 24*128 + 40 cycles (array latency paid once), and the controller
//      must have filled its outstanding-read queue;
//   3. writes one page and checks its content on the flash side, and that a write
//      command waiting behind reads is held until the reads are issued.
module tb_nfc;
  import instinfer_pkg::*;
  import tb_kv_pkg::*;
  localparam int CHN = 3, NPG = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready, wcmd_valid = 0, wcmd_ready, wdata_valid = 0, wdata_ready;
  page_cmd_t cmd = '0, wcmd = '0;
  logic [ELEMS-1:0][15:0] wdata = '0;
  logic [D_HEAD-1:0] hid_mask;
  logic [S_MAX-1:0]  tok_mask;
  logic [TOKW:0]     seq_len;
  logic out_valid, out_ready = 1, page_done, beat_kept, beat_dropped;
  kv_beat_t out_beat;
  logic f_cmd_valid, f_cmd_ready, f_cmd_write, f_rd_valid, f_rd_ready, f_wr_valid, f_wr_ready;
  logic [ADDRW-1:0] f_cmd_row;
  logic [ELEMS-1:0][15:0] f_rd_data, f_wr_data;

  nfc dut (.*);
  flash_channel_model #(.CH(CHN), .TR(200), .GAP(0), .QDEPTH(16)) u_flash (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  kv_beat_t exp_q [$];
  int wr_early = 0, n_done = 0, n_kept = 0, n_drop = 0, n_out = 0, bad_beats = 0, max_used = 0;
  always @(posedge clk) if (rst_n) begin
    if (page_done) n_done++;
    if (beat_kept) n_kept++;
    if (beat_dropped) n_drop++;
    if (int'(dut.used) > max_used) max_used = int'(dut.used);
    if (out_valid && out_ready) begin
      n_out++;
      if (exp_q.size() == 0 || out_beat != exp_q[0]) begin
        if (bad_beats < 3) $display("unexpected beat kind %0d tok %0d hid %0d", out_beat.kind,
                                    out_beat.tok, out_beat.hid);
        bad_beats++;
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
  end

  // Expected beats of one page, written from the page layout, not from beat_tag().
  task automatic expect_page(input page_id_t p, input kv_kind_e kind);
    for (int b = 0; b < BEATS_PER_PAGE; b++) begin
      kv_beat_t e;
      bit keep;
      e = '0;
      e.kind = kind;
      if (kind == KV_KHID) begin
        e.hid = HIDW'(p.hid0 + b / 32);
        e.tok = TOKW'(p.tok0 + (b % 32) * 16);
        for (int l = 0; l < ELEMS; l++) e.data[l] = kv_val(p.seq, p.layer, p.head, 0, int'(e.tok) + l, int'(e.hid));
        keep = hid_mask[e.hid];
      end else begin
        e.tok = TOKW'(p.tok0 + b / 8);
        e.hid = HIDW'((b % 8) * 16);
        for (int l = 0; l < ELEMS; l++) e.data[l] = kv_val(p.seq, p.layer, p.head, kind == KV_VTOK, int'(e.tok), int'(e.hid) + l);
        keep = tok_mask[e.tok];
      end
      if (keep && int'(e.tok) < int'(seq_len)) exp_q.push_back(e);
    end
  endtask

  initial begin
    longint t0, t1;
    int n_exp;
    for (int h = 0; h < D_HEAD; h++) hid_mask[h] = ($urandom_range(3) == 0);
    for (int t = 0; t < S_MAX; t++) tok_mask[t] = ($urandom_range(3) == 0);
    seq_len = (TOKW+1)'(1500);
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    t0 = u_flash.cyc;
    for (int i = 0; i < NPG; i++) begin
      page_id_t p;
      longint row;
      row = 12345 + i * 97;
      p = page_of(CHN, row);
      cmd.write = 0;
      cmd.kind  = (p.region == 2) ? KV_KHID : (p.region == 1) ? KV_VTOK : KV_KTOK;
      cmd.row   = ADDRW'(row);
      cmd.tok0  = TOKW'(p.tok0);
      cmd.hid0  = HIDW'(p.hid0);
      expect_page(p, cmd.kind);
      cmd_valid = 1;
      // a write request arrives while reads are waiting: it must be held back
      if (i == 4) begin wcmd_valid = 1; wcmd.write = 1; wcmd.row = ADDRW'(777); end
      // handshakes are judged at the falling edge, where every input has settled
      #1;
      while (!cmd_ready) begin
        if (wcmd_ready) wr_early++;
        @(negedge clk);
      end
      if (wcmd_ready) wr_early++;
      @(negedge clk);
    end
    cmd_valid = 0;
    n_exp = exp_q.size();
    // write: command, then one page of data
    #1;
    while (!wcmd_ready) @(negedge clk);
    @(negedge clk); wcmd_valid = 0;
    for (int b = 0; b < BEATS_PER_PAGE; b++) begin
      for (int l = 0; l < ELEMS; l++) wdata[l] = page_elem(page_of(CHN, 777), b * ELEMS + l);
      wdata_valid = 1;
      #1;
      while (!wdata_ready) @(negedge clk);
      @(negedge clk);
    end
    wdata_valid = 0;
    wait (n_done == NPG);
    t1 = u_flash.cyc;
    repeat (5) @(posedge clk);
    $display("%0d pages read in %0d cycles, %0d beats kept, %0d dropped", NPG, t1 - t0, n_kept, n_drop);
    check(bad_beats == 0 && exp_q.size() == 0, $sformatf("filtered beat stream (%0d bad, %0d missing)", bad_beats, exp_q.size()));
    check(n_out == n_kept && n_kept + n_drop == NPG * BEATS_PER_PAGE, "kept/dropped strobes");
    check(n_kept > 0 && n_drop > 0, "both filter outcomes happened");
    check(max_used == 8, $sformatf("outstanding-read queue filled (max %0d)", max_used));
    check(t1 - t0 <= 200 + NPG * BEATS_PER_PAGE + 40, $sformatf("read pipeline rate: %0d cycles", t1 - t0));
    check(wr_early == 0, "write held back while reads wait");
    check(u_flash.pages_written == 1 && u_flash.write_mismatch == 0, "written page content");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
