// tb_group_buffer: self-checking test of the decode-phase group buffer.
//
// Appends the K and V vectors of tokens 16..47 of all 40 heads of one layer (heads in
// order for each token, as the GPU produces them), with the write side (normally the
// NFCs) applying random back-pressure. Each time the last head completes a 16-token
// group the buffer must write the 40 K pages of the group, heads in order, and then
// the 40 V pages. The test decodes every write command with
// tb_kv_pkg::page_of (independent of the mapping logic) and checks the channel, the
// page identity and all 2048 elements of each page against tb_kv_pkg::kv_val. Also
// checked: appends stall while a flush runs, no page is written before its group is
// complete, and with no back-pressure a flush takes 2 * 40 * (1 + 128) cycles.
module tb_group_buffer;
  import instinfer_pkg::*;
  import tb_kv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic app_valid = 0, app_ready;
  logic [$clog2(NSEQ)-1:0] app_seq = '0;
  logic [$clog2(NLAYERS)-1:0] app_layer = '0;
  logic [$clog2(NHEADS)-1:0] app_head = '0;
  logic [TOKW-1:0] app_tok = '0;
  logic [D_HEAD-1:0][15:0] app_k = '0, app_v = '0;
  logic wcmd_valid, wcmd_ready, wdata_valid, wdata_ready, flushing;
  page_cmd_t wcmd;
  logic [$clog2(NCH)-1:0] wch;
  logic [ELEMS-1:0][15:0] wdata;
  bit backpressure = 1;

  group_buffer dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // write side
  always @(negedge clk) begin
    wcmd_ready  = backpressure ? 1'($urandom_range(2) == 0) : 1'b1;
    wdata_ready = backpressure ? 1'($urandom_range(3) != 0) : 1'b1;
  end

  int pages = 0, bad_elems = 0, bad_ids = 0, stall_seen = 0, beat = 0;
  page_id_t cur;
  bit in_page = 0;
  int done_tok [NHEADS];   // highest appended token per head
  always @(posedge clk) if (rst_n) begin
    if (app_valid && !app_ready) stall_seen++;
    if (wcmd_valid && wcmd_ready) begin
      cur = page_of(int'(wch), longint'(wcmd.row));
      if (cur.seq != 5 || cur.layer != 11 || cur.head != pages % NHEADS ||
          cur.region != ((pages % (2 * NHEADS) < NHEADS) ? 0 : 1) || cur.tok0 != int'(wcmd.tok0) ||
          cur.tok0 % GROUP_TOK != 0 || done_tok[cur.head] < cur.tok0 + GROUP_TOK - 1 ||
          int'(wch) != (cur.tok0 / GROUP_TOK) % NCH)
        bad_ids++;
      in_page = 1; beat = 0;
    end
    if (wdata_valid && wdata_ready) begin
      for (int l = 0; l < ELEMS; l++)
        if (wdata[l] != page_elem(cur, beat * ELEMS + l)) bad_elems++;
      beat++;
      if (beat == BEATS_PER_PAGE) begin pages++; in_page = 0; end
    end
  end

  task automatic append(input int head, input int t);
    @(negedge clk);
    app_seq = 5; app_layer = 11; app_head = $bits(app_head)'(head); app_tok = TOKW'(t);
    for (int h = 0; h < D_HEAD; h++) begin
      app_k[h] = kv_val(5, 11, head, 0, t, h);
      app_v[h] = kv_val(5, 11, head, 1, t, h);
    end
    app_valid = 1;
    #1;
    while (!app_ready) @(negedge clk);
    done_tok[head] = t;
    @(negedge clk);
    app_valid = 0;
  endtask

  initial begin
    longint t0;
    for (int h = 0; h < NHEADS; h++) done_tok[h] = -1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 16; t < 48; t++)
      for (int h = 0; h < NHEADS; h++) append(h, t);
    wait (!flushing);
    repeat (3) @(posedge clk);
    check(pages == 4 * NHEADS, $sformatf("%0d pages written, expected %0d", pages, 4 * NHEADS));
    check(bad_ids == 0, $sformatf("%0d page commands with a wrong address", bad_ids));
    check(bad_elems == 0, $sformatf("%0d page elements wrong", bad_elems));
    check(stall_seen > 0, "appends stalled during a flush");
    // flush time without back-pressure
    backpressure = 0;
    for (int t = 48; t < 64; t++)
      for (int h = 0; h < NHEADS; h++)
        if (!(t == 63 && h == NHEADS - 1)) append(h, t);
    @(negedge clk);
    app_seq = 5; app_layer = 11; app_head = $bits(app_head)'(NHEADS - 1); app_tok = TOKW'(63);
    for (int h = 0; h < D_HEAD; h++) begin
      app_k[h] = kv_val(5, 11, NHEADS - 1, 0, 63, h);
      app_v[h] = kv_val(5, 11, NHEADS - 1, 1, 63, h);
    end
    app_valid = 1; done_tok[NHEADS - 1] = 63;
    @(negedge clk); app_valid = 0;
    t0 = 0;
    while (flushing) begin @(negedge clk); t0++; end
    check(t0 == 2 * NHEADS * (1 + BEATS_PER_PAGE), $sformatf("flush took %0d cycles", t0));
    check(pages == 6 * NHEADS && bad_elems == 0 && bad_ids == 0, "last group written correctly");
    $display("%0d pages written, last flush %0d cycles, %0d stalled cycles", pages, t0, stall_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
