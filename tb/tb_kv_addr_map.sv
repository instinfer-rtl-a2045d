// tb_kv_addr_map: self-checking test of the dual KV address mapping.
//
// For random (sequence, layer, head, first token, first dim) of all three page kinds
// the channel and linear row from the unit are decoded by tb_kv_pkg::page_of, an
// independent inverse of the layout, which must give back the same page. Further
// checks: consecutive 16-token groups of a head land on consecutive channels, so a
// head's token-indexed pages are spread over all NCH channels; consecutive 4-dim
// groups of the hidden-indexed copy likewise; block/page split the row by 256 pages per
// block; and no two pages of a small exhaustive set share a (channel, row).
module tb_kv_addr_map;
  import instinfer_pkg::*;
  import tb_kv_pkg::*;
  int checks = 0, failures = 0;
  kv_kind_e kind;
  logic [$clog2(NSEQ)-1:0]    seq;
  logic [$clog2(NLAYERS)-1:0] layer;
  logic [$clog2(NHEADS)-1:0]  head;
  logic [TOKW-1:0]            tok;
  logic [HIDW-1:0]            hid;
  logic [$clog2(NCH)-1:0]     ch;
  logic [ADDRW-1:0]           row, block;
  logic [$clog2(PAGES_PER_BLOCK)-1:0] page;

  kv_addr_map dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit seen [longint];

  initial begin
    for (int it = 0; it < 3000; it++) begin
      page_id_t p;
      kind  = kv_kind_e'($urandom_range(2));
      seq   = $bits(seq)'($urandom_range(NSEQ - 1));
      layer = $bits(layer)'($urandom_range(NLAYERS - 1));
      head  = $bits(head)'($urandom_range(NHEADS - 1));
      if (kind == KV_KHID) begin
        tok = TOKW'($urandom_range(S_MAX / TOK_PER_HPAGE - 1) * TOK_PER_HPAGE);
        hid = HIDW'($urandom_range(D_HEAD / HID_GROUP - 1) * HID_GROUP);
      end else begin
        tok = TOKW'($urandom_range(S_MAX / GROUP_TOK - 1) * GROUP_TOK);
        hid = '0;
      end
      #1;
      p = page_of(int'(ch), longint'(row));
      check(p.seq == int'(seq) && p.layer == int'(layer) && p.head == int'(head) &&
            p.region == (kind == KV_KHID ? 2 : kind == KV_VTOK ? 1 : 0) &&
            p.tok0 == int'(tok) && p.hid0 == int'(hid),
            $sformatf("inverse of kind %0d seq %0d layer %0d head %0d tok %0d hid %0d",
                      kind, seq, layer, head, tok, hid));
      check(block == row / PAGES_PER_BLOCK && 32'(page) == row % PAGES_PER_BLOCK, "block/page");
    end
    // striping over channels
    seq = 1; layer = 2; head = 3; hid = '0;
    kind = KV_KTOK;
    for (int g = 0; g < 2 * NCH; g++) begin
      tok = TOKW'(g * GROUP_TOK); #1;
      check(int'(ch) == g % NCH, $sformatf("token group %0d on channel %0d", g, ch));
    end
    kind = KV_KHID; tok = '0;
    for (int hg = 0; hg < 2 * NCH; hg++) begin
      hid = HIDW'(hg * HID_GROUP); #1;
      check(int'(ch) == hg % NCH, $sformatf("hidden group %0d on channel %0d", hg, ch));
    end
    // uniqueness over every page of two heads of two layers of two sequences
    begin
      int dup = 0;
      for (int s = 0; s < 2; s++) for (int ly = 0; ly < 2; ly++) for (int h = 0; h < 2; h++)
        for (int kd = 0; kd < 3; kd++) begin
          int np = (kd == 0) ? (D_HEAD / HID_GROUP) * (S_MAX / TOK_PER_HPAGE) : S_MAX / GROUP_TOK;
          for (int pg = 0; pg < np; pg++) begin
            longint key;
            seq = $bits(seq)'(s * 200); layer = $bits(layer)'(ly * 39); head = $bits(head)'(h * 39);
            kind = kv_kind_e'(kd == 0 ? KV_KHID : kd == 1 ? KV_KTOK : KV_VTOK);
            if (kd == 0) begin
              hid = HIDW'((pg / (S_MAX / TOK_PER_HPAGE)) * HID_GROUP);
              tok = TOKW'((pg % (S_MAX / TOK_PER_HPAGE)) * TOK_PER_HPAGE);
            end else begin
              hid = '0; tok = TOKW'(pg * GROUP_TOK);
            end
            #1;
            key = (longint'(row) << 4) | longint'(ch);
            if (seen.exists(key)) dup++;
            seen[key] = 1;
          end
        end
      check(dup == 0, $sformatf("%0d pages share a flash location", dup));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
