// group_buffer: collects the K and V vectors of decode-phase tokens into page-sized groups.
//
// Flash is written a page at a time, but decoding produces one new token per step. The
// new token's key and value vectors of every (sequence, layer, head) are therefore held
// in a buffer until the 16 tokens of a group are present; then the group is written out,
// in the background of the attention work, as token-indexed K and V pages. Since the
// GPU produces the new vectors of all heads of a layer together, the write is batched
// over the heads: the pages of one group of all NHEADS heads sit on consecutive pages of
// one channel (kv_addr_map puts the head innermost), so a flush programs NHEADS
// consecutive K pages and then NHEADS consecutive V pages.
//
// How it works. The buffer memory holds, for each of NSLOT (sequence, layer, head)
// slots, GROUP_TOK rows of K and GROUP_TOK rows of V (one row = one D_HEAD-wide vector).
// The slot is picked directly from (sequence, layer, head) modulo NSLOT. An append
// writes row tok mod 16 of the slot. The append of the last token of a group by the
// last head (NHEADS-1) starts the flush: for each head and page the unit looks up the
// channel and page number in kv_addr_map, sends the page command to that channel's NFC
// and streams the page, BEATS_PER_PAGE beats of ELEMS elements, token-major. Appends
// stall during a flush.
//
// Interface: app_* valid/ready (one token of one head per transfer, accepted in one
// cycle when idle; the host appends the heads of a layer in order 0..NHEADS-1);
// wcmd_* and wdata_* go to the NFC of channel wch. Timing: a flush takes
// 2 * NHEADS * (1 + BEATS_PER_PAGE) cycles plus channel back-pressure.
// The buffering, flush-when-full and batching across heads are the paper's. Departures,
// this design's choices: the paper keeps the buffer in the drive's DRAM, here it is a
// memory array of NSLOT slots (default: the heads of one layer of one sequence; other
// (sequence, layer) pairs share the slots by modulo, so a group must be flushed before
// another pair reuses its slots); a flush covers one group of one layer (80 pages), not a
// whole flash block; the hidden-indexed K copy is not extended for new tokens.
module group_buffer
  import instinfer_pkg::*;
#(
  parameter int NSLOT = instinfer_pkg::NHEADS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              app_valid,
  output logic                              app_ready,
  input  logic [$clog2(NSEQ)-1:0]           app_seq,
  input  logic [$clog2(NLAYERS)-1:0]        app_layer,
  input  logic [$clog2(NHEADS)-1:0]         app_head,
  input  logic [TOKW-1:0]                   app_tok,
  input  logic [D_HEAD-1:0][15:0]           app_k,
  input  logic [D_HEAD-1:0][15:0]           app_v,
  output logic                              wcmd_valid,
  input  logic                              wcmd_ready,
  output page_cmd_t                         wcmd,
  output logic [$clog2(NCH)-1:0]            wch,
  output logic                              wdata_valid,
  input  logic                              wdata_ready,
  output logic [ELEMS-1:0][15:0]            wdata,
  output logic                              flushing
);
  localparam int SW   = (NSLOT > 1) ? $clog2(NSLOT) : 1;
  localparam int BPR  = D_HEAD / ELEMS;            // beats per row
  localparam int RWW  = $clog2(2 * GROUP_TOK);     // row within slot

  typedef enum logic [1:0] {G_IDLE, G_CMD, G_DATA} gstate_e;
  gstate_e state;

  logic [D_HEAD-1:0][15:0] mem [NSLOT * 2 * GROUP_TOK];

  logic [SW-1:0]               slot, f_slot;
  logic                        last_head;
  logic [$clog2(NSEQ)-1:0]     f_seq;
  logic [$clog2(NLAYERS)-1:0]  f_layer;
  logic [$clog2(NHEADS)-1:0]   f_head;
  logic [TOKW-1:0]             f_tok0;
  logic                        f_v;          // 0: K page, 1: V page
  logic [BEATW:0]              bcnt;

  assign slot   = SW'(((32'(app_seq) * NLAYERS + 32'(app_layer)) * NHEADS + 32'(app_head)) % NSLOT);
  assign f_slot = SW'(((32'(f_seq) * NLAYERS + 32'(f_layer)) * NHEADS + 32'(f_head)) % NSLOT);
  assign last_head = (int'(f_head) == NHEADS-1);

  // Address of the page being flushed.
  logic [$clog2(NCH)-1:0]  m_ch;
  logic [ADDRW-1:0]        m_row, m_block;
  logic [$clog2(PAGES_PER_BLOCK)-1:0] m_page;
  kv_addr_map u_map (
    .kind(f_v ? KV_VTOK : KV_KTOK), .seq(f_seq), .layer(f_layer), .head(f_head),
    .tok(f_tok0), .hid('0), .ch(m_ch), .row(m_row), .block(m_block), .page(m_page)
  );

  assign app_ready  = (state == G_IDLE);
  assign flushing   = (state != G_IDLE);
  assign wch        = m_ch;
  assign wcmd_valid = (state == G_CMD);
  always_comb begin
    wcmd       = '0;
    wcmd.write = 1'b1;
    wcmd.kind  = f_v ? KV_VTOK : KV_KTOK;
    wcmd.row   = m_row;
    wcmd.tok0  = f_tok0;
  end

  // Data beat: row = bcnt / BPR of the K or V half, slice bcnt % BPR.
  logic [RWW-1:0] rrow;
  logic [31:0]    maddr;
  always_comb begin
    rrow  = RWW'({f_v, 4'b0} + (int'(bcnt) / BPR));
    maddr = 32'(f_slot) * (2 * GROUP_TOK) + 32'(rrow);
    for (int l = 0; l < ELEMS; l++)
      wdata[l] = mem[maddr][(int'(bcnt) % BPR) * ELEMS + l];
  end
  assign wdata_valid = (state == G_DATA);

  always_ff @(posedge clk) begin
    if (app_valid && app_ready) begin
      mem[32'(slot) * (2 * GROUP_TOK) + 32'(app_tok % GROUP_TOK)]             <= app_k;
      mem[32'(slot) * (2 * GROUP_TOK) + GROUP_TOK + 32'(app_tok % GROUP_TOK)] <= app_v;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= G_IDLE; f_seq <= '0; f_layer <= '0; f_head <= '0;
      f_tok0 <= '0; f_v <= 1'b0; bcnt <= '0;
    end else begin
      unique case (state)
        G_IDLE: if (app_valid && (int'(app_tok) % GROUP_TOK == GROUP_TOK-1) &&
                    (int'(app_head) == NHEADS-1)) begin
          state   <= G_CMD;
          f_seq   <= app_seq;
          f_layer <= app_layer;
          f_head  <= '0;
          f_tok0  <= app_tok - TOKW'(GROUP_TOK-1);
          f_v     <= 1'b0;
        end
        G_CMD: if (wcmd_ready) begin
          state <= G_DATA;
          bcnt  <= '0;
        end
        G_DATA: if (wdata_ready) begin
          bcnt <= bcnt + 1'b1;
          if (int'(bcnt) == BEATS_PER_PAGE-1) begin
            // K pages of heads 0..NHEADS-1, then their V pages
            state <= G_CMD;
            if (!last_head) begin
              f_head <= f_head + 1'b1;
            end else if (!f_v) begin
              f_head <= '0;
              f_v    <= 1'b1;
            end else begin
              state  <= G_IDLE;
            end
          end
        end
        default: state <= G_IDLE;
      endcase
    end
  end
endmodule
