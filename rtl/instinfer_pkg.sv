// instinfer_pkg: sizes and types shared by the in-storage SparF attention engine.
//
// The numbers follow the evaluated configuration: a 128-wide FP16 attention head
// (one element = 2 bytes), 4 KB flash pages, 16-token groups for token-indexed pages,
// 8 flash channels, OPT-13B (40 layers x 40 heads, 2048-token context) and a 1/8
// compression ratio (r = 128/8 hidden embeddings, k = 2048/8 tokens).
//
// Number format is this design's own choice: elements are signed 16-bit fixed point with
// 8 fraction bits (the paper uses FP16). Exponentials and softmax weights are unsigned
// with 15 fraction bits (1.0 = 32768).
//
// A page travels as BEATS_PER_PAGE beats of ELEMS elements. Token-indexed page of group g:
// token-major, beat b holds token g*GROUP_TOK + b/(D_HEAD/ELEMS), hidden dims
// (b % (D_HEAD/ELEMS))*ELEMS ... +ELEMS-1. Hidden-indexed page (hidden group hg, token
// chunk tc): hidden-major, beat b holds hidden dim hg*HID_GROUP + b/(TOK_PER_HPAGE/ELEMS)
// for tokens tc*TOK_PER_HPAGE + (b % (TOK_PER_HPAGE/ELEMS))*ELEMS ... +ELEMS-1.
package instinfer_pkg;

  localparam int D_HEAD        = 128;   // hidden size of one attention head
  localparam int ELEMS         = 16;    // elements per beat (256-bit beat)
  localparam int PAGE_BYTES    = 4096;  // flash page
  localparam int PAGE_ELEMS    = PAGE_BYTES / 2;
  localparam int BEATS_PER_PAGE = PAGE_ELEMS / ELEMS;
  localparam int GROUP_TOK     = PAGE_ELEMS / D_HEAD;      // 16 tokens per token-indexed page
  localparam int HID_GROUP     = 4;                        // hidden dims per hidden-indexed page
  localparam int TOK_PER_HPAGE = PAGE_ELEMS / HID_GROUP;   // 512 tokens per hidden-indexed page
  localparam int S_MAX         = 2048;  // longest context (1024 in + 1024 out)
  localparam int NCH           = 8;     // flash channels
  localparam int NHEADS        = 40;    // OPT-13B heads
  localparam int NLAYERS       = 40;    // OPT-13B layers
  localparam int NSEQ          = 256;   // batch slots (largest evaluated batch)
  localparam int R_TOP         = 16;    // top-r hidden embeddings (1/8 of D_HEAD)
  localparam int K_TOP         = 256;   // top-k tokens (1/8 of S_MAX)
  localparam int PAGES_PER_BLOCK = 256; // flash pages per block

  localparam int TOKW  = $clog2(S_MAX);       // token index width
  localparam int HIDW  = $clog2(D_HEAD);      // hidden index width
  localparam int BEATW = $clog2(BEATS_PER_PAGE);
  localparam int ADDRW = 32;                  // linear page number inside one channel

  typedef logic signed [15:0] elem_t;         // Q8.8
  typedef logic [15:0]        prob_t;         // U1.15

  // What a page (and each of its beats) carries.
  typedef enum logic [1:0] {
    KV_KHID = 2'd0,   // K cache, hidden-embedding-indexed copy
    KV_KTOK = 2'd1,   // K cache, token-indexed copy
    KV_VTOK = 2'd2    // V cache, token-indexed
  } kv_kind_e;

  // Page read/write command handed to one NFC.
  typedef struct packed {
    logic             write;
    kv_kind_e         kind;
    logic [ADDRW-1:0] row;     // linear page number inside the channel
    logic [TOKW-1:0]  tok0;    // first token held by the page
    logic [HIDW-1:0]  hid0;    // first hidden dim held by the page
  } page_cmd_t;

  // One beat after the NFC filter, tagged with what it holds.
  typedef struct packed {
    kv_kind_e                kind;
    logic [TOKW-1:0]         tok;   // KHID: first of ELEMS tokens; KTOK/VTOK: the token
    logic [HIDW-1:0]         hid;   // KHID: the hidden dim; KTOK/VTOK: first of ELEMS dims
    logic [ELEMS-1:0][15:0]  data;
  } kv_beat_t;

  // Tag of beat b of a page whose command is c.
  function automatic kv_beat_t beat_tag(input page_cmd_t c, input logic [BEATW-1:0] b);
    kv_beat_t t;
    t = '0;
    t.kind = c.kind;
    if (c.kind == KV_KHID) begin
      t.hid = c.hid0 + HIDW'(int'(b) / (TOK_PER_HPAGE / ELEMS));
      t.tok = c.tok0 + TOKW'((int'(b) % (TOK_PER_HPAGE / ELEMS)) * ELEMS);
    end else begin
      t.tok = c.tok0 + TOKW'(int'(b) / (D_HEAD / ELEMS));
      t.hid = HIDW'((int'(b) % (D_HEAD / ELEMS)) * ELEMS);
    end
    return t;
  endfunction

endpackage
