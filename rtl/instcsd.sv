// instcsd: the in-storage attention device — SparF engine, KV-cache mapping, group
// buffer and one flash controller per channel.
//
// The drive stores the KV cache of every layer, head and sequence in its flash and
// computes decode-phase attention next to the flash channels, so that per head only the
// query, the mean value vector and the attention output cross the host link. Inside:
//   sparf_engine   runs Algorithm 1 for one head per request and issues page reads;
//   nfc x NCH      one controller per flash channel; its filter drops weak units;
//   beat_arbiter   merges the filtered beats of all channels into the engine;
//   group_buffer   gathers decode-phase K/V vectors into 16-token groups and writes
//                  each full group to flash through the NFC of its channel.
// Page reads of the engine are routed to the NFC of the channel kv_addr_map picked.
//
// Ports: the request/response port of the engine, the append port of the group buffer,
// and the NCH flash channels as arrays (command, read data, write data, valid/ready
// each). The host link (NVMe over PCIe), the embedded processor that runs the rest of
// the flash translation layer, the drive's DRAM and the flash dies are outside this
// module. Statistics count the mechanisms: pages read and skipped (first loading step),
// beats kept and dropped by the filters (second step), pages written by the buffer.
module instcsd
  import instinfer_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // attention requests, one head each
  input  logic                        req_valid,
  output logic                        req_ready,
  input  logic [$clog2(NSEQ)-1:0]     req_seq,
  input  logic [$clog2(NLAYERS)-1:0]  req_layer,
  input  logic [$clog2(NHEADS)-1:0]   req_head,
  input  logic [TOKW:0]               req_seq_len,
  input  logic [$clog2(K_TOP+1)-1:0]  req_r,
  input  logic [$clog2(K_TOP+1)-1:0]  req_k,
  input  logic [TOKW:0]               req_l,
  input  logic [D_HEAD-1:0][15:0]     req_q,
  input  logic [D_HEAD-1:0][15:0]     req_vbar,
  output logic                        resp_valid,
  output logic [D_HEAD-1:0][15:0]     resp_out,
  output logic [15:0]                 resp_alpha,
  // decode-phase KV append
  input  logic                        app_valid,
  output logic                        app_ready,
  input  logic [$clog2(NSEQ)-1:0]     app_seq,
  input  logic [$clog2(NLAYERS)-1:0]  app_layer,
  input  logic [$clog2(NHEADS)-1:0]   app_head,
  input  logic [TOKW-1:0]             app_tok,
  input  logic [D_HEAD-1:0][15:0]     app_k,
  input  logic [D_HEAD-1:0][15:0]     app_v,
  // flash channels
  output logic [NCH-1:0]              f_cmd_valid,
  input  logic [NCH-1:0]              f_cmd_ready,
  output logic [NCH-1:0]              f_cmd_write,
  output logic [NCH-1:0][ADDRW-1:0]   f_cmd_row,
  input  logic [NCH-1:0]              f_rd_valid,
  output logic [NCH-1:0]              f_rd_ready,
  input  logic [NCH-1:0][ELEMS-1:0][15:0] f_rd_data,
  output logic [NCH-1:0]              f_wr_valid,
  input  logic [NCH-1:0]              f_wr_ready,
  output logic [NCH-1:0][ELEMS-1:0][15:0] f_wr_data,
  // statistics
  output logic [31:0]                 st_pages_read,
  output logic [31:0]                 st_pages_skipped,
  output logic [31:0]                 st_beats_kept,
  output logic [31:0]                 st_beats_dropped,
  output logic [31:0]                 st_pages_written,
  output logic [31:0]                 st_heads
);
  // engine <-> NFCs
  logic                   pcmd_valid, pcmd_ready;
  page_cmd_t              pcmd;
  logic [$clog2(NCH)-1:0] pch;
  logic [D_HEAD-1:0]      hid_mask;
  logic [S_MAX-1:0]       tok_mask;
  logic [TOKW:0]          seq_len;
  logic                   eb_valid, eb_ready;
  kv_beat_t               eb;

  // group buffer -> NFCs
  logic                   wcmd_valid, wdata_valid, gb_flushing;
  page_cmd_t              wcmd;
  logic [$clog2(NCH)-1:0] wch;
  logic [ELEMS-1:0][15:0] wdata;

  logic [NCH-1:0] n_cmd_ready, n_wcmd_ready, n_wdata_ready;
  logic [NCH-1:0] n_out_valid, n_out_ready, n_page_done, n_kept, n_dropped;
  kv_beat_t       n_out [NCH];

  sparf_engine u_engine (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_seq, .req_layer, .req_head, .req_seq_len, .req_r, .req_k,
    .req_l, .req_q, .req_vbar, .resp_valid, .resp_out, .resp_alpha,
    .pcmd_valid, .pcmd_ready, .pcmd, .pch,
    .hid_mask, .tok_mask, .seq_len_o(seq_len),
    .beat_valid(eb_valid), .beat_ready(eb_ready), .beat(eb),
    .pages_done($clog2(NCH+1)'($countones(n_page_done))),
    .st_pages_read, .st_pages_skipped, .st_heads
  );

  group_buffer u_gbuf (
    .clk, .rst_n, .app_valid, .app_ready, .app_seq, .app_layer, .app_head, .app_tok,
    .app_k, .app_v, .wcmd_valid, .wcmd_ready(n_wcmd_ready[wch]), .wcmd, .wch,
    .wdata_valid, .wdata_ready(n_wdata_ready[wch]), .wdata, .flushing(gb_flushing)
  );

  assign pcmd_ready = n_cmd_ready[pch];

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    nfc u_nfc (
      .clk, .rst_n,
      .cmd_valid(pcmd_valid && pch == c), .cmd_ready(n_cmd_ready[c]), .cmd(pcmd),
      .wcmd_valid(wcmd_valid && wch == c), .wcmd_ready(n_wcmd_ready[c]), .wcmd(wcmd),
      .wdata_valid(wdata_valid && wch == c), .wdata_ready(n_wdata_ready[c]), .wdata(wdata),
      .hid_mask, .tok_mask, .seq_len,
      .out_valid(n_out_valid[c]), .out_ready(n_out_ready[c]), .out_beat(n_out[c]),
      .page_done(n_page_done[c]), .beat_kept(n_kept[c]), .beat_dropped(n_dropped[c]),
      .f_cmd_valid(f_cmd_valid[c]), .f_cmd_ready(f_cmd_ready[c]),
      .f_cmd_write(f_cmd_write[c]), .f_cmd_row(f_cmd_row[c]),
      .f_rd_valid(f_rd_valid[c]), .f_rd_ready(f_rd_ready[c]), .f_rd_data(f_rd_data[c]),
      .f_wr_valid(f_wr_valid[c]), .f_wr_ready(f_wr_ready[c]), .f_wr_data(f_wr_data[c])
    );
  end

  beat_arbiter #(.N(NCH)) u_arb (
    .clk, .rst_n, .in_valid(n_out_valid), .in_ready(n_out_ready), .in_beat(n_out),
    .out_valid(eb_valid), .out_ready(eb_ready), .out_beat(eb)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_beats_kept <= '0; st_beats_dropped <= '0; st_pages_written <= '0;
    end else begin
      st_beats_kept    <= st_beats_kept + 32'($countones(n_kept));
      st_beats_dropped <= st_beats_dropped + 32'($countones(n_dropped));
      if (wcmd_valid && n_wcmd_ready[wch]) st_pages_written <= st_pages_written + 1'b1;
    end
  end
endmodule
