// nfc: NAND flash controller of one channel, with its page filter.
//
// Each flash channel has its own controller, so channels transfer independently and
// their bandwidths add up. This one takes page commands from two sources, page reads
// from the SparF engine and page writes from the group buffer, and drives the channel.
// Reads are pipelined: up to OUTS page reads may be outstanding on the channel, which
// hides the array read latency of the flash dies behind the transfers of earlier pages.
// The command of each outstanding read waits in a tag FIFO; as the page's beats come
// back (in command order) each beat is tagged with the token and hidden dim it holds
// and passed through the nfc_filter, which keeps only strong units. `page_done` pulses
// when the last beat of a page has left (kept or dropped).
// A write sends its command, then forwards BEATS_PER_PAGE data beats to the channel.
// Reads have priority over writes; a write is started only when no read command waits.
//
// Flash side (one channel, all dies behind it): f_cmd_* carries {write, row}; read data
// returns on f_rd_*, write data leaves on f_wr_*, all valid/ready.
// The per-channel controller with an integrated filter is the paper's; command queueing,
// the read/write priority and the outstanding-read depth are this design's choices.
module nfc
  import instinfer_pkg::*;
#(
  parameter int OUTS     = 8,
  parameter int S_MAX_P  = instinfer_pkg::S_MAX,
  parameter int D_HEAD_P = instinfer_pkg::D_HEAD
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // page reads from the engine
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  page_cmd_t                cmd,
  // page writes from the group buffer
  input  logic                     wcmd_valid,
  output logic                     wcmd_ready,
  input  page_cmd_t                wcmd,
  input  logic                     wdata_valid,
  output logic                     wdata_ready,
  input  logic [ELEMS-1:0][15:0]   wdata,
  // filter masks of the running head
  input  logic [D_HEAD_P-1:0]      hid_mask,
  input  logic [S_MAX_P-1:0]       tok_mask,
  input  logic [$clog2(S_MAX_P):0] seq_len,
  // filtered beats to the engine
  output logic                     out_valid,
  input  logic                     out_ready,
  output kv_beat_t                 out_beat,
  output logic                     page_done,
  output logic                     beat_kept,
  output logic                     beat_dropped,
  // flash channel
  output logic                     f_cmd_valid,
  input  logic                     f_cmd_ready,
  output logic                     f_cmd_write,
  output logic [ADDRW-1:0]         f_cmd_row,
  input  logic                     f_rd_valid,
  output logic                     f_rd_ready,
  input  logic [ELEMS-1:0][15:0]   f_rd_data,
  output logic                     f_wr_valid,
  input  logic                     f_wr_ready,
  output logic [ELEMS-1:0][15:0]   f_wr_data
);
  localparam int PW = $clog2(OUTS);

  // ---- tag FIFO of outstanding reads ----
  page_cmd_t         tags [OUTS];
  logic [PW-1:0]     wp, rp;
  logic [PW:0]       used;
  logic              push, pop;
  logic [BEATW-1:0]  bcnt;

  // ---- write state ----
  logic              wr_active;
  logic [BEATW:0]    wcnt;

  // Command selection towards the channel.
  logic issue_rd, issue_wr;
  always_comb begin
    issue_rd    = cmd_valid && (int'(used) < OUTS) && !wr_active;
    issue_wr    = !issue_rd && wcmd_valid && !wr_active && !cmd_valid;
    f_cmd_valid = issue_rd || issue_wr;
    f_cmd_write = issue_wr;
    f_cmd_row   = issue_rd ? cmd.row : wcmd.row;
    cmd_ready   = issue_rd && f_cmd_ready;
    wcmd_ready  = issue_wr && f_cmd_ready;
    push        = issue_rd && f_cmd_ready;
  end

  // Write data passes through while a write is active.
  assign f_wr_valid  = wr_active && wdata_valid;
  assign wdata_ready = wr_active && f_wr_ready;
  assign f_wr_data   = wdata;

  // Read data: tag, filter, forward.
  kv_beat_t raw;
  logic     flt_in_ready;
  always_comb begin
    raw      = beat_tag(tags[rp], bcnt);
    raw.data = f_rd_data;
  end

  nfc_filter #(.S_MAX_P(S_MAX_P), .D_HEAD_P(D_HEAD_P)) u_filter (
    .in_valid(f_rd_valid && used != 0), .in_ready(flt_in_ready), .in_beat(raw),
    .hid_mask, .tok_mask, .seq_len,
    .out_valid, .out_ready, .out_beat,
    .kept(beat_kept), .dropped(beat_dropped)
  );

  assign f_rd_ready = flt_in_ready && (used != 0);
  assign pop        = f_rd_valid && f_rd_ready && (int'(bcnt) == BEATS_PER_PAGE-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; used <= '0; bcnt <= '0; page_done <= 1'b0;
      wr_active <= 1'b0; wcnt <= '0;
      for (int i = 0; i < OUTS; i++) tags[i] <= '0;
    end else begin
      page_done <= pop;
      if (push) begin
        tags[wp] <= cmd;
        wp       <= wp + 1'b1;
      end
      if (f_rd_valid && f_rd_ready) bcnt <= bcnt + 1'b1;
      if (pop) rp <= rp + 1'b1;
      used <= used + (PW+1)'(push) - (PW+1)'(pop);

      if (issue_wr && f_cmd_ready) begin
        wr_active <= 1'b1;
        wcnt      <= '0;
      end else if (f_wr_valid && f_wr_ready) begin
        if (int'(wcnt) == BEATS_PER_PAGE-1) wr_active <= 1'b0;
        wcnt <= wcnt + 1'b1;
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> int'(used) < OUTS || pop);
  a_no_orphan_data: assert property (@(posedge clk) disable iff (!rst_n)
    f_rd_valid |-> used != 0);
endmodule
