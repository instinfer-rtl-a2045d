// flash_channel_model: behavioural model of one flash channel with its dies (not synthesizable).
//
// Accepts page commands in order, up to QDEPTH outstanding. A read returns its page
// TR cycles after the command at the earliest, one beat every GAP+1 cycles, in command
// order; pages never written return the KV content defined by tb_kv_pkg::kv_val through
// the inverse page mapping. A write takes BEATS_PER_PAGE data beats and stores the page;
// each written element is compared with the expected KV content (mismatches counted).
// Statistics: pages read, pages written, cycles the command queue was full.
module flash_channel_model
  import instinfer_pkg::*;
  import tb_kv_pkg::*;
#(
  parameter int CH     = 0,
  parameter int TR     = 200,   // array read latency in cycles
  parameter int GAP    = 5,     // idle cycles between beats (32 B per 6 cycles ~ 1.5 GB/s at 285 MHz)
  parameter int QDEPTH = 8
) (
  input  logic                   clk,
  input  logic                   f_cmd_valid,
  output logic                   f_cmd_ready,
  input  logic                   f_cmd_write,
  input  logic [ADDRW-1:0]       f_cmd_row,
  output logic                   f_rd_valid,
  input  logic                   f_rd_ready,
  output logic [ELEMS-1:0][15:0] f_rd_data,
  input  logic                   f_wr_valid,
  output logic                   f_wr_ready,
  input  logic [ELEMS-1:0][15:0] f_wr_data
);
  typedef logic [15:0] page_t [PAGE_ELEMS];
  page_t stored [longint];

  longint rq_row [$];
  longint rq_t   [$];
  longint cyc = 0;
  int     bidx = 0, gap_cnt = 0;
  bit     wr_busy = 0;
  longint wr_row;
  int     wr_idx = 0;
  page_t  wr_page;

  int pages_read = 0, pages_written = 0, write_mismatch = 0, full_cycles = 0;

  function automatic logic [15:0] elem_of(input longint row, input int e);
    if (stored.exists(row)) return stored[row][e];
    return page_elem(page_of(CH, row), e);
  endfunction

  assign f_cmd_ready = (rq_row.size() < QDEPTH) && !wr_busy;
  assign f_wr_ready  = wr_busy;

  always_comb begin
    f_rd_valid = (rq_row.size() > 0) && (gap_cnt == 0) && (cyc >= rq_t[0]);
    for (int l = 0; l < ELEMS; l++)
      f_rd_data[l] = (rq_row.size() > 0) ? elem_of(rq_row[0], bidx * ELEMS + l) : 16'd0;
  end

  // Handshakes are sampled at the clock edge and applied one time unit later, so the
  // model's state never changes while the design samples it.
  always @(posedge clk) begin
    bit rd_fire, wr_fire, cmd_fire, cmd_wr;
    longint cmd_row;
    logic [ELEMS-1:0][15:0] wd;
    rd_fire  = f_rd_valid && f_rd_ready;
    wr_fire  = f_wr_valid && f_wr_ready;
    cmd_fire = f_cmd_valid && f_cmd_ready;
    cmd_wr   = f_cmd_write;
    cmd_row  = longint'(f_cmd_row);
    wd       = f_wr_data;
    #1;
    cyc = cyc + 1;
    if (rq_row.size() >= QDEPTH) full_cycles++;
    if (gap_cnt > 0) gap_cnt--;
    if (rd_fire) begin
      gap_cnt = GAP;
      if (bidx == BEATS_PER_PAGE - 1) begin
        bidx = 0;
        void'(rq_row.pop_front());
        void'(rq_t.pop_front());
        pages_read++;
      end else begin
        bidx++;
      end
    end
    if (wr_fire) begin
      for (int l = 0; l < ELEMS; l++) begin
        wr_page[wr_idx * ELEMS + l] = wd[l];
        if (wd[l] !== page_elem(page_of(CH, wr_row), wr_idx * ELEMS + l)) write_mismatch++;
      end
      if (wr_idx == BEATS_PER_PAGE - 1) begin
        stored[wr_row] = wr_page;
        wr_busy = 0;
        wr_idx  = 0;
        pages_written++;
      end else begin
        wr_idx++;
      end
    end
    if (cmd_fire) begin
      if (cmd_wr) begin
        wr_busy = 1;
        wr_row  = cmd_row;
        wr_idx  = 0;
      end else begin
        rq_row.push_back(cmd_row);
        rq_t.push_back(cyc + TR);
      end
    end
  end

  a_read_in_order: assert property (@(posedge clk) f_rd_valid |-> rq_row.size() > 0);
endmodule
