// kv_addr_map: the dual address mapping of the KV-cache flash translation layer.
//
// Every KV page of the drive is named by (sequence slot, layer, head, kind, position)
// and mapped to a flash channel and a page number inside that channel.
//   Token-indexed K and V pages (group g = tok/16 of 16 consecutive tokens): groups are
//   striped over the channels, g mod NCH, and inside a channel the pages of one group
//   for all heads are consecutive, so a block collects the same group of many heads.
//   Hidden-indexed K pages (hidden group hg = hid/4, token chunk tc = tok/512): hidden
//   groups are striped over the channels, hg mod NCH, again with the heads innermost.
// Linear page number inside the channel:
//   row = ((seq*NLAYERS + layer)*3 + region)*REGION + in_off
//   region 0 = K token-indexed, 1 = V token-indexed, 2 = K hidden-indexed
//   in_off (token) = (g / NCH)*NHEADS + head
//   in_off (hidden) = ((hg / NCH)*TCHUNKS + tc)*NHEADS + head
//   block = row / PAGES_PER_BLOCK, page = row mod PAGES_PER_BLOCK
// The striping over channels and the heads-innermost order follow the paper's mapping
// figure; the region layout and block size are this design's choices.
//
// Interface: combinational, no clock.
module kv_addr_map
  import instinfer_pkg::*;
#(
  parameter int NCH_P     = instinfer_pkg::NCH,
  parameter int NHEADS_P  = instinfer_pkg::NHEADS,
  parameter int NLAYERS_P = instinfer_pkg::NLAYERS,
  parameter int NSEQ_P    = instinfer_pkg::NSEQ,
  parameter int S_MAX_P   = instinfer_pkg::S_MAX,
  parameter int PPB       = instinfer_pkg::PAGES_PER_BLOCK
) (
  input  kv_kind_e                        kind,
  input  logic [$clog2(NSEQ_P)-1:0]       seq,
  input  logic [$clog2(NLAYERS_P)-1:0]    layer,
  input  logic [$clog2(NHEADS_P)-1:0]     head,
  input  logic [$clog2(S_MAX_P)-1:0]      tok,    // first token of the page
  input  logic [HIDW-1:0]                 hid,    // first hidden dim of the page
  output logic [$clog2(NCH_P)-1:0]        ch,
  output logic [ADDRW-1:0]                row,
  output logic [ADDRW-1:0]                block,
  output logic [$clog2(PPB)-1:0]          page
);
  localparam int TGROUPS_PER_CH = S_MAX_P / GROUP_TOK / NCH_P;
  localparam int TCHUNKS        = S_MAX_P / TOK_PER_HPAGE;
  localparam int HGROUPS_PER_CH = D_HEAD / HID_GROUP / NCH_P;
  localparam int REGION_T       = TGROUPS_PER_CH * NHEADS_P;
  localparam int REGION_H       = HGROUPS_PER_CH * TCHUNKS * NHEADS_P;
  localparam int REGION         = (REGION_T > REGION_H) ? REGION_T : REGION_H;

  logic [31:0] g, hg, tc, in_off, region;
  always_comb begin
    g  = 32'(tok) / GROUP_TOK;
    hg = 32'(hid) / HID_GROUP;
    tc = 32'(tok) / TOK_PER_HPAGE;
    if (kind == KV_KHID) begin
      ch     = $clog2(NCH_P)'(hg % NCH_P);
      in_off = ((hg / NCH_P) * TCHUNKS + tc) * NHEADS_P + 32'(head);
      region = 32'd2;
    end else begin
      ch     = $clog2(NCH_P)'(g % NCH_P);
      in_off = (g / NCH_P) * NHEADS_P + 32'(head);
      region = (kind == KV_VTOK) ? 32'd1 : 32'd0;
    end
    row   = ADDRW'(((32'(seq) * NLAYERS_P + 32'(layer)) * 3 + region) * REGION + in_off);
    block = row / PPB;
    page  = $clog2(PPB)'(row % PPB);
  end
endmodule
