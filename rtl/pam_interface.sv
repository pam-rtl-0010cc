// pam_interface: the PAM interface for inter-device KV token migration.
//
// Moves KV tokens from a source PIM device to a destination PIM device with
// a different data layout, without the host CPU re-formatting the data. It
// joins the paper's three parts:
//   cmd_reorder     (sender)   reads each token's SEGS segments from the
//                              source banks, reordered by bank group and
//                              tCCD_S/tCCD_L timing;
//   relayout_buffer (shared)   dual-port buffer that gathers the segments,
//                              in whatever order they return, into regions
//                              of TPR tokens;
//   addr_gen        (receiver) writes each complete region to the target in
//                              its layout, DST_BANKS banks in parallel at the
//                              same row and column.
// Default sizes follow the paper's DDR-to-HBM example: a token of 4
// segments (H0..H3) lying in 4 DDR banks, one segment per bank, is written
// into 2 HBM banks, 2 segments per bank; a segment is 512 bits so a token is
// one 128-element FP16 key or value vector.
//
// Interface: a migration request (mig_valid/mig_ready) names the token's
// source bank group/row/column and its destination bank group and token
// index; it takes a free buffer slot (slots are used in ring order). The
// source read port (src_rd_*) issues at most one segment read per cycle with
// a tag {slot, segment}; the source returns data with the same tag on
// src_rdata_* after any latency and in any order. dst_wr_* carries one
// token write per cycle to the destination. A `flush` pulse sends a region
// that is only partly used; new requests are held off until every slot is
// free again. `idle` is high when nothing is in flight.
//
// From the paper: the three units, their order and the shared dual-port
// buffer, the transfer of assembled contiguous regions, layout-aware writes.
// Slot/region sizes, tags, flush and the handshakes are this design's own.
module pam_interface
  import pam_pkg::*;
#(
  parameter int unsigned SLOTS         = 8,
  parameter int unsigned SEGS          = 4,
  parameter int unsigned SEG_W         = 512,
  parameter int unsigned TPR           = 2,
  parameter int unsigned WINDOW        = 8,
  parameter int unsigned DST_BANKS     = 2,
  parameter int unsigned WORDS_PER_ROW = 16,
  parameter int unsigned T_CCD_S       = 4,
  parameter int unsigned T_CCD_L       = 8,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned SEG_IW = (SEGS > 1) ? $clog2(SEGS) : 1,
  localparam int unsigned SPW    = SEGS / DST_BANKS,
  localparam int unsigned NREG   = SLOTS / TPR,
  localparam int unsigned REG_W  = (NREG > 1) ? $clog2(NREG) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     mig_valid,
  output logic                     mig_ready,
  input  bg_t                      mig_src_bg,
  input  row_t                     mig_src_row,
  input  col_t                     mig_src_col,
  input  bg_t                      mig_dst_bg,
  input  dtok_t                    mig_dst_tok,
  input  logic                     flush,
  output logic                     src_rd_valid,
  output bg_t                      src_rd_bg,
  output logic [SEG_IW-1:0]        src_rd_bank,
  output row_t                     src_rd_row,
  output col_t                     src_rd_col,
  output logic [SLOT_W+SEG_IW-1:0] src_rd_tag,
  input  logic                     src_rdata_valid,
  input  logic [SLOT_W+SEG_IW-1:0] src_rdata_tag,
  input  logic [SEG_W-1:0]         src_rdata,
  output logic                     dst_wr_valid,
  output bg_t                      dst_wr_bg,
  output row_t                     dst_wr_row,
  output col_t                     dst_wr_col,
  output logic [SPW*SEG_W-1:0]     dst_wr_data [DST_BANKS],
  output logic                     reordered,
  output logic                     idle
);

  logic [SLOT_W-1:0] alloc_ptr;
  logic              flushing;
  logic              tok_ready, accept, ro_empty;
  logic [SLOTS-1:0]  slot_alloc;
  logic [NREG-1:0]   region_ready;
  logic              release_en;
  logic [REG_W-1:0]  release_region;
  logic [SLOT_W-1:0] buf_rd_slot, rd_slot;
  logic [SEG_IW-1:0] rd_seg;
  logic [SEG_W-1:0]  buf_rd_data [SEGS];
  bg_t               dst_bg  [SLOTS];
  dtok_t             dst_tok [SLOTS];

  assign mig_ready  = !flushing && !slot_alloc[alloc_ptr] && tok_ready;
  assign accept     = mig_valid && mig_ready;
  assign src_rd_tag = {rd_slot, rd_seg};
  assign idle       = (slot_alloc == '0) && ro_empty;

  cmd_reorder #(
    .SEGS(SEGS), .WINDOW(WINDOW), .SLOT_W(SLOT_W), .T_CCD_S(T_CCD_S), .T_CCD_L(T_CCD_L)
  ) u_reorder (
    .clk       (clk),
    .rst_n     (rst_n),
    .tok_valid (accept),
    .tok_ready (tok_ready),
    .tok_slot  (alloc_ptr),
    .tok_bg    (mig_src_bg),
    .tok_row   (mig_src_row),
    .tok_col   (mig_src_col),
    .rd_valid  (src_rd_valid),
    .rd_bg     (src_rd_bg),
    .rd_bank   (src_rd_bank),
    .rd_row    (src_rd_row),
    .rd_col    (src_rd_col),
    .rd_slot   (rd_slot),
    .rd_seg    (rd_seg),
    .reordered (reordered),
    .empty     (ro_empty)
  );

  relayout_buffer #(.SLOTS(SLOTS), .SEGS(SEGS), .SEG_W(SEG_W), .TPR(TPR)) u_buf (
    .clk            (clk),
    .rst_n          (rst_n),
    .alloc          (accept),
    .alloc_slot     (alloc_ptr),
    .wr_en          (src_rdata_valid),
    .wr_slot        (src_rdata_tag[SEG_IW +: SLOT_W]),
    .wr_seg         (src_rdata_tag[SEG_IW-1:0]),
    .wr_data        (src_rdata),
    .rd_slot        (buf_rd_slot),
    .rd_data        (buf_rd_data),
    .slot_alloc     (slot_alloc),
    .flush          (flushing),
    .region_ready   (region_ready),
    .release_en     (release_en),
    .release_region (release_region)
  );

  addr_gen #(
    .SLOTS(SLOTS), .SEGS(SEGS), .SEG_W(SEG_W), .TPR(TPR), .DST_BANKS(DST_BANKS),
    .WORDS_PER_ROW(WORDS_PER_ROW)
  ) u_agen (
    .clk            (clk),
    .rst_n          (rst_n),
    .region_ready   (region_ready),
    .slot_alloc     (slot_alloc),
    .dst_bg         (dst_bg),
    .dst_tok        (dst_tok),
    .rd_slot        (buf_rd_slot),
    .rd_data        (buf_rd_data),
    .wr_valid       (dst_wr_valid),
    .wr_bg          (dst_wr_bg),
    .wr_row         (dst_wr_row),
    .wr_col         (dst_wr_col),
    .wr_data        (dst_wr_data),
    .release_en     (release_en),
    .release_region (release_region)
  );

  always_ff @(posedge clk) begin
    if (accept) begin
      dst_bg[alloc_ptr]  <= mig_dst_bg;
      dst_tok[alloc_ptr] <= mig_dst_tok;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alloc_ptr <= '0;
      flushing  <= 1'b0;
    end else begin
      if (flush) flushing <= 1'b1;
      else if (slot_alloc == '0) flushing <= 1'b0;
      if (accept) begin
        alloc_ptr <= (int'(alloc_ptr) == SLOTS - 1) ? '0 : alloc_ptr + SLOT_W'(1);
      end else if (release_en && (int'(alloc_ptr) / TPR == int'(release_region))
                   && (int'(alloc_ptr) % TPR != 0)) begin
        // a flushed, partly used region: continue at the next region
        alloc_ptr <= SLOT_W'(((int'(release_region) + 1) % NREG) * TPR);
      end
    end
  end

endmodule
