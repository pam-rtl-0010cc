// pam_top: one PAM instance's processing-across-memory datapath.
//
// Three PIM tiers compute PAMattention for one query vector in parallel, each
// over the KV tokens it stores, and the HBM logic die merges them:
//   HBM-PIM  tier : H_GRP bank groups x H_PPG banks, 16-lane PUs, one RU per
//                   bank group (default: one rank, 4 x 4 = 16 PUs, 4 RUs);
//   DDR-PIM  tier : D_GRP bank groups x D_PPG banks, 4-lane PUs, one RU per
//                   bank group and a central-buffer RU (default: one chip,
//                   8 PUs, 2 + 1 RUs);
//   SSD-PIM  tier : S_GRP x S_PPG controller PUs, 16-lane, one RU per group
//                   (default: one controller, 64 PUs, 8 RUs);
//   global RU     : the inter-device reduction in the HBM logic die; it merges
//                   the H_GRP + 1 + S_GRP partial results and normalises,
//                   giving O = softmax(Q K^T) V over every token of the tiers,
//                   plus m, l and lse = m + ln(l).
// A PAM interface (pam_interface) moves KV tokens from the DDR layout to the
// HBM layout for the inter-device KV scheduling that the host runs.
//
// Operation: `start` (with q[] and every PU's block size n_tok) starts all
// PUs. Each PU streams its bank's keys then values on its kv_* port (the
// DRAM/flash arrays are outside this design); reductions start as soon as
// their inputs are complete; the global RU starts when all three tiers are
// done; `done` then stays high until the next start and the normalised
// output is read 16 FP16 words per cycle with o_rd_chunk -> o_rd_data.
// The migration ports (mig_*, src_*, dst_*) work independently of attention
// (see pam_interface); the source side is a DDR bank group and the
// destination side an HBM bank group.
//
// From the paper: the tier structure, PU/RU counts and lane widths, local
// attention on every tier, aggregation of the partial results in HBM-PIM and
// the PAM interface. This design's choices: the sizes of the slice that is
// instantiated (one HBM rank, one DDR chip, one SSD controller), the
// start/done sequencing, and a single DDR-to-HBM migration path (the paper
// puts a PAM interface in every device).
module pam_top
  import pam_pkg::*;
#(
  parameter int unsigned D       = HEAD_DIM,
  parameter int unsigned MAX_TOK = 32,
  parameter int unsigned H_GRP   = 4,
  parameter int unsigned H_PPG   = 4,
  parameter int unsigned D_GRP   = 2,
  parameter int unsigned D_PPG   = 4,
  parameter int unsigned S_GRP   = 8,
  parameter int unsigned S_PPG   = 8,
  parameter int unsigned MIG_SLOTS = 8,
  parameter int unsigned MIG_SEGS  = 4,
  parameter int unsigned MIG_SEG_W = 512,
  localparam int unsigned H_LANES = 16,
  localparam int unsigned D_LANES = 4,
  localparam int unsigned S_LANES = 16,
  localparam int unsigned H_NPU   = H_GRP * H_PPG,
  localparam int unsigned D_NPU   = D_GRP * D_PPG,
  localparam int unsigned S_NPU   = S_GRP * S_PPG,
  localparam int unsigned G_IN    = H_GRP + 1 + S_GRP,
  localparam int unsigned TW      = $clog2(MAX_TOK + 1),
  localparam int unsigned NCH     = D / BURST_FP16,
  localparam int unsigned CW      = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int unsigned MSLOT_W = (MIG_SLOTS > 1) ? $clog2(MIG_SLOTS) : 1,
  localparam int unsigned MSEG_IW = (MIG_SEGS > 1) ? $clog2(MIG_SEGS) : 1,
  localparam int unsigned MIG_DST_BANKS = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  // attention
  input  logic          start,
  input  fp16_t         q            [D],
  input  logic [TW-1:0] hbm_n_tok    [H_NPU],
  input  logic          hbm_kv_valid [H_NPU],
  input  fp16_t         hbm_kv_data  [H_NPU][H_LANES],
  output logic          hbm_kv_ready [H_NPU],
  input  logic [TW-1:0] ddr_n_tok    [D_NPU],
  input  logic          ddr_kv_valid [D_NPU],
  input  fp16_t         ddr_kv_data  [D_NPU][D_LANES],
  output logic          ddr_kv_ready [D_NPU],
  input  logic [TW-1:0] ssd_n_tok    [S_NPU],
  input  logic          ssd_kv_valid [S_NPU],
  input  fp16_t         ssd_kv_data  [S_NPU][S_LANES],
  output logic          ssd_kv_ready [S_NPU],
  output logic          busy,
  output logic          done,
  output fp16_t         m_out,
  output fp16_t         l_out,
  output fp16_t         lse_out,
  input  logic [CW-1:0] o_rd_chunk,
  output fp16_t         o_rd_data    [BURST_FP16],
  // KV migration DDR -> HBM
  input  logic                       mig_valid,
  output logic                       mig_ready,
  input  bg_t                        mig_src_bg,
  input  row_t                       mig_src_row,
  input  col_t                       mig_src_col,
  input  bg_t                        mig_dst_bg,
  input  dtok_t                      mig_dst_tok,
  input  logic                       mig_flush,
  output logic                       src_rd_valid,
  output bg_t                        src_rd_bg,
  output logic [MSEG_IW-1:0]         src_rd_bank,
  output row_t                       src_rd_row,
  output col_t                       src_rd_col,
  output logic [MSLOT_W+MSEG_IW-1:0] src_rd_tag,
  input  logic                       src_rdata_valid,
  input  logic [MSLOT_W+MSEG_IW-1:0] src_rdata_tag,
  input  logic [MIG_SEG_W-1:0]       src_rdata,
  output logic                       dst_wr_valid,
  output bg_t                        dst_wr_bg,
  output row_t                       dst_wr_row,
  output col_t                       dst_wr_col,
  output logic [MIG_SEGS/MIG_DST_BANKS*MIG_SEG_W-1:0] dst_wr_data [MIG_DST_BANKS],
  output logic                       mig_reordered,
  output logic                       mig_idle
);

  localparam int unsigned HOW = (H_GRP > 1) ? $clog2(H_GRP) : 1;
  localparam int unsigned SOW = (S_GRP > 1) ? $clog2(S_GRP) : 1;
  localparam int unsigned GSW = (G_IN > 1) ? $clog2(G_IN) : 1;

  logic  h_done, d_done, s_done, h_busy, d_busy, s_busy;
  fp16_t h_m [H_GRP];
  fp16_t h_l [H_GRP];
  fp16_t d_m [1];
  fp16_t d_l [1];
  fp16_t s_m [S_GRP];
  fp16_t s_l [S_GRP];
  fp16_t h_rd [BURST_FP16];
  fp16_t d_rd [BURST_FP16];
  fp16_t s_rd [BURST_FP16];
  logic [HOW-1:0] h_src;
  logic [SOW-1:0] s_src;

  fp16_t          g_m  [G_IN];
  fp16_t          g_l  [G_IN];
  fp16_t          g_rd [BURST_FP16];
  logic [GSW-1:0] g_src;
  logic [CW-1:0]  g_chunk;
  logic           g_start, g_done, g_busy, running, g_started;

  pim_tier #(.LANES(H_LANES), .D(D), .N_GRP(H_GRP), .PPG(H_PPG), .DEV_RU(1'b0), .MAX_TOK(MAX_TOK)) u_hbm (
    .clk(clk), .rst_n(rst_n), .start(start), .q(q),
    .n_tok(hbm_n_tok), .kv_valid(hbm_kv_valid), .kv_data(hbm_kv_data), .kv_ready(hbm_kv_ready),
    .busy(h_busy), .done(h_done), .out_m(h_m), .out_l(h_l),
    .rd_src(h_src), .rd_chunk(g_chunk), .rd_data(h_rd)
  );

  pim_tier #(.LANES(D_LANES), .D(D), .N_GRP(D_GRP), .PPG(D_PPG), .DEV_RU(1'b1), .MAX_TOK(MAX_TOK)) u_ddr (
    .clk(clk), .rst_n(rst_n), .start(start), .q(q),
    .n_tok(ddr_n_tok), .kv_valid(ddr_kv_valid), .kv_data(ddr_kv_data), .kv_ready(ddr_kv_ready),
    .busy(d_busy), .done(d_done), .out_m(d_m), .out_l(d_l),
    .rd_src(1'b0), .rd_chunk(g_chunk), .rd_data(d_rd)
  );

  pim_tier #(.LANES(S_LANES), .D(D), .N_GRP(S_GRP), .PPG(S_PPG), .DEV_RU(1'b0), .MAX_TOK(MAX_TOK)) u_ssd (
    .clk(clk), .rst_n(rst_n), .start(start), .q(q),
    .n_tok(ssd_n_tok), .kv_valid(ssd_kv_valid), .kv_data(ssd_kv_data), .kv_ready(ssd_kv_ready),
    .busy(s_busy), .done(s_done), .out_m(s_m), .out_l(s_l),
    .rd_src(s_src), .rd_chunk(g_chunk), .rd_data(s_rd)
  );

  // global RU sources: HBM groups, then the DDR device, then SSD groups
  always_comb begin
    for (int j = 0; j < H_GRP; j++) begin
      g_m[j] = h_m[j];
      g_l[j] = h_l[j];
    end
    g_m[H_GRP] = d_m[0];
    g_l[H_GRP] = d_l[0];
    for (int j = 0; j < S_GRP; j++) begin
      g_m[H_GRP + 1 + j] = s_m[j];
      g_l[H_GRP + 1 + j] = s_l[j];
    end
    h_src = HOW'(int'(g_src) % H_GRP);
    s_src = SOW'((int'(g_src) + S_GRP - H_GRP - 1) % S_GRP);
    if (int'(g_src) < H_GRP)       g_rd = h_rd;
    else if (int'(g_src) == H_GRP) g_rd = d_rd;
    else                           g_rd = s_rd;
  end

  pam_ru #(.N_IN(G_IN), .D(D), .LANES(BURST_FP16), .N_EXP(4)) u_global_ru (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (g_start),
    .final_norm (1'b1),
    .in_m       (g_m),
    .in_l       (g_l),
    .rd_src     (g_src),
    .rd_chunk   (g_chunk),
    .rd_data    (g_rd),
    .busy       (g_busy),
    .done       (g_done),
    .m_out      (m_out),
    .l_out      (l_out),
    .lse_out    (lse_out),
    .o_rd_chunk (o_rd_chunk),
    .o_rd_data  (o_rd_data)
  );

  assign g_start = running && !g_started && h_done && d_done && s_done;
  assign busy    = running || h_busy || d_busy || s_busy || g_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      g_started <= 1'b0;
      done      <= 1'b0;
    end else if (start) begin
      running   <= 1'b1;
      g_started <= 1'b0;
      done      <= 1'b0;
    end else if (running) begin
      if (g_start) g_started <= 1'b1;
      if (g_started && g_done) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  pam_interface #(
    .SLOTS(MIG_SLOTS), .SEGS(MIG_SEGS), .SEG_W(MIG_SEG_W), .TPR(2), .WINDOW(8),
    .DST_BANKS(MIG_DST_BANKS), .WORDS_PER_ROW(16), .T_CCD_S(4), .T_CCD_L(8)
  ) u_mig (
    .clk             (clk),
    .rst_n           (rst_n),
    .mig_valid       (mig_valid),
    .mig_ready       (mig_ready),
    .mig_src_bg      (mig_src_bg),
    .mig_src_row     (mig_src_row),
    .mig_src_col     (mig_src_col),
    .mig_dst_bg      (mig_dst_bg),
    .mig_dst_tok     (mig_dst_tok),
    .flush           (mig_flush),
    .src_rd_valid    (src_rd_valid),
    .src_rd_bg       (src_rd_bg),
    .src_rd_bank     (src_rd_bank),
    .src_rd_row      (src_rd_row),
    .src_rd_col      (src_rd_col),
    .src_rd_tag      (src_rd_tag),
    .src_rdata_valid (src_rdata_valid),
    .src_rdata_tag   (src_rdata_tag),
    .src_rdata       (src_rdata),
    .dst_wr_valid    (dst_wr_valid),
    .dst_wr_bg       (dst_wr_bg),
    .dst_wr_row      (dst_wr_row),
    .dst_wr_col      (dst_wr_col),
    .dst_wr_data     (dst_wr_data),
    .reordered       (mig_reordered),
    .idle            (mig_idle)
  );

endmodule
