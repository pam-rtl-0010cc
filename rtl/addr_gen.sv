// addr_gen: receiver-side address generation unit of the PAM interface.
//
// Takes complete regions out of the re-layout buffer in order and writes
// their tokens into the destination device in its own layout. The
// destination (an HBM bank group in the paper's example) holds a token in
// DST_BANKS banks, SEGS/DST_BANKS consecutive segments per bank in one
// column word, and every bank at the same row and column, so that all banks
// of the group activate the same row when their PUs compute (the paper's
// intra-device mapping). For a token with destination bank group dst_bg and
// token index dst_tok inside that group the unit generates
//     row = dst_tok / WORDS_PER_ROW,  col = dst_tok % WORDS_PER_ROW
// and issues the DST_BANKS writes of the token in the same cycle (wr_valid,
// wr_bg, wr_row, wr_col shared; wr_data[b] for bank b). One token is written
// per cycle; unallocated slots of a flushed region are skipped. After the
// region's last token, release_en frees the region in the buffer.
//
// From the paper: the unit's role (parallel write addresses in the target's
// format) and the aligned rows/columns across banks. The row/column formula,
// the one-token-per-cycle rate and the interface are this design's choices.
module addr_gen
  import pam_pkg::*;
#(
  parameter int unsigned SLOTS         = 8,
  parameter int unsigned SEGS          = 4,
  parameter int unsigned SEG_W         = 512,
  parameter int unsigned TPR           = 2,
  parameter int unsigned DST_BANKS     = 2,
  parameter int unsigned WORDS_PER_ROW = 16,
  localparam int unsigned NREG   = SLOTS / TPR,
  localparam int unsigned SPW    = SEGS / DST_BANKS,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned REG_W  = (NREG > 1) ? $clog2(NREG) : 1,
  localparam int unsigned TPR_W  = (TPR > 1) ? $clog2(TPR) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NREG-1:0]      region_ready,
  input  logic [SLOTS-1:0]     slot_alloc,
  input  bg_t                  dst_bg   [SLOTS],
  input  dtok_t                dst_tok  [SLOTS],
  output logic [SLOT_W-1:0]    rd_slot,
  input  logic [SEG_W-1:0]     rd_data  [SEGS],
  output logic                 wr_valid,
  output bg_t                  wr_bg,
  output row_t                 wr_row,
  output col_t                 wr_col,
  output logic [SPW*SEG_W-1:0] wr_data  [DST_BANKS],
  output logic                 release_en,
  output logic [REG_W-1:0]     release_region
);

  logic [REG_W-1:0] reg_ptr;
  logic [TPR_W-1:0] tk;
  logic             active, last_tk;
  dtok_t            t;

  always_comb begin
    active         = region_ready[reg_ptr];
    rd_slot        = SLOT_W'(int'(reg_ptr) * TPR + int'(tk));
    last_tk        = (int'(tk) == TPR - 1);
    t              = dst_tok[rd_slot];
    wr_valid       = active && slot_alloc[rd_slot];
    wr_bg          = dst_bg[rd_slot];
    wr_row         = row_t'(t / dtok_t'(WORDS_PER_ROW));
    wr_col         = col_t'(t % dtok_t'(WORDS_PER_ROW));
    for (int b = 0; b < DST_BANKS; b++)
      for (int s = 0; s < SPW; s++)
        wr_data[b][s*SEG_W +: SEG_W] = rd_data[b*SPW + s];
    release_en     = active && last_tk;
    release_region = reg_ptr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_ptr <= '0;
      tk      <= '0;
    end else if (active) begin
      tk <= last_tk ? '0 : tk + TPR_W'(1);
      if (last_tk) reg_ptr <= (int'(reg_ptr) == NREG - 1) ? '0 : reg_ptr + REG_W'(1);
    end
  end

endmodule
