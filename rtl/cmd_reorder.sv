// cmd_reorder: sender-side command reorder unit of the PAM interface.
//
// A KV token to be migrated is stored as SEGS segments in SEGS banks of one
// bank group of the source device, at the same row and column in every bank
// (the PIM-aware mapping of the source tier). The unit accepts one token
// command per cycle (tok_valid/tok_ready) into a window of WINDOW tokens
// and issues one segment read per cycle at most (rd_valid), tagged with the
// token's re-layout buffer slot and the segment number. Reads follow the
// device timing: a read to the same bank group as the previous read waits
// T_CCD_L cycles after it, a read to another bank group T_CCD_S cycles
// (tCCD_L = 8, tCCD_S = 4 for the DDR4-3200 tier). To keep the read stream
// dense the unit issues, among the waiting tokens, the oldest one whose bank
// group differs from the last read's as soon as tCCD_S allows, and the
// oldest token otherwise once tCCD_L allows; `reordered` marks a read that
// overtook an older waiting token. A token's segments go out in order
// 0..SEGS-1 and the token leaves the window after its last segment.
//
// From the paper: the unit's place and purpose (organise memory accesses by
// device timing and KV token location) and the DDR timing values. The
// window, the selection rule and the interface are this design's choices.
module cmd_reorder
  import pam_pkg::*;
#(
  parameter int unsigned SEGS    = 4,
  parameter int unsigned WINDOW  = 8,
  parameter int unsigned SLOT_W  = 3,
  parameter int unsigned T_CCD_S = 4,
  parameter int unsigned T_CCD_L = 8,
  localparam int unsigned SEG_IW = (SEGS > 1) ? $clog2(SEGS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tok_valid,
  output logic              tok_ready,
  input  logic [SLOT_W-1:0] tok_slot,
  input  bg_t               tok_bg,
  input  row_t              tok_row,
  input  col_t              tok_col,
  output logic              rd_valid,
  output bg_t               rd_bg,
  output logic [SEG_IW-1:0] rd_bank,
  output row_t              rd_row,
  output col_t              rd_col,
  output logic [SLOT_W-1:0] rd_slot,
  output logic [SEG_IW-1:0] rd_seg,
  output logic              reordered,
  output logic              empty
);

  typedef struct packed {
    logic              valid;
    logic [SLOT_W-1:0] slot;
    bg_t               bg;
    row_t              row;
    col_t              col;
    logic [SEG_IW-1:0] seg;
  } entry_t;

  localparam int unsigned CNT_W = $clog2(T_CCD_L + 1);
  localparam int unsigned IW    = (WINDOW > 1) ? $clog2(WINDOW) : 1;

  entry_t            win [WINDOW];
  entry_t            nxt [WINDOW];
  bg_t               last_bg;
  logic              have_last;
  logic [CNT_W-1:0]  since;
  logic              pick;
  logic [IW-1:0]     sel;
  logic              retire;
  int                n_valid;

  always_comb begin
    pick = 1'b0;
    sel  = '0;
    // oldest token in another bank group, after tCCD_S
    if (int'(since) >= T_CCD_S) begin
      for (int i = WINDOW - 1; i >= 0; i--)
        if (win[i].valid && (!have_last || win[i].bg != last_bg)) begin
          pick = 1'b1;
          sel  = IW'(i);
        end
    end
    // otherwise the oldest token, after tCCD_L
    if (!pick && int'(since) >= T_CCD_L && win[0].valid) begin
      pick = 1'b1;
      sel  = '0;
    end
    rd_valid  = pick;
    rd_bg     = win[sel].bg;
    rd_bank   = win[sel].seg;
    rd_row    = win[sel].row;
    rd_col    = win[sel].col;
    rd_slot   = win[sel].slot;
    rd_seg    = win[sel].seg;
    reordered = pick && (sel != '0);
    retire    = pick && (int'(win[sel].seg) == SEGS - 1);
  end

  // window update: advance the issued entry, drop it when it is finished
  // (compacting the older-first order), append the new token at the end
  always_comb begin
    n_valid = 0;
    for (int i = 0; i < WINDOW; i++) if (win[i].valid) n_valid++;
    tok_ready = (n_valid < WINDOW) || retire;
    empty     = (n_valid == 0);
  end

  always_comb begin
    entry_t tmp [WINDOW];
    int     k;
    for (int i = 0; i < WINDOW; i++) begin
      tmp[i] = win[i];
      if (pick && IW'(i) == sel) tmp[i].seg = win[i].seg + SEG_IW'(1);
    end
    k = 0;
    for (int i = 0; i < WINDOW; i++) nxt[i] = '0;
    for (int i = 0; i < WINDOW; i++) begin
      if (tmp[i].valid && !(retire && IW'(i) == sel)) begin
        nxt[k] = tmp[i];
        k++;
      end
    end
    if (tok_valid && tok_ready && k < WINDOW) begin
      nxt[k].valid = 1'b1;
      nxt[k].slot  = tok_slot;
      nxt[k].bg    = tok_bg;
      nxt[k].row   = tok_row;
      nxt[k].col   = tok_col;
      nxt[k].seg   = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < WINDOW; i++) win[i] <= '0;
      since     <= CNT_W'(T_CCD_L);
      last_bg   <= '0;
      have_last <= 1'b0;
    end else begin
      for (int i = 0; i < WINDOW; i++) win[i] <= nxt[i];
      if (pick) begin
        since     <= CNT_W'(1);
        last_bg   <= win[sel].bg;
        have_last <= 1'b1;
      end else if (int'(since) < T_CCD_L) begin
        since <= since + CNT_W'(1);
      end
    end
  end

endmodule
