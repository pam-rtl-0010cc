// relayout_buffer: dual-port re-layout buffer of the PAM interface.
//
// SLOTS token slots of SEGS segments of SEG_W bits each. The sender side
// writes one segment per cycle (wr_en, wr_slot, wr_seg, wr_data) in whatever
// order the command reorder unit read them from the source banks; the
// receiver side reads a whole token (all SEGS segments, in segment order) in
// one cycle through rd_slot -> rd_data, so the address generation unit can
// hand every destination bank its part of the token in parallel. Slots are
// grouped into regions of TPR consecutive tokens ("KV 1 & 2" in the paper's
// figure: two tokens per region by default). A slot is marked allocated by
// `alloc` when its migration is accepted; region_ready[r] is high when every
// allocated slot of region r holds all its segments and either all TPR slots
// are allocated or `flush` is high, i.e. the region is a complete contiguous
// block. `release_en`/`release_region` frees a region's slots after it was
// sent. The read port is combinational; a write is visible on the read port
// in the next cycle.
//
// From the paper: the dual-port buffer between sender and receiver and the
// transfer of a contiguous region once assembled. Sizes, the region rule and
// the ports are this design's choices.
module relayout_buffer
  import pam_pkg::*;
#(
  parameter int unsigned SLOTS = 8,
  parameter int unsigned SEGS  = 4,
  parameter int unsigned SEG_W = 512,
  parameter int unsigned TPR   = 2,
  localparam int unsigned NREG   = SLOTS / TPR,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned SEG_IW = (SEGS > 1) ? $clog2(SEGS) : 1,
  localparam int unsigned REG_W  = (NREG > 1) ? $clog2(NREG) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               alloc,
  input  logic [SLOT_W-1:0]  alloc_slot,
  input  logic               wr_en,
  input  logic [SLOT_W-1:0]  wr_slot,
  input  logic [SEG_IW-1:0]  wr_seg,
  input  logic [SEG_W-1:0]   wr_data,
  input  logic [SLOT_W-1:0]  rd_slot,
  output logic [SEG_W-1:0]   rd_data  [SEGS],
  output logic [SLOTS-1:0]   slot_alloc,
  input  logic               flush,
  output logic [NREG-1:0]    region_ready,
  input  logic               release_en,
  input  logic [REG_W-1:0]   release_region
);

  logic [SEG_W-1:0] mem [SLOTS*SEGS];
  logic [SEGS-1:0]  seg_valid [SLOTS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[int'(wr_slot) * SEGS + int'(wr_seg)] <= wr_data;
  end

  always_comb begin
    for (int s = 0; s < SEGS; s++) rd_data[s] = mem[int'(rd_slot) * SEGS + s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_alloc <= '0;
      for (int i = 0; i < SLOTS; i++) seg_valid[i] <= '0;
    end else begin
      if (release_en) begin
        for (int k = 0; k < TPR; k++) begin
          slot_alloc[int'(release_region) * TPR + k] <= 1'b0;
          seg_valid[int'(release_region) * TPR + k]  <= '0;
        end
      end
      if (alloc) slot_alloc[alloc_slot] <= 1'b1;
      if (wr_en) seg_valid[wr_slot][wr_seg] <= 1'b1;
    end
  end

  always_comb begin
    for (int r = 0; r < NREG; r++) begin
      logic all_alloc, any_alloc, complete;
      all_alloc = 1'b1;
      any_alloc = 1'b0;
      complete  = 1'b1;
      for (int k = 0; k < TPR; k++) begin
        all_alloc &= slot_alloc[r*TPR + k];
        any_alloc |= slot_alloc[r*TPR + k];
        if (slot_alloc[r*TPR + k] && !(&seg_valid[r*TPR + k])) complete = 1'b0;
      end
      region_ready[r] = any_alloc && complete && (all_alloc || flush);
    end
  end

endmodule
