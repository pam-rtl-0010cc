// tb_addr_gen: checks the receiver-side address generation unit. The
// testbench plays the re-layout buffer: it presents ready regions and
// returns token data for rd_slot. Each write must carry the row and column
// dst_tok / 16 and dst_tok % 16, the token's bank group, bank b's word
// {segment 2b+1, segment 2b}, one token per cycle in slot order; unallocated
// slots of a flushed region are skipped; the region is released after its
// last slot; regions are served in ring order.
module tb_addr_gen;
  import pam_pkg::*;
  localparam int SLOTS = 8, SEGS = 4, SEG_W = 32, TPR = 2, DB = 2, WPR = 16, NREG = SLOTS / TPR;

  logic clk = 0, rst_n = 0;
  logic [NREG-1:0] region_ready;
  logic [SLOTS-1:0] slot_alloc;
  bg_t dst_bg[SLOTS];
  dtok_t dst_tok[SLOTS];
  logic [2:0] rd_slot;
  logic [SEG_W-1:0] rd_data[SEGS];
  logic wr_valid, release_en;
  bg_t wr_bg;
  row_t wr_row;
  col_t wr_col;
  logic [2*SEG_W-1:0] wr_data[DB];
  logic [1:0] release_region;
  int checks = 0, failures = 0;

  addr_gen #(.SLOTS(SLOTS), .SEGS(SEGS), .SEG_W(SEG_W), .TPR(TPR), .DST_BANKS(DB), .WORDS_PER_ROW(WPR)) dut (.*);

  always #5 clk = ~clk;
  always_comb for (int s = 0; s < SEGS; s++) rd_data[s] = {16'(rd_slot), 16'(s)} ^ 32'(dst_tok[rd_slot]);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic serve(input int r, input logic [1:0] alloc_mask);
    int seen;
    for (int k = 0; k < TPR; k++) begin
      dst_bg[r*TPR+k]  = bg_t'($urandom_range(0, 7));
      dst_tok[r*TPR+k] = dtok_t'($urandom_range(0, 4095));
    end
    slot_alloc[r*TPR +: TPR] = alloc_mask;
    @(negedge clk);
    region_ready[r] = 1'b1;
    seen = 0;
    for (int k = 0; k < TPR; k++) begin
      #1;
      checks++;
      if (rd_slot != 3'(r*TPR + k)) begin failures++; $display("FAIL rd_slot %0d want %0d", rd_slot, r*TPR+k); end
      checks++;
      if (wr_valid != alloc_mask[k]) begin failures++; $display("FAIL wr_valid slot %0d", r*TPR+k); end
      if (wr_valid) begin
        seen++;
        checks += 3;
        if (wr_bg != dst_bg[r*TPR+k]) begin failures++; $display("FAIL bg"); end
        if (wr_row != row_t'(dst_tok[r*TPR+k] / WPR) || wr_col != col_t'(dst_tok[r*TPR+k] % WPR)) begin
          failures++; $display("FAIL row/col %0d/%0d for token %0d", wr_row, wr_col, dst_tok[r*TPR+k]);
        end
        for (int b = 0; b < DB; b++)
          if (wr_data[b] != {rd_data[2*b+1], rd_data[2*b]}) begin failures++; $display("FAIL data bank %0d", b); end
      end
      checks++;
      if (release_en != (k == TPR - 1) || (release_en && release_region != 2'(r))) begin
        failures++; $display("FAIL release at k=%0d", k);
      end
      @(negedge clk);
    end
    region_ready[r] = 1'b0;
    slot_alloc[r*TPR +: TPR] = '0;
  endtask

  initial begin
    region_ready = '0;
    slot_alloc = '0;
    for (int s = 0; s < SLOTS; s++) begin dst_bg[s] = '0; dst_tok[s] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++)
      for (int r = 0; r < NREG; r++) serve(r, (round == 3 && r == 1) ? 2'b01 : 2'b11);
    // not ready: no writes
    repeat (4) begin
      @(negedge clk);
      checks++;
      if (wr_valid) begin failures++; $display("FAIL write without a ready region"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
