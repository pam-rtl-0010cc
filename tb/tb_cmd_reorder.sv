// tb_cmd_reorder: checks the sender-side command reorder unit. Tokens from
// two or more bank groups are pushed in; the testbench checks that every
// segment of every token is read exactly once with the token's row/column,
// that each token's segments go out in order, that read spacing respects
// tCCD_S (other bank group) and tCCD_L (same bank group), and, for a stream
// whose tokens come in blocks of the same bank group, that
// the unit reorders reads so that the total time is that of an interleaved
// stream (cycle count of the whole batch).
module tb_cmd_reorder;
  import pam_pkg::*;

  localparam int SEGS = 4, WINDOW = 8, SLOT_W = 3, TS = 4, TL = 8;

  logic clk = 0, rst_n = 0;
  logic tok_valid = 0, tok_ready;
  logic [SLOT_W-1:0] tok_slot;
  bg_t tok_bg;
  row_t tok_row;
  col_t tok_col;
  logic rd_valid, reordered, empty;
  bg_t rd_bg;
  logic [1:0] rd_bank, rd_seg;
  row_t rd_row;
  col_t rd_col;
  logic [SLOT_W-1:0] rd_slot;
  int checks = 0, failures = 0, n_reordered = 0;

  cmd_reorder #(.SEGS(SEGS), .WINDOW(WINDOW), .SLOT_W(SLOT_W), .T_CCD_S(TS), .T_CCD_L(TL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-slot bookkeeping of the batch in flight
  bg_t  exp_bg  [8];
  row_t exp_row [8];
  col_t exp_col [8];
  int   next_seg[8];
  int   last_issue, cycle;
  bg_t  last_bg;
  bit   have_last;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && rd_valid) begin
      checks += 4;
      if (rd_seg != 2'(next_seg[rd_slot]) || rd_bank != rd_seg) begin
        failures++; $display("FAIL slot %0d seg %0d, expected %0d", rd_slot, rd_seg, next_seg[rd_slot]);
      end
      if (rd_bg != exp_bg[rd_slot] || rd_row != exp_row[rd_slot] || rd_col != exp_col[rd_slot]) begin
        failures++; $display("FAIL address of slot %0d", rd_slot);
      end
      if (have_last && (cycle - last_issue) < ((rd_bg == last_bg) ? TL : TS)) begin
        failures++; $display("FAIL spacing %0d after bg %0d -> %0d", cycle - last_issue, last_bg, rd_bg);
      end
      if (reordered) n_reordered++;
      next_seg[rd_slot] <= next_seg[rd_slot] + 1;
      last_issue <= cycle;
      last_bg <= rd_bg;
      have_last <= 1;
    end
  end

  // push n tokens; group g of token t = pattern
  task automatic batch(input int n, input int mode, output int cycles);
    int t0;
    for (int s = 0; s < 8; s++) next_seg[s] = 0;
    t0 = cycle;
    for (int t = 0; t < n; t++) begin
      @(negedge clk);
      tok_slot = SLOT_W'(t);
      // mode 0: bg 0,0,0,0,1,1,1,1 (blocks); mode 1: random bg in 0..3
      tok_bg  = (mode == 0) ? bg_t'(t / 4) : bg_t'($urandom_range(0, 3));
      tok_row = row_t'($urandom);
      tok_col = col_t'($urandom);
      exp_bg[t] = tok_bg; exp_row[t] = tok_row; exp_col[t] = tok_col;
      tok_valid = 1;
      @(posedge clk);
      while (!tok_ready) @(posedge clk);
      @(negedge clk);
      tok_valid = 0;
    end
    @(posedge clk);
    while (!empty) @(posedge clk);
    cycles = cycle - t0;
    for (int s = 0; s < n; s++) begin
      checks++;
      if (next_seg[s] != SEGS) begin failures++; $display("FAIL slot %0d issued %0d segments", s, next_seg[s]); end
    end
  endtask

  initial begin
    int cyc;
    cycle = 0;
    have_last = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 8 tokens, two bank groups in blocks of 4: with reordering the 32 reads
    // alternate groups at tCCD_S = 4, about 32*4 cycles instead of 32*8
    batch(8, 0, cyc);
    checks++;
    if (cyc > 32 * TS + 16) begin failures++; $display("FAIL batch took %0d cycles", cyc); end
    checks++;
    if (n_reordered == 0) begin failures++; $display("FAIL nothing reordered"); end
    for (int k = 0; k < 5; k++) batch(8, 1, cyc);
    $display("reordered reads: %0d", n_reordered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
