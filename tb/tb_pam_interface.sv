// tb_pam_interface: end-to-end test of the PAM interface (DDR layout to HBM
// layout). A behavioural source bank group returns each segment read after
// a random latency, so data come back out of order. Every migrated token
// must be written exactly once into the destination, at row/column
// dst_tok/16 and dst_tok%16 of its destination bank group, with bank b
// holding source segments {2b+1, 2b}. An odd batch is drained with flush.
// The testbench also requires that the reorder unit reordered some reads.
module tb_pam_interface;
  import pam_pkg::*;
  localparam int SLOTS = 8, SEGS = 4, SEG_W = 512, DB = 2, NT = 29;

  logic clk = 0, rst_n = 0;
  logic mig_valid = 0, mig_ready, flush = 0;
  bg_t mig_src_bg, mig_dst_bg;
  row_t mig_src_row;
  col_t mig_src_col;
  dtok_t mig_dst_tok;
  logic src_rd_valid, src_rdata_valid, dst_wr_valid, reordered, idle;
  bg_t src_rd_bg, dst_wr_bg;
  logic [1:0] src_rd_bank;
  row_t src_rd_row, dst_wr_row;
  col_t src_rd_col, dst_wr_col;
  logic [4:0] src_rd_tag, src_rdata_tag;
  logic [SEG_W-1:0] src_rdata;
  logic [2*SEG_W-1:0] dst_wr_data[DB];
  int checks = 0, failures = 0, n_reordered = 0, n_written = 0;

  pam_interface #(.SLOTS(SLOTS), .SEGS(SEGS), .SEG_W(SEG_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [SEG_W-1:0] seg_val(input bg_t bg, input int bank, input row_t row, input col_t col);
    logic [SEG_W-1:0] v;
    for (int w = 0; w < SEG_W / 32; w++) v[w*32 +: 32] = {8'(bg) ^ 8'(w), 8'(bank), 16'(row) ^ 16'(col) ^ 16'(w * 77)};
    return v;
  endfunction

  // source memory: pending reads with random latency
  typedef struct { int due; logic [4:0] tag; logic [SEG_W-1:0] data; } pend_t;
  pend_t pend[$];
  int cycle = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && src_rd_valid) begin
      pend_t p;
      p.due  = cycle + $urandom_range(3, 25);
      p.tag  = src_rd_tag;
      p.data = seg_val(src_rd_bg, int'(src_rd_bank), src_rd_row, src_rd_col);
      pend.push_back(p);
    end
    if (rst_n && reordered) n_reordered++;
  end

  always @(negedge clk) begin
    src_rdata_valid = 0;
    for (int i = 0; i < pend.size(); i++)
      if (pend[i].due <= cycle) begin
        src_rdata_valid = 1;
        src_rdata_tag   = pend[i].tag;
        src_rdata       = pend[i].data;
        pend.delete(i);
        break;
      end
  end

  // tokens of the batch
  bg_t  t_sbg[NT], t_dbg[NT];
  row_t t_row[NT];
  col_t t_col[NT];
  dtok_t t_dtok[NT];
  int   t_hits[NT];

  always @(posedge clk) begin
    if (rst_n && dst_wr_valid) begin
      int hit;
      hit = -1;
      for (int t = 0; t < NT; t++)
        if (t_dbg[t] == dst_wr_bg && row_t'(t_dtok[t] / 16) == dst_wr_row && col_t'(t_dtok[t] % 16) == dst_wr_col) hit = t;
      checks++;
      if (hit < 0) begin
        failures++; $display("FAIL write to unknown address bg %0d row %0d col %0d", dst_wr_bg, dst_wr_row, dst_wr_col);
      end else begin
        t_hits[hit]++;
        n_written++;
        for (int b = 0; b < DB; b++) begin
          checks++;
          if (dst_wr_data[b] != {seg_val(t_sbg[hit], 2*b+1, t_row[hit], t_col[hit]), seg_val(t_sbg[hit], 2*b, t_row[hit], t_col[hit])}) begin
            failures++; $display("FAIL data of token %0d bank %0d", hit, b);
          end
        end
      end
    end
  end

  initial begin
    src_rdata_valid = 0; src_rdata_tag = '0; src_rdata = '0;
    mig_src_bg = '0; mig_dst_bg = '0; mig_src_row = '0; mig_src_col = '0; mig_dst_tok = '0;
    for (int t = 0; t < NT; t++) begin
      t_sbg[t] = bg_t'($urandom_range(0, 3));
      t_dbg[t] = bg_t'($urandom_range(0, 3));
      t_row[t] = row_t'($urandom);
      t_col[t] = col_t'($urandom);
      t_dtok[t] = dtok_t'(t * 37 + 11);
      t_hits[t] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      mig_valid = 1;
      mig_src_bg = t_sbg[t]; mig_src_row = t_row[t]; mig_src_col = t_col[t];
      mig_dst_bg = t_dbg[t]; mig_dst_tok = t_dtok[t];
      @(posedge clk);
      while (!mig_ready) @(posedge clk);
      @(negedge clk);
      mig_valid = 0;
    end
    @(negedge clk);
    flush = 1;
    @(negedge clk);
    flush = 0;
    while (!idle) @(negedge clk);
    repeat (5) @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      checks++;
      if (t_hits[t] != 1) begin failures++; $display("FAIL token %0d written %0d times", t, t_hits[t]); end
    end
    checks++;
    if (n_reordered == 0) begin failures++; $display("FAIL no reordering"); end
    $display("tokens written %0d, reordered reads %0d", n_written, n_reordered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
