// tb_relayout_buffer: checks the dual-port re-layout buffer. Segments of
// the tokens of a region arrive in random order; region_ready must stay low
// until the last one and then rise; every token read back must hold its
// segments in segment order; a partly allocated region must become ready
// only under flush; release must clear the region.
module tb_relayout_buffer;
  localparam int SLOTS = 8, SEGS = 4, SEG_W = 64, TPR = 2, NREG = SLOTS / TPR;

  logic clk = 0, rst_n = 0;
  logic alloc = 0, wr_en = 0, flush = 0, release_en = 0;
  logic [2:0] alloc_slot, wr_slot, rd_slot;
  logic [1:0] wr_seg, release_region;
  logic [SEG_W-1:0] wr_data, rd_data[SEGS];
  logic [SLOTS-1:0] slot_alloc;
  logic [NREG-1:0] region_ready;
  int checks = 0, failures = 0;

  relayout_buffer #(.SLOTS(SLOTS), .SEGS(SEGS), .SEG_W(SEG_W), .TPR(TPR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [SEG_W-1:0] pat(input int slot, input int seg, input int round);
    return {32'(slot * 1000 + seg * 10 + round), 32'hA5A5_0000 ^ 32'(seg)};
  endfunction

  task automatic do_alloc(input int s);
    @(negedge clk); alloc = 1; alloc_slot = 3'(s); @(negedge clk); alloc = 0;
  endtask

  task automatic fill_region(input int r, input int nslots, input int round);
    int order[16], n, k, tmp;
    n = nslots * SEGS;
    for (int i = 0; i < n; i++) order[i] = i;
    for (int i = n - 1; i > 0; i--) begin
      k = $urandom_range(0, i);
      tmp = order[i]; order[i] = order[k]; order[k] = tmp;
    end
    for (int i = 0; i < n; i++) begin
      checks++;
      if (region_ready[r]) begin failures++; $display("FAIL region %0d ready early", r); end
      @(negedge clk);
      wr_en = 1;
      wr_slot = 3'(r * TPR + order[i] / SEGS);
      wr_seg = 2'(order[i] % SEGS);
      wr_data = pat(r * TPR + order[i] / SEGS, order[i] % SEGS, round);
      @(negedge clk);
      wr_en = 0;
    end
  endtask

  task automatic check_read(input int r, input int nslots, input int round);
    for (int k = 0; k < nslots; k++) begin
      rd_slot = 3'(r * TPR + k);
      #1;
      for (int s = 0; s < SEGS; s++) begin
        checks++;
        if (rd_data[s] != pat(r * TPR + k, s, round)) begin failures++; $display("FAIL data slot %0d seg %0d", r*TPR+k, s); end
      end
    end
  endtask

  task automatic do_release(input int r);
    @(negedge clk); release_en = 1; release_region = 2'(r); @(negedge clk); release_en = 0;
    checks++;
    if (region_ready[r] || slot_alloc[r*TPR +: TPR] != '0) begin failures++; $display("FAIL release %0d", r); end
  endtask

  initial begin
    wr_slot = '0; wr_seg = '0; wr_data = '0; rd_slot = '0; alloc_slot = '0; release_region = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      for (int r = 0; r < NREG; r++) begin
        do_alloc(r * TPR);
        do_alloc(r * TPR + 1);
        fill_region(r, 2, round);
        #1;
        checks++;
        if (!region_ready[r]) begin failures++; $display("FAIL region %0d not ready", r); end
        check_read(r, 2, round);
        do_release(r);
      end
    end
    // partly used region: one token only
    do_alloc(4);
    fill_region(2, 1, 7);
    #1;
    checks++;
    if (region_ready[2]) begin failures++; $display("FAIL partial region ready without flush"); end
    flush = 1;
    #1;
    checks++;
    if (!region_ready[2]) begin failures++; $display("FAIL partial region not ready with flush"); end
    check_read(2, 1, 7);
    flush = 0;
    do_release(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
