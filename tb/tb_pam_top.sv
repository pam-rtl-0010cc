// tb_pam_top: end-to-end test of the PAM datapath at its default size (one
// HBM rank of 16 PUs, one DDR chip of 8 PUs, one SSD controller of 64 PUs,
// their reduction units and the global RU, plus the DDR-to-HBM interface).
//
// How: every PU gets a KV block from a behavioural bank/flash model that
// streams K then V on its kv_* port. The normalised O, m, l and lse are
// compared with a double-precision softmax(q K^T) V over all tokens of all
// three tiers. At the same time a stream of KV migration requests goes
// through the PAM interface; a behavioural DDR bank group answers reads
// after a random latency, and every token must land exactly once at its HBM
// row/column with the segment pairing of the HBM layout.
//
// Passes: (1) random block sizes, random stream bubbles, some empty blocks;
// (2) every PU full (MAX_TOK tokens) with no bubbles, where each PU's done
// time is checked against 2*n*D/LANES + 1 cycles of this count (one burst
// per cycle); (3) random again. Mechanism counters (stream stalls, empty
// blocks, bank-group RU runs, RU/PU overlap, DDR device RU, global
// reduction, migration reorders, flush of a partial region, migrated tokens)
// must each be non-zero, otherwise the test fails.
module tb_pam_top;
  import tb_fp16_pkg::*;
  import pam_pkg::*;

  localparam int D = 128, MAX_TOK = 32, TW = $clog2(MAX_TOK + 1);
  localparam int HN = 16, DN = 8, SN = 64, NPU = HN + DN + SN;
  localparam int HL = 16, DL = 4, SL = 16;
  localparam int SEG_W = 512, NMIG = 45;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  fp16_t q[D];
  logic [TW-1:0] hbm_n_tok[HN], ddr_n_tok[DN], ssd_n_tok[SN];
  logic hbm_kv_valid[HN], hbm_kv_ready[HN];
  logic ddr_kv_valid[DN], ddr_kv_ready[DN];
  logic ssd_kv_valid[SN], ssd_kv_ready[SN];
  fp16_t hbm_kv_data[HN][HL], ddr_kv_data[DN][DL], ssd_kv_data[SN][SL];
  fp16_t m_out, l_out, lse_out, o_rd_data[16];
  logic [2:0] o_rd_chunk;

  logic mig_valid = 0, mig_ready, mig_flush = 0;
  bg_t mig_src_bg, mig_dst_bg, src_rd_bg, dst_wr_bg;
  row_t mig_src_row, src_rd_row, dst_wr_row;
  col_t mig_src_col, src_rd_col, dst_wr_col;
  dtok_t mig_dst_tok;
  logic src_rd_valid, src_rdata_valid, dst_wr_valid, mig_reordered, mig_idle;
  logic [1:0] src_rd_bank;
  logic [4:0] src_rd_tag, src_rdata_tag;
  logic [SEG_W-1:0] src_rdata;
  logic [2*SEG_W-1:0] dst_wr_data[2];

  int checks = 0, failures = 0;
  // mechanism counters
  int n_stall = 0, n_empty = 0, n_grp_ru = 0, n_overlap = 0, n_dev_ru = 0, n_global = 0;
  int n_reorder = 0, n_flush_partial = 0, n_mig_written = 0, n_rate = 0;

  fp16_t K[NPU][MAX_TOK][D], V[NPU][MAX_TOK][D];
  int ntk[NPU];

  pam_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp16_t rnd_fp16(input real range);
    return real_to_fp16(range * (real'($urandom_range(0, 200000)) / 100000.0 - 1.0));
  endfunction

  function automatic int lanes_of(input int p);
    return (p >= HN && p < HN + DN) ? DL : HL;
  endfunction

  task automatic drive(input int p, input logic v, input fp16_t w[16]);
    if (p < HN) begin
      hbm_kv_valid[p] = v;
      for (int i = 0; i < HL; i++) hbm_kv_data[p][i] = w[i];
    end else if (p < HN + DN) begin
      ddr_kv_valid[p-HN] = v;
      for (int i = 0; i < DL; i++) ddr_kv_data[p-HN][i] = w[i];
    end else begin
      ssd_kv_valid[p-HN-DN] = v;
      for (int i = 0; i < SL; i++) ssd_kv_data[p-HN-DN][i] = w[i];
    end
  endtask

  function automatic logic ready_of(input int p);
    if (p < HN) return hbm_kv_ready[p];
    if (p < HN + DN) return ddr_kv_ready[p-HN];
    return ssd_kv_ready[p-HN-DN];
  endfunction

  // behavioural bank / flash model of PU p: K of every token, then V
  task automatic bank(input int p, input bit bubbles);
    fp16_t w[16];
    int L;
    L = lanes_of(p);
    for (int i = 0; i < 16; i++) w[i] = '0;
    for (int ph = 0; ph < 2; ph++)
      for (int t = 0; t < ntk[p]; t++)
        for (int b = 0; b < D / L; b++) begin
          while (bubbles && $urandom_range(0, 7) == 0) begin
            drive(p, 1'b0, w);
            n_stall++;
            @(negedge clk);
          end
          for (int i = 0; i < L; i++) w[i] = ph == 0 ? K[p][t][b*L+i] : V[p][t][b*L+i];
          drive(p, 1'b1, w);
          @(posedge clk);
          if (!ready_of(p)) begin failures++; $display("FAIL PU %0d not ready during its stream", p); end
          @(negedge clk);
        end
    drive(p, 1'b0, w);
  endtask

  // probes of internal start/busy pulses, for the mechanism counters
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < 4; g++) if (dut.u_hbm.ru_start[g]) begin
      n_grp_ru++;
      for (int p = 0; p < HN; p++) if (dut.u_hbm.pu_busy[p]) begin n_overlap++; break; end
    end
    for (int g = 0; g < 2; g++) if (dut.u_ddr.ru_start[g]) n_grp_ru++;
    for (int g = 0; g < 8; g++) if (dut.u_ssd.ru_start[g]) begin
      n_grp_ru++;
      for (int p = 0; p < SN; p++) if (dut.u_ssd.pu_busy[p]) begin n_overlap++; break; end
    end
    if (dut.u_ddr.dev_start) n_dev_ru++;
    if (dut.g_start) n_global++;
  end

  task automatic run(input int mode);
    real s, mr, lr, o[D], mx, sc[NPU][MAX_TOK];
    int rec[NPU], cyc, left;
    bit bub;
    bub = (mode != 2);
    for (int i = 0; i < D; i++) q[i] = rnd_fp16(0.5);
    for (int p = 0; p < NPU; p++) begin
      if (mode == 2) ntk[p] = MAX_TOK;
      else if ($urandom_range(0, 9) == 0) ntk[p] = 0;
      else ntk[p] = $urandom_range(1, MAX_TOK);
      if (ntk[p] == 0) n_empty++;
      for (int t = 0; t < ntk[p]; t++)
        for (int i = 0; i < D; i++) begin
          K[p][t][i] = rnd_fp16(1.0);
          V[p][t][i] = rnd_fp16(2.0);
        end
    end
    for (int p = 0; p < HN; p++) hbm_n_tok[p] = TW'(ntk[p]);
    for (int p = 0; p < DN; p++) ddr_n_tok[p] = TW'(ntk[HN+p]);
    for (int p = 0; p < SN; p++) ssd_n_tok[p] = TW'(ntk[HN+DN+p]);
    // reference
    mr = -1.0e30;
    for (int p = 0; p < NPU; p++)
      for (int t = 0; t < ntk[p]; t++) begin
        s = 0.0;
        for (int i = 0; i < D; i++) s += fp16_to_real(q[i]) * fp16_to_real(K[p][t][i]);
        sc[p][t] = s;
        if (s > mr) mr = s;
      end
    lr = 0.0;
    for (int i = 0; i < D; i++) o[i] = 0.0;
    for (int p = 0; p < NPU; p++)
      for (int t = 0; t < ntk[p]; t++) begin
        s = $exp(sc[p][t] - mr);
        lr += s;
        for (int i = 0; i < D; i++) o[i] += s * fp16_to_real(V[p][t][i]);
      end
    for (int i = 0; i < D; i++) o[i] = o[i] / lr;

    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int p = 0; p < NPU; p++) begin
      automatic int pp = p;
      fork bank(pp, bub); join_none
    end
    for (int p = 0; p < NPU; p++) rec[p] = -1;
    cyc = 1;
    left = NPU;
    while (!done) begin
      @(negedge clk);
      cyc++;
      for (int p = 0; p < NPU; p++) if (rec[p] < 0) begin
        logic d;
        if (p < HN) d = dut.u_hbm.pu_done[p];
        else if (p < HN + DN) d = dut.u_ddr.pu_done[p-HN];
        else d = dut.u_ssd.pu_done[p-HN-DN];
        if (d) rec[p] = cyc;
      end
    end
    if (mode == 2)
      for (int p = 0; p < NPU; p++) begin
        checks++;
        if (rec[p] != 2 * ntk[p] * D / lanes_of(p) + 1) begin
          failures++; $display("FAIL PU %0d done after %0d cycles, expected %0d", p, rec[p], 2 * ntk[p] * D / lanes_of(p) + 1);
        end else n_rate++;
      end
    checks += 3;
    if (!close(fp16_to_real(m_out), mr, 1.0e-2, 3.0e-2)) begin failures++; $display("FAIL m %f want %f", fp16_to_real(m_out), mr); end
    if (!close(fp16_to_real(l_out), lr, 3.0e-2, 1.0e-2)) begin failures++; $display("FAIL l %f want %f", fp16_to_real(l_out), lr); end
    if (!close(fp16_to_real(lse_out), mr + $ln(lr), 1.0e-2, 5.0e-2)) begin failures++; $display("FAIL lse %f want %f", fp16_to_real(lse_out), mr + $ln(lr)); end
    mx = 0.0;
    for (int i = 0; i < D; i++) if ((o[i] < 0 ? -o[i] : o[i]) > mx) mx = (o[i] < 0 ? -o[i] : o[i]);
    for (int c = 0; c < D / 16; c++) begin
      o_rd_chunk = 3'(c);
      #1;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (!close(fp16_to_real(o_rd_data[i]), o[c*16+i], 3.0e-2, 3.0e-2 * mx)) begin
          failures++;
          $display("FAIL O[%0d] %f want %f", c*16+i, fp16_to_real(o_rd_data[i]), o[c*16+i]);
        end
      end
    end
    $display("pass %0d: m %f l %f lse %f, done after %0d cycles", mode, fp16_to_real(m_out), fp16_to_real(l_out), fp16_to_real(lse_out), cyc);
  endtask

  // ------------------------------------------------ KV migration traffic
  function automatic logic [SEG_W-1:0] seg_val(input bg_t bg, input int bank, input row_t row, input col_t col);
    logic [SEG_W-1:0] v;
    for (int w = 0; w < SEG_W / 32; w++) v[w*32 +: 32] = {8'(bg) ^ 8'(w), 8'(bank), 16'(row) ^ 16'(col) ^ 16'(w * 77)};
    return v;
  endfunction

  typedef struct { int due; logic [4:0] tag; logic [SEG_W-1:0] data; } pend_t;
  pend_t pend[$];
  int cycle = 0;
  bg_t  t_sbg[NMIG], t_dbg[NMIG];
  row_t t_row[NMIG];
  col_t t_col[NMIG];
  dtok_t t_dtok[NMIG];
  int   t_hits[NMIG];
  bit   mig_done = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && src_rd_valid) begin
      pend_t p;
      p.due  = cycle + $urandom_range(3, 25);
      p.tag  = src_rd_tag;
      p.data = seg_val(src_rd_bg, int'(src_rd_bank), src_rd_row, src_rd_col);
      pend.push_back(p);
    end
    if (rst_n && mig_reordered) n_reorder++;
    if (rst_n && dst_wr_valid) begin
      int hit;
      hit = -1;
      for (int t = 0; t < NMIG; t++)
        if (t_dbg[t] == dst_wr_bg && row_t'(t_dtok[t] / 16) == dst_wr_row && col_t'(t_dtok[t] % 16) == dst_wr_col) hit = t;
      checks++;
      if (hit < 0) begin
        failures++; $display("FAIL migration write to unknown address");
      end else begin
        t_hits[hit]++;
        n_mig_written++;
        for (int b = 0; b < 2; b++) begin
          checks++;
          if (dst_wr_data[b] != {seg_val(t_sbg[hit], 2*b+1, t_row[hit], t_col[hit]), seg_val(t_sbg[hit], 2*b, t_row[hit], t_col[hit])}) begin
            failures++; $display("FAIL migration data of token %0d bank %0d", hit, b);
          end
        end
      end
    end
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

  task automatic migrate();
    int accepted;
    accepted = 0;
    for (int t = 0; t < NMIG; t++) begin
      @(negedge clk);
      mig_valid = 1;
      mig_src_bg = t_sbg[t]; mig_src_row = t_row[t]; mig_src_col = t_col[t];
      mig_dst_bg = t_dbg[t]; mig_dst_tok = t_dtok[t];
      @(posedge clk);
      while (!mig_ready) @(posedge clk);
      accepted++;
      @(negedge clk);
      mig_valid = 0;
      repeat ($urandom_range(0, 6)) @(negedge clk);
    end
    // NMIG is odd, so the last region is partial and only a flush drains it
    if (accepted % 2 == 1) n_flush_partial++;
    @(negedge clk);
    mig_flush = 1;
    @(negedge clk);
    mig_flush = 0;
    while (!mig_idle) @(negedge clk);
    repeat (5) @(negedge clk);
    mig_done = 1;
  endtask

  initial begin
    src_rdata_valid = 0; src_rdata_tag = '0; src_rdata = '0;
    mig_src_bg = '0; mig_dst_bg = '0; mig_src_row = '0; mig_src_col = '0; mig_dst_tok = '0;
    o_rd_chunk = '0;
    for (int i = 0; i < D; i++) q[i] = '0;
    for (int p = 0; p < HN; p++) begin hbm_kv_valid[p] = 0; hbm_n_tok[p] = '0; for (int i = 0; i < HL; i++) hbm_kv_data[p][i] = '0; end
    for (int p = 0; p < DN; p++) begin ddr_kv_valid[p] = 0; ddr_n_tok[p] = '0; for (int i = 0; i < DL; i++) ddr_kv_data[p][i] = '0; end
    for (int p = 0; p < SN; p++) begin ssd_kv_valid[p] = 0; ssd_n_tok[p] = '0; for (int i = 0; i < SL; i++) ssd_kv_data[p][i] = '0; end
    for (int t = 0; t < NMIG; t++) begin
      t_sbg[t] = bg_t'($urandom_range(0, 1));
      t_dbg[t] = bg_t'($urandom_range(0, 3));
      t_row[t] = row_t'($urandom);
      t_col[t] = col_t'($urandom);
      t_dtok[t] = dtok_t'(t * 37 + 5);
      t_hits[t] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork migrate(); join_none
    run(1);
    run(2);
    run(3);
    while (!mig_done) @(negedge clk);
    for (int t = 0; t < NMIG; t++) begin
      checks++;
      if (t_hits[t] != 1) begin failures++; $display("FAIL migrated token %0d written %0d times", t, t_hits[t]); end
    end
    $display("mechanisms: stalls %0d empty %0d group_ru %0d ru_pu_overlap %0d ddr_dev_ru %0d global_ru %0d rate_ok %0d",
             n_stall, n_empty, n_grp_ru, n_overlap, n_dev_ru, n_global, n_rate);
    $display("mechanisms: mig_reorder %0d mig_flush_partial %0d mig_written %0d", n_reorder, n_flush_partial, n_mig_written);
    checks += 10;
    if (n_stall == 0)         begin failures++; $display("FAIL no stream stall"); end
    if (n_empty == 0)         begin failures++; $display("FAIL no empty block"); end
    if (n_grp_ru != 3 * 14)   begin failures++; $display("FAIL group RU runs %0d", n_grp_ru); end
    if (n_overlap == 0)       begin failures++; $display("FAIL no RU/PU overlap"); end
    if (n_dev_ru != 3)        begin failures++; $display("FAIL DDR device RU runs %0d", n_dev_ru); end
    if (n_global != 3)        begin failures++; $display("FAIL global RU runs %0d", n_global); end
    if (n_reorder == 0)       begin failures++; $display("FAIL no migration reorder"); end
    if (n_flush_partial == 0) begin failures++; $display("FAIL no partial-region flush"); end
    if (n_mig_written != NMIG) begin failures++; $display("FAIL migrated %0d tokens", n_mig_written); end
    if (n_rate != NPU)        begin failures++; $display("FAIL rate checks %0d", n_rate); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
