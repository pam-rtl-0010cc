// tb_pam_ru: self-checking test of the reduction unit with 5 sources (two
// exponential-unit groups of 4). Random partials (O_j, m_j, l_j), one of them
// an empty block with m = -inf, are merged with and without final
// normalisation; m, l, lse and all D outputs are compared with a
// double-precision evaluation of the reduction formulas, and the cycle count
// with N_IN + ceil(N_IN/4) + N_IN*D/16 + 1 (+ D/16 when normalising) clock
// edges from the edge that samples start to done.
module tb_pam_ru;
  import tb_fp16_pkg::*;
  import pam_pkg::fp16_t;

  localparam int N_IN = 5, D = 128, L = 16, NCH = D / L;

  logic clk = 0, rst_n = 0, start = 0, final_norm = 0, busy, done;
  fp16_t in_m[N_IN], in_l[N_IN], rd_data[L], m_out, l_out, lse_out, o_rd_data[L];
  logic [2:0] rd_src;
  logic [2:0] rd_chunk, o_rd_chunk;
  fp16_t srcO[N_IN][D];
  int checks = 0, failures = 0;

  pam_ru #(.N_IN(N_IN), .D(D), .LANES(L), .N_EXP(4)) dut (.*);

  always #5 clk = ~clk;
  always_comb for (int i = 0; i < L; i++) rd_data[i] = srcO[rd_src][int'(rd_chunk) * L + i];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0;
  endfunction

  task automatic run(input bit fin, input int empty_src);
    real mt, lr, sc[N_IN], o[D], mx;
    int cyc, want;
    for (int j = 0; j < N_IN; j++) begin
      in_m[j] = real_to_fp16(urand(-4.0, 4.0));
      in_l[j] = real_to_fp16(urand(1.0, 10.0));
      for (int i = 0; i < D; i++) srcO[j][i] = real_to_fp16(urand(-5.0, 5.0));
      if (j == empty_src) begin
        in_m[j] = 16'hFC00;
        in_l[j] = 16'h0000;
        for (int i = 0; i < D; i++) srcO[j][i] = 16'h0000;
      end
    end
    mt = -1.0e30;
    for (int j = 0; j < N_IN; j++) if (j != empty_src && fp16_to_real(in_m[j]) > mt) mt = fp16_to_real(in_m[j]);
    lr = 0.0;
    for (int i = 0; i < D; i++) o[i] = 0.0;
    for (int j = 0; j < N_IN; j++) begin
      sc[j] = (j == empty_src) ? 0.0 : $exp(fp16_to_real(in_m[j]) - mt);
      lr += sc[j] * fp16_to_real(in_l[j]);
      for (int i = 0; i < D; i++) o[i] += sc[j] * fp16_to_real(srcO[j][i]);
    end
    if (fin) for (int i = 0; i < D; i++) o[i] = o[i] / lr;
    final_norm = fin;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    // phases after the edge that samples start, +1 for where counting begins
    want = N_IN + (N_IN + 3) / 4 + N_IN * NCH + 1 + (fin ? NCH : 0) + 1;
    checks += 4;
    if (cyc != want) begin failures++; $display("FAIL cycles %0d want %0d", cyc, want); end
    if (!close(fp16_to_real(m_out), mt, 1.0e-3, 0.0)) begin failures++; $display("FAIL m %f want %f", fp16_to_real(m_out), mt); end
    if (!close(fp16_to_real(l_out), lr, 1.0e-2, 0.0)) begin failures++; $display("FAIL l %f want %f", fp16_to_real(l_out), lr); end
    if (!close(fp16_to_real(lse_out), mt + $ln(lr), 5.0e-3, 5.0e-3)) begin failures++; $display("FAIL lse %f want %f", fp16_to_real(lse_out), mt + $ln(lr)); end
    mx = 0.0;
    for (int i = 0; i < D; i++) if ((o[i] < 0 ? -o[i] : o[i]) > mx) mx = (o[i] < 0 ? -o[i] : o[i]);
    for (int c = 0; c < NCH; c++) begin
      o_rd_chunk = 3'(c);
      #1;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (!close(fp16_to_real(o_rd_data[i]), o[c*L+i], 1.0e-2, 1.0e-2 * mx)) begin
          failures++;
          $display("FAIL fin=%0d O[%0d] %f want %f", fin, c*L+i, fp16_to_real(o_rd_data[i]), o[c*L+i]);
        end
      end
    end
  endtask

  initial begin
    o_rd_chunk = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, -1);
    run(1, -1);
    run(0, 2);
    run(1, 4);
    for (int k = 0; k < 4; k++) run(k[0], -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
