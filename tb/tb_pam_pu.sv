// tb_pam_pu: self-checking test of the local attention PU (16-lane HBM/SSD
// configuration, D = 128). Random FP16 Q, K and V are streamed in the
// key-then-value order; m, l and every element of O are compared with a
// double-precision reference of S = QK^T, m = max S, P = exp(S-m), l = sum P,
// O = P V. With an unbroken stream done must follow 2*n*D/LANES clock edges
// after the edge that samples start (one 256-bit burst per cycle); the count
// below starts one cycle earlier, hence the + 1. Runs with stream bubbles
// check that the PU stalls correctly, and n = 0 checks the empty block.
module tb_pam_pu;
  import tb_fp16_pkg::*;
  import pam_pkg::fp16_t;

  localparam int LANES = 16, D = 128, MAX_TOK = 32;
  localparam int TW = $clog2(MAX_TOK + 1);

  logic clk = 0, rst_n = 0, start = 0, kv_valid = 0, kv_ready, busy, done;
  logic [TW-1:0] n_tok;
  fp16_t q[D], kv_data[LANES], m_out, l_out, o_rd_data[16];
  logic [2:0] o_rd_chunk;
  int checks = 0, failures = 0, stalls = 0;

  fp16_t K[MAX_TOK][D], V[MAX_TOK][D];

  pam_pu #(.LANES(LANES), .D(D), .MAX_TOK(MAX_TOK)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp16_t rnd_fp16(input real range);
    return real_to_fp16(range * (real'($urandom_range(0, 200000)) / 100000.0 - 1.0));
  endfunction

  task automatic stream(input int n, input bit bubbles);
    for (int ph = 0; ph < 2; ph++)
      for (int t = 0; t < n; t++)
        for (int b = 0; b < D / LANES; b++) begin
          if (bubbles) begin
            while ($urandom_range(0, 3) == 0) begin
              kv_valid = 0;
              @(negedge clk);
              stalls++;
            end
          end
          for (int i = 0; i < LANES; i++) kv_data[i] = ph == 0 ? K[t][b*LANES+i] : V[t][b*LANES+i];
          kv_valid = 1;
          @(posedge clk);
          if (!kv_ready) begin checks++; failures++; $display("FAIL kv_ready low while streaming"); end
          @(negedge clk);
        end
    kv_valid = 0;
  endtask

  task automatic run(input int n, input bit bubbles);
    real s[MAX_TOK], mr, lr, o[D], pj, mx;
    int cyc;
    for (int i = 0; i < D; i++) q[i] = rnd_fp16(1.0);
    for (int t = 0; t < n; t++)
      for (int i = 0; i < D; i++) begin
        K[t][i] = rnd_fp16(1.0);
        V[t][i] = rnd_fp16(2.0);
      end
    // reference
    mr = -1.0e30;
    for (int t = 0; t < n; t++) begin
      s[t] = 0.0;
      for (int i = 0; i < D; i++) s[t] += fp16_to_real(q[i]) * fp16_to_real(K[t][i]);
      if (s[t] > mr) mr = s[t];
    end
    lr = 0.0;
    for (int i = 0; i < D; i++) o[i] = 0.0;
    for (int t = 0; t < n; t++) begin
      pj = $exp(s[t] - mr);
      lr += pj;
      for (int i = 0; i < D; i++) o[i] += pj * fp16_to_real(V[t][i]);
    end
    n_tok = TW'(n);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    fork
      stream(n, bubbles);
      begin
        while (!done) begin @(negedge clk); cyc++; end
      end
    join
    if (!bubbles) begin
      checks++;
      if (cyc != 2 * n * D / LANES + 1) begin
        failures++;
        $display("FAIL cycles %0d, expected %0d", cyc, 2 * n * D / LANES + 1);
      end
    end
    checks += 2;
    if (n == 0) begin
      if (m_out != 16'hFC00 || l_out != 16'h0000) begin failures++; $display("FAIL empty block m=%h l=%h", m_out, l_out); end
    end else begin
      if (!close(fp16_to_real(m_out), mr, 1.0e-2, 3.0e-2)) begin failures++; $display("FAIL m %f want %f", fp16_to_real(m_out), mr); end
      if (!close(fp16_to_real(l_out), lr, 1.5e-2, 1.0e-2)) begin failures++; $display("FAIL l %f want %f", fp16_to_real(l_out), lr); end
    end
    mx = 0.0;
    for (int i = 0; i < D; i++) if ((o[i] < 0 ? -o[i] : o[i]) > mx) mx = (o[i] < 0 ? -o[i] : o[i]);
    for (int c = 0; c < D / 16; c++) begin
      o_rd_chunk = 3'(c);
      #1;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (!close(fp16_to_real(o_rd_data[i]), o[c*16+i], 2.0e-2, 2.0e-2 * mx + 1.0e-3)) begin
          failures++;
          $display("FAIL n=%0d O[%0d] %f want %f", n, c*16+i, fp16_to_real(o_rd_data[i]), o[c*16+i]);
        end
      end
    end
  endtask

  initial begin
    n_tok = '0;
    o_rd_chunk = '0;
    for (int i = 0; i < LANES; i++) kv_data[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1, 0);
    run(8, 0);
    run(32, 0);
    run(5, 1);
    run(17, 1);
    run(0, 0);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
