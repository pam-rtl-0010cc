// tb_pim_tier: end-to-end test of one DDR-PIM chip slice (2 bank groups of 4
// banks, 4-lane PUs, one RU per bank group and a device RU). Each PU gets a
// random block of KV tokens (one PU an empty block) from a behavioural bank
// model that streams K then V with random bubbles. The tier's merged
// unnormalised result (O, m, l) is checked against a double-precision
// attention over all the tier's tokens taken together.
module tb_pim_tier;
  import tb_fp16_pkg::*;
  import pam_pkg::fp16_t;

  localparam int LANES = 4, D = 128, NG = 2, PPG = 4, NPU = NG * PPG, MAX_TOK = 32;
  localparam int TW = $clog2(MAX_TOK + 1);

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  fp16_t q[D];
  logic [TW-1:0] n_tok[NPU];
  logic kv_valid[NPU], kv_ready[NPU];
  fp16_t kv_data[NPU][LANES];
  fp16_t out_m[1], out_l[1], rd_data[16];
  logic rd_src;
  logic [2:0] rd_chunk;
  int checks = 0, failures = 0;

  fp16_t K[NPU][MAX_TOK][D], V[NPU][MAX_TOK][D];
  int ntk[NPU];

  pim_tier #(.LANES(LANES), .D(D), .N_GRP(NG), .PPG(PPG), .DEV_RU(1'b1), .MAX_TOK(MAX_TOK)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp16_t rnd_fp16(input real range);
    return real_to_fp16(range * (real'($urandom_range(0, 200000)) / 100000.0 - 1.0));
  endfunction

  task automatic bank(input int p);
    for (int ph = 0; ph < 2; ph++)
      for (int t = 0; t < ntk[p]; t++)
        for (int b = 0; b < D / LANES; b++) begin
          while ($urandom_range(0, 7) == 0) begin kv_valid[p] = 0; @(negedge clk); end
          for (int i = 0; i < LANES; i++) kv_data[p][i] = ph == 0 ? K[p][t][b*LANES+i] : V[p][t][b*LANES+i];
          kv_valid[p] = 1;
          @(posedge clk);
          @(negedge clk);
        end
    kv_valid[p] = 0;
  endtask

  task automatic run();
    real s, mr, lr, o[D], mx;
    for (int i = 0; i < D; i++) q[i] = rnd_fp16(0.5);
    for (int p = 0; p < NPU; p++) begin
      ntk[p] = (p == 3) ? 0 : $urandom_range(1, 12);
      n_tok[p] = TW'(ntk[p]);
      for (int t = 0; t < ntk[p]; t++)
        for (int i = 0; i < D; i++) begin
          K[p][t][i] = rnd_fp16(1.0);
          V[p][t][i] = rnd_fp16(2.0);
        end
    end
    mr = -1.0e30;
    for (int p = 0; p < NPU; p++)
      for (int t = 0; t < ntk[p]; t++) begin
        s = 0.0;
        for (int i = 0; i < D; i++) s += fp16_to_real(q[i]) * fp16_to_real(K[p][t][i]);
        if (s > mr) mr = s;
      end
    lr = 0.0;
    for (int i = 0; i < D; i++) o[i] = 0.0;
    for (int p = 0; p < NPU; p++)
      for (int t = 0; t < ntk[p]; t++) begin
        s = 0.0;
        for (int i = 0; i < D; i++) s += fp16_to_real(q[i]) * fp16_to_real(K[p][t][i]);
        s = $exp(s - mr);
        lr += s;
        for (int i = 0; i < D; i++) o[i] += s * fp16_to_real(V[p][t][i]);
      end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int p = 0; p < NPU; p++) begin
      automatic int pp = p;
      fork bank(pp); join_none
    end
    while (!done) @(negedge clk);
    checks += 2;
    if (!close(fp16_to_real(out_m[0]), mr, 1.0e-2, 3.0e-2)) begin failures++; $display("FAIL m %f want %f", fp16_to_real(out_m[0]), mr); end
    if (!close(fp16_to_real(out_l[0]), lr, 2.0e-2, 1.0e-2)) begin failures++; $display("FAIL l %f want %f", fp16_to_real(out_l[0]), lr); end
    mx = 0.0;
    for (int i = 0; i < D; i++) if ((o[i] < 0 ? -o[i] : o[i]) > mx) mx = (o[i] < 0 ? -o[i] : o[i]);
    for (int c = 0; c < D / 16; c++) begin
      rd_chunk = 3'(c);
      #1;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (!close(fp16_to_real(rd_data[i]), o[c*16+i], 2.0e-2, 2.0e-2 * mx)) begin
          failures++;
          $display("FAIL O[%0d] %f want %f", c*16+i, fp16_to_real(rd_data[i]), o[c*16+i]);
        end
      end
    end
  endtask

  initial begin
    rd_src = 0;
    rd_chunk = '0;
    for (int p = 0; p < NPU; p++) begin
      kv_valid[p] = 0;
      n_tok[p] = '0;
      for (int i = 0; i < LANES; i++) kv_data[p][i] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
