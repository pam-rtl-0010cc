// tb_rowmax_unit: checks the Row-wise Max Unit on random FP16 rows of mixed
// sign, against a running maximum kept in real arithmetic; also checks the
// -inf value after clear and that cycles without in_valid change nothing.
// Timing: inputs are driven at the falling edge and max_out is checked one
// rising edge later (the unit registers its maximum). The -inf start value
// and one compare per cycle are this design's choices; the paper only names
// a Row-wise Max Unit.
module tb_rowmax_unit;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic [15:0] in, max_out;
  int checks = 0, failures = 0;

  rowmax_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_max, v;
    in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int row = 0; row < 40; row++) begin
      clear = 1;
      @(negedge clk);
      clear = 0;
      checks++;
      if (max_out != 16'hFC00) begin failures++; $display("FAIL not -inf after clear"); end
      ref_max = -1.0e30;
      for (int k = 0; k < 1 + $urandom_range(0, 30); k++) begin
        v = 100.0 * (real'($urandom_range(0, 200000)) / 100000.0 - 1.0);
        if (row % 3 == 0) v = -v * v;
        in = real_to_fp16(v);
        in_valid = ($urandom_range(0, 3) != 0);
        if (in_valid && fp16_to_real(in) > ref_max) ref_max = fp16_to_real(in);
        @(negedge clk);
        in_valid = 0;
        if (ref_max > -1.0e29) begin
          checks++;
          if (fp16_to_real(max_out) != ref_max) begin failures++; $display("FAIL max %f want %f", fp16_to_real(max_out), ref_max); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
