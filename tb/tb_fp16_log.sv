// tb_fp16_log: checks the FP16 natural-log unit against $ln over random
// positive inputs spanning the FP16 normal range, plus ln(1) = 0 and the
// special cases ln(0) = -inf and ln(+inf) = +inf.
module tb_fp16_log;
  import tb_fp16_pkg::*;
  logic [15:0] x, y;
  int checks = 0, failures = 0;
  fp16_log dut (.x(x), .y(y));

  task automatic check_one(input logic [15:0] xi, input real want, input real rel, input real abs_tol);
    x = xi;
    #1;
    checks++;
    if (!close(fp16_to_real(y), want, rel, abs_tol)) begin
      failures++;
      $display("FAIL ln(%h=%f) = %h (%f) want %f", xi, fp16_to_real(xi), y, fp16_to_real(y), want);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] h;
    check_one(16'h3C00, 0.0, 0.0, 1.0e-4);
    check_one(16'h4000, 0.693147, 2.0e-3, 0.0);
    x = 16'h0000; #1; checks++; if (y != 16'hFC00) failures++;
    x = 16'h7C00; #1; checks++; if (y != 16'h7C00) failures++;
    for (int i = 0; i < 2000; i++) begin
      h = {1'b0, 5'($urandom_range(1, 30)), 10'($urandom)};
      check_one(h, $ln(fp16_to_real(h)), 2.0e-3, 2.0e-3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
