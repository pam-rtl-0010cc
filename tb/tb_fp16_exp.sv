// tb_fp16_exp: checks the FP16 exponential unit against $exp over random
// inputs in the softmax range [-12, 0], some positive inputs, and the
// special cases (zero, -inf, +inf, underflow, overflow).
module tb_fp16_exp;
  import tb_fp16_pkg::*;
  logic [15:0] x, y;
  int checks = 0, failures = 0;
  fp16_exp dut (.x(x), .y(y));

  task automatic check_one(input logic [15:0] xi, input real want, input real rel, input real abs_tol);
    x = xi;
    #1;
    checks++;
    if (!close(fp16_to_real(y), want, rel, abs_tol)) begin
      failures++;
      $display("FAIL exp(%h=%f) = %h (%f) want %f", xi, fp16_to_real(xi), y, fp16_to_real(y), want);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real r;
    logic [15:0] h;
    check_one(16'h0000, 1.0, 0.0, 0.0);
    check_one(16'hFC00, 0.0, 0.0, 0.0);
    check_one(16'h3C00, 2.718281828, 2.0e-3, 0.0);
    check_one(16'hC000, 0.135335283, 2.0e-3, 0.0);
    check_one(16'hCC00, 0.0, 0.0, 7.0e-5);           // e^-16 flushes
    check_one(16'h4C00, 1.0e30, 0.0, 0.0);           // e^16 overflows
    for (int i = 0; i < 2000; i++) begin
      r = -12.0 * real'($urandom_range(0, 100000)) / 100000.0;
      if (i % 5 == 0) r = 10.0 * real'($urandom_range(0, 100000)) / 100000.0;
      h = real_to_fp16(r);
      check_one(h, $exp(fp16_to_real(h)), 2.0e-3, 1.0e-4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
