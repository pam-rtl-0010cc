// tb_vector_unit: checks the PU vector unit in both modes for 16 lanes:
// the adder-tree dot product sum_i kv[i]*q[i] and the lane accumulation
// acc[i] + p*kv[i], against real arithmetic on random FP16 operands.
// The unit is combinational, so outputs are checked 1 time unit after the
// inputs change. The tolerances allow FP16 rounding at every adder-tree
// level. The 16 lanes come from the paper's 256-bit vector unit; the
// shared-multiplier, tree-plus-accumulator structure is this design's.
module tb_vector_unit;
  import tb_fp16_pkg::*;
  localparam int L = 16;
  logic mode_pv;
  logic [15:0] kv[L], q[L], p, acc_in[L], dot, acc_out[L];
  int checks = 0, failures = 0;

  vector_unit #(.LANES(L)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] r16(input real range);
    return real_to_fp16(range * (real'($urandom_range(0, 200000)) / 100000.0 - 1.0));
  endfunction

  initial begin
    real d, sumabs, a;
    for (int it = 0; it < 500; it++) begin
      for (int i = 0; i < L; i++) begin
        kv[i] = r16(4.0); q[i] = r16(4.0); acc_in[i] = r16(30.0);
      end
      p = r16(1.0);
      mode_pv = 0;
      #1;
      d = 0.0; sumabs = 0.0;
      for (int i = 0; i < L; i++) begin
        a = fp16_to_real(kv[i]) * fp16_to_real(q[i]);
        d += a;
        sumabs += (a < 0 ? -a : a);
      end
      checks++;
      if (!close(fp16_to_real(dot), d, 0.0, 3.0e-3 * sumabs + 1.0e-3)) begin
        failures++; $display("FAIL dot %f want %f", fp16_to_real(dot), d);
      end
      mode_pv = 1;
      #1;
      for (int i = 0; i < L; i++) begin
        a = fp16_to_real(acc_in[i]) + fp16_to_real(p) * fp16_to_real(kv[i]);
        checks++;
        if (!close(fp16_to_real(acc_out[i]), a, 1.0e-3, 2.0e-2)) begin
          failures++; $display("FAIL acc[%0d] %f want %f", i, fp16_to_real(acc_out[i]), a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
