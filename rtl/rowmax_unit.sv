// rowmax_unit: Row-wise Max Unit of the local attention PU.
//
// Keeps the running maximum m of the FP16 scores S of the row segment that a
// PU is processing (Algorithm 1: m = rowmax(S)). `clear` resets the maximum
// to -infinity; each cycle with `in_valid` high compares `in` against the
// stored maximum with one FP16 comparator and keeps the larger. `max_out`
// is registered and holds the maximum of every value accepted since the
// last clear, one cycle after the last value. A clear and a valid value in
// the same cycle start a new row with that value.
module rowmax_unit
  import pam_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  in_valid,
  input  fp16_t in,
  output fp16_t max_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    max_out <= FP16_NEG_INF;
    else if (clear && in_valid)    max_out <= in;
    else if (clear)                max_out <= FP16_NEG_INF;
    else if (in_valid)             max_out <= fp16_max(max_out, in);
  end

endmodule
