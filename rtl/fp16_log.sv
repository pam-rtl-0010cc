// fp16_log: combinational FP16 natural-logarithm unit, y = ln(x).
//
// One of these sits in each reduction unit (RU) after the accumulation of
// the partial sums l; the paper names "a logarithmic unit" and says it
// performs the normalisation based on the accumulated sum, without giving
// its insides. This implementation is the design's own: for x = 2^e * 1.f,
// log2(1.f) is read from a 33-entry table of log2(1 + i/32) (Q16, entry
// i = round(65536 * log2(1 + i/32))) with linear interpolation on the low
// five fraction bits; (e + log2(1.f)) is multiplied by ln 2 and the signed
// fixed-point result is rounded to FP16. ln(0) = -inf, ln(+inf) = +inf, and
// a negative input gives the FP16 quiet NaN 0x7E00.
//
// Interface: x in, y out, no clock.
module fp16_log
  import pam_pkg::*;
(
  input  fp16_t x,
  output fp16_t y
);

  localparam logic [16:0] LOG2_TAB [33] = '{
    17'd0,     17'd2909,  17'd5732,  17'd8473,  17'd11136, 17'd13727,
    17'd16248, 17'd18704, 17'd21098, 17'd23433, 17'd25711, 17'd27936,
    17'd30109, 17'd32234, 17'd34312, 17'd36346, 17'd38336, 17'd40286,
    17'd42196, 17'd44068, 17'd45904, 17'd47705, 17'd49472, 17'd51207,
    17'd52911, 17'd54584, 17'd56229, 17'd57845, 17'd59434, 17'd60997,
    17'd62534, 17'd64047, 17'd65536
  };
  // ln(2) in Q16
  localparam logic [15:0] LN2_Q16 = 16'd45426;

  logic        [16:0] t0, t1, l2m;
  logic        [21:0] interp;
  logic signed [31:0] l2x;     // log2(x), Q16
  logic signed [47:0] lnx;     // ln(x), Q32

  always_comb begin
    t0     = LOG2_TAB[6'(x[9:5])];
    t1     = LOG2_TAB[6'(x[9:5]) + 6'd1];
    interp = 22'(t1 - t0) * 22'(x[4:0]);
    l2m    = t0 + 17'(interp >> 5);
    l2x    = ((32'(x[14:10]) - 32'sd15) <<< 16) + 32'(l2m);
    lnx    = 48'(l2x) * $signed({1'b0, LN2_Q16});
    if (x[14:10] == 5'd0)      y = FP16_NEG_INF;
    else if (x[15])            y = 16'h7E00;
    else if (x[14:10] == 5'd31) y = FP16_POS_INF;
    else                       y = fixq16_to_fp16(32'((lnx + 48'sd32768) >>> 16));
  end

endmodule
