// fp16_exp: combinational FP16 exponential unit, y = e^x.
//
// Each PU holds one of these for the online-softmax P = exp(S - m) and each
// RU holds four for the rescaling factors exp(m_j - m_t); the paper names the
// unit as a "lightweight FP16 exponential unit" without giving its insides.
// This implementation is the design's own: x is converted to signed fixed
// point (12 fraction bits), multiplied by log2(e) to give n + f with integer
// n and fraction f in [0,1), and 2^f is read from a 33-entry table of
// 2^(i/32) (Q16, entry i = round(65536 * 2^(i/32))) with linear
// interpolation between neighbours. The result exponent is n + 15. Relative
// error is below 2^-11 before the final FP16 rounding. Results below the
// smallest normal FP16 value flush to zero, above the largest saturate to
// +infinity; e^(-inf) = 0, e^(+inf) = +inf.
//
// Interface: x in, y out, no clock; one result per cycle when used in a
// registered datapath.
module fp16_exp
  import pam_pkg::*;
(
  input  fp16_t x,
  output fp16_t y
);

  localparam logic [17:0] EXP2_TAB [33] = '{
    18'd65536,  18'd66971,  18'd68438,  18'd69936,  18'd71468,  18'd73032,
    18'd74632,  18'd76266,  18'd77936,  18'd79642,  18'd81386,  18'd83169,
    18'd84990,  18'd86851,  18'd88752,  18'd90696,  18'd92682,  18'd94711,
    18'd96785,  18'd98905,  18'd101070, 18'd103283, 18'd105545, 18'd107856,
    18'd110218, 18'd112631, 18'd115098, 18'd117618, 18'd120194, 18'd122825,
    18'd125515, 18'd128263, 18'd131072
  };
  // log2(e) in Q1.15
  localparam logic [15:0] LOG2E_Q15 = 16'd47274;

  logic signed [17:0] xf;      // x, 12 fraction bits
  logic signed [35:0] yq;      // x * log2(e), 27 fraction bits
  logic signed [19:0] n;       // integer part of x*log2(e)
  logic        [15:0] f;       // fraction, 16 bits
  logic        [17:0] t0, t1, pw;
  logic        [28:0] interp;
  logic        [11:0] frac;
  logic signed [20:0] e_out;
  logic        [10:0] mx;
  int                 ex;

  always_comb begin
    mx     = {1'b1, x[9:0]};
    ex     = int'(x[14:10]);
    xf     = '0;
    yq     = '0;
    n      = '0;
    f      = '0;
    t0     = '0;
    t1     = '0;
    interp = '0;
    pw     = '0;
    frac   = '0;
    e_out  = '0;
    y      = FP16_ONE;
    if (ex == 31) begin
      y = x[15] ? FP16_ZERO : FP16_POS_INF;
    end else if (ex == 0) begin
      y = FP16_ONE;
    end else if (ex >= 19) begin
      // |x| >= 16: far outside the FP16 range of e^x
      y = x[15] ? FP16_ZERO : FP16_POS_INF;
    end else begin
      // value = mx * 2^(ex-25); with 12 fraction bits: mx * 2^(ex-13)
      if (ex >= 13) xf = 18'(mx) <<< (ex - 13);
      else          xf = 18'(mx) >>> (13 - ex);
      if (x[15]) xf = -xf;
      yq = 36'(xf) * $signed({1'b0, LOG2E_Q15});
      n  = 20'(yq >>> 27);
      f  = yq[26:11];
      t0 = EXP2_TAB[6'(f[15:11])];
      t1 = EXP2_TAB[6'(f[15:11]) + 6'd1];
      interp = 29'(t1 - t0) * 29'(f[10:0]);
      pw = t0 + 18'(interp >> 11);
      // pw in [65536, 131072]: fraction of the mantissa = (pw - 65536) / 64
      frac  = 12'((pw - 18'd65536 + 18'd32) >> 6);
      e_out = 21'(n) + 21'sd15;
      if (frac >= 12'd1024) begin
        frac  = 12'd0;
        e_out = e_out + 21'sd1;
      end
      if (e_out >= 21'sd31)     y = FP16_POS_INF;
      else if (e_out <= 21'sd0) y = FP16_ZERO;
      else                      y = {1'b0, e_out[4:0], frac[9:0]};
    end
  end

endmodule
