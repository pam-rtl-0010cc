// pam_pkg: types, constants and FP16 arithmetic shared by the PAM processing
// units (PU), reduction units (RU) and the inter-device interface.
//
// All attention arithmetic is IEEE binary16 (FP16), as the PUs and RUs of the
// design are built from FP16 multipliers, adders, comparators and exponential
// units. The functions below are combinational and synthesizable:
//   fp16_mul / fp16_add : round-to-nearest-even; subnormal inputs and results
//                         are flushed to zero, overflow saturates to infinity,
//                         NaN inputs are not propagated (treated as infinity).
//   fp16_gt             : ordered compare, used by the max/comparator units.
//   fixq16_to_fp16      : signed fixed point with 16 fraction bits -> FP16,
//                         used at the output of the exponential/log units.
// Subnormal flushing and the fixed-point internals of exp/log are this
// design's choices; the paper only states that the datapath is FP16.
package pam_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO    = 16'h0000;
  localparam fp16_t FP16_ONE     = 16'h3C00;
  localparam fp16_t FP16_POS_INF = 16'h7C00;
  localparam fp16_t FP16_NEG_INF = 16'hFC00;

  // Head dimension of the evaluated models (Qwen2.5-32B, LLaMA3-70B, OPT-175B
  // all use 128-element heads) and the 16-element (256-bit) burst width.
  localparam int unsigned HEAD_DIM   = 128;
  localparam int unsigned BURST_FP16 = 16;

  // Address fields of the PAM interface (inter-device KV migration). The
  // widths are this design's choice; they cover one DDR4/HBM3 bank group.
  localparam int unsigned BG_W   = 3;
  localparam int unsigned ROW_W  = 16;
  localparam int unsigned COL_W  = 10;
  localparam int unsigned DTOK_W = 20;

  typedef logic [BG_W-1:0]   bg_t;
  typedef logic [ROW_W-1:0]  row_t;
  typedef logic [COL_W-1:0]  col_t;
  typedef logic [DTOK_W-1:0] dtok_t;

  function automatic logic fp16_is_zero(input fp16_t a);
    return a[14:10] == 5'd0;
  endfunction

  function automatic logic fp16_is_inf(input fp16_t a);
    return a[14:10] == 5'd31;
  endfunction

  function automatic fp16_t fp16_neg(input fp16_t a);
    return {~a[15], a[14:0]};
  endfunction

  // a > b on the real line (-0 and +0 compare equal).
  function automatic logic fp16_gt(input fp16_t a, input fp16_t b);
    logic [15:0] ka, kb;
    fp16_t za, zb;
    za = fp16_is_zero(a) ? FP16_ZERO : a;
    zb = fp16_is_zero(b) ? FP16_ZERO : b;
    ka = za[15] ? ~za : (za | 16'h8000);
    kb = zb[15] ? ~zb : (zb | 16'h8000);
    return ka > kb;
  endfunction

  function automatic fp16_t fp16_max(input fp16_t a, input fp16_t b);
    return fp16_gt(b, a) ? b : a;
  endfunction

  function automatic fp16_t fp16_mul(input fp16_t a, input fp16_t b);
    logic        s;
    logic [10:0] ma, mb;
    logic [21:0] p;
    logic [10:0] mant;
    logic        rnd, stk;
    int          e;
    s = a[15] ^ b[15];
    if (fp16_is_inf(a) || fp16_is_inf(b)) return {s, 15'h7C00};
    if (fp16_is_zero(a) || fp16_is_zero(b)) return {s, 15'h0000};
    ma = {1'b1, a[9:0]};
    mb = {1'b1, b[9:0]};
    p  = ma * mb;
    e  = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) begin
      mant = {1'b0, p[20:11]};
      rnd  = p[10];
      stk  = |p[9:0];
      e    = e + 1;
    end else begin
      mant = {1'b0, p[19:10]};
      rnd  = p[9];
      stk  = |p[8:0];
    end
    if (rnd && (stk || mant[0])) mant = mant + 11'd1;
    if (mant[10]) begin
      mant = 11'd0;
      e    = e + 1;
    end
    if (e >= 31) return {s, 15'h7C00};
    if (e <= 0) return {s, 15'h0000};
    return {s, 5'(e), mant[9:0]};
  endfunction

  function automatic fp16_t fp16_add(input fp16_t a, input fp16_t b);
    fp16_t       x, y;
    logic [14:0] mx, my, r;
    int          ex, ey, d, e;
    logic        stk;
    logic [10:0] mant;
    if (fp16_is_inf(a)) return a;
    if (fp16_is_inf(b)) return b;
    if (fp16_is_zero(a)) return fp16_is_zero(b) ? FP16_ZERO : b;
    if (fp16_is_zero(b)) return a;
    if (a[14:0] >= b[14:0]) begin
      x = a; y = b;
    end else begin
      x = b; y = a;
    end
    ex = int'(x[14:10]);
    ey = int'(y[14:10]);
    // 1 carry bit, hidden bit, 10 fraction bits, guard, round, sticky
    mx = {2'b01, x[9:0], 3'b000};
    my = {2'b01, y[9:0], 3'b000};
    d  = ex - ey;
    if (d > 13) begin
      my = 15'd1;
    end else if (d > 0) begin
      stk = 1'b0;
      for (int i = 0; i < 14; i++) if (i < d) stk = stk | my[i];
      my = (my >> d) | {14'd0, stk};
    end
    e = ex;
    if (x[15] == y[15]) begin
      r = mx + my;
      if (r[14]) begin
        r = (r >> 1) | {14'd0, r[0]};
        e = e + 1;
      end
    end else begin
      r = mx - my;
      if (r == 15'd0) return FP16_ZERO;
      for (int i = 0; i < 13; i++) begin
        if (!r[13]) begin
          r = r << 1;
          e = e - 1;
        end
      end
    end
    mant = {1'b0, r[12:3]};
    if (r[2] && ((|r[1:0]) || r[3])) mant = mant + 11'd1;
    if (mant[10]) begin
      mant = 11'd0;
      e    = e + 1;
    end
    if (e >= 31) return {x[15], 15'h7C00};
    if (e <= 0) return {x[15], 15'h0000};
    return {x[15], 5'(e), mant[9:0]};
  endfunction

  function automatic fp16_t fp16_sub(input fp16_t a, input fp16_t b);
    return fp16_add(a, fp16_neg(b));
  endfunction

  // Signed fixed point with 16 fraction bits to FP16, round to nearest even.
  function automatic fp16_t fixq16_to_fp16(input logic signed [31:0] v);
    logic        s;
    logic [31:0] mag;
    int          p, e;
    logic [11:0] mant;
    logic [31:0] rest;
    logic        rnd, stk;
    s   = v[31];
    mag = s ? 32'(-v) : 32'(v);
    if (mag == 32'd0) return FP16_ZERO;
    p = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) p = i;
    e = p - 16 + 15;
    if (p >= 10) begin
      mant = 12'((mag >> (p - 10)) & 32'h7FF);
      rest = mag & ((32'd1 << (p - 10)) - 32'd1);
      rnd  = (p > 10) ? rest[p-11] : 1'b0;
      stk  = (p > 11) ? ((rest & ((32'd1 << (p - 11)) - 32'd1)) != 32'd0) : 1'b0;
    end else begin
      mant = 12'(mag << (10 - p));
      rnd  = 1'b0;
      stk  = 1'b0;
    end
    if (rnd && (stk || mant[0])) mant = mant + 12'd1;
    if (mant[11]) begin
      mant = mant >> 1;
      e    = e + 1;
    end
    if (e >= 31) return {s, 15'h7C00};
    if (e <= 0) return {s, 15'h0000};
    return {s, 5'(e), mant[9:0]};
  endfunction

endpackage
