// pam_ru: Reduction Unit (RU) of PAMattention.
//
// Merges N_IN partial attention results (O_j, m_j, l_j), each produced by a
// PU or by a lower-level RU over a disjoint set of KV tokens, into one:
//     m_t = max_j m_j                       (comparator)
//     c_j = exp(m_j - m_t)                  (N_EXP FP16 exponential units)
//     l   = sum_j c_j * l_j
//     O   = sum_j c_j * O_j                 (LANES-wide vector-scalar multiplier
//                                            and accumulators, scratch buffer)
//     lse = m_t + ln(l)                     (logarithmic unit)
// With final_norm set the RU also normalises the result in place,
// O <- O * exp(-ln l) = O / l, which is the attention output of Algorithm 1.
// Without it the RU hands (O, m_t, l) upward unnormalised, so RUs compose
// into a reduction tree (bank group -> device -> inter-device).
//
// Operation: a `start` pulse (inputs m/l stable, sources ready) samples
// final_norm. The RU then (1) scans in_m, one per cycle, N_IN cycles;
// (2) computes the scale factors N_EXP at a time, ceil(N_IN/N_EXP) cycles;
// (3) fetches every source's O vector LANES words per cycle through
// rd_src/rd_chunk -> rd_data (combinational read of the source buffers) and
// accumulates it, N_IN*D/LANES cycles; (4) evaluates ln(l), 1 cycle; (5) if
// final_norm, scales O by 1/l, D/LANES cycles. `done` is high after that many
// clock edges, counted from the edge that samples start, and holds until the
// next start; m_out, l_out,
// lse_out and the scratch buffer (o_rd_chunk/o_rd_data) are then valid.
// A source with m_j = -inf (an empty block) contributes nothing.
//
// From the paper: the functions and the unit mix (16-FP16 vector-scalar
// multiplier, comparator, 4 FP16 exponential units, a logarithmic unit,
// scratch buffer, controller). This design's choices: the phase-by-phase
// sequencing, the serial scan of m and serial sum of l (the paper draws an
// adder tree), the pull-style read port, and the normalisation through
// exp(-ln l). The paper's pseudo-code returns m_t + log(sum l) as l while
// lines 19-20 treat l as a plain sum; this RU passes the plain sum upward
// and reports m_t + ln(l) separately as lse_out.
module pam_ru
  import pam_pkg::*;
#(
  parameter int unsigned N_IN  = 4,
  parameter int unsigned D     = HEAD_DIM,
  parameter int unsigned LANES = BURST_FP16,
  parameter int unsigned N_EXP = 4,
  localparam int unsigned SW   = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned NCH  = D / LANES,
  localparam int unsigned CW   = (NCH > 1) ? $clog2(NCH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          final_norm,
  input  fp16_t         in_m      [N_IN],
  input  fp16_t         in_l      [N_IN],
  output logic [SW-1:0] rd_src,
  output logic [CW-1:0] rd_chunk,
  input  fp16_t         rd_data   [LANES],
  output logic          busy,
  output logic          done,
  output fp16_t         m_out,
  output fp16_t         l_out,
  output fp16_t         lse_out,
  input  logic [CW-1:0] o_rd_chunk,
  output fp16_t         o_rd_data [LANES]
);

  localparam int unsigned NG = (N_IN + N_EXP - 1) / N_EXP;
  localparam int unsigned GW = (NG > 1) ? $clog2(NG) : 1;

  typedef enum logic [2:0] {R_IDLE, R_MAX, R_SCALE, R_ACC, R_LOG, R_NORM, R_DONE} state_t;
  state_t state;

  fp16_t          sbuf  [D];      // scratch buffer: O accumulator
  fp16_t          scale [N_IN];   // c_j
  fp16_t          m_t, l_acc, ln_l, lse;
  logic           fin;
  logic [SW-1:0]  j;
  logic [CW-1:0]  c;
  logic [GW-1:0]  g;

  fp16_t          exp_in  [N_EXP];
  fp16_t          exp_out [N_EXP];
  fp16_t          vs_scalar;
  fp16_t          vs_vec  [LANES];
  fp16_t          vs_prod [LANES];
  fp16_t          log_out;
  logic           last_j, last_c, last_g;

  for (genvar k = 0; k < N_EXP; k++) begin : g_exp
    fp16_exp u_exp (.x(exp_in[k]), .y(exp_out[k]));
  end

  fp16_log u_log (.x(l_acc), .y(log_out));

  // exponential-unit operands: m_j - m_t while scaling, -ln(l) while normalising
  always_comb begin
    for (int k = 0; k < N_EXP; k++) begin
      if (state == R_NORM) exp_in[k] = fp16_neg(ln_l);
      else if (int'(g) * N_EXP + k < N_IN) exp_in[k] = fp16_sub(in_m[int'(g) * N_EXP + k], m_t);
      else exp_in[k] = FP16_NEG_INF;
    end
  end

  // 16-lane vector-scalar multiplier
  always_comb begin
    vs_scalar = (state == R_NORM) ? exp_out[0] : scale[j];
    for (int i = 0; i < LANES; i++) begin
      vs_vec[i]  = (state == R_NORM) ? sbuf[int'(c) * LANES + i] : rd_data[i];
      vs_prod[i] = fp16_mul(vs_scalar, vs_vec[i]);
    end
  end

  always_comb begin
    last_j    = (int'(j) == N_IN - 1);
    last_c    = (int'(c) == NCH - 1);
    last_g    = (int'(g) == NG - 1);
    rd_src    = j;
    rd_chunk  = c;
    busy      = (state != R_IDLE) && (state != R_DONE);
    done      = (state == R_DONE);
    m_out     = m_t;
    l_out     = l_acc;
    lse_out   = lse;
    for (int i = 0; i < LANES; i++) o_rd_data[i] = sbuf[int'(o_rd_chunk) * LANES + i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= R_IDLE;
      j     <= '0;
      c     <= '0;
      g     <= '0;
      fin   <= 1'b0;
      m_t   <= FP16_NEG_INF;
      l_acc <= FP16_ZERO;
      ln_l  <= FP16_ZERO;
      lse   <= FP16_NEG_INF;
    end else if (start) begin
      state <= R_MAX;
      fin   <= final_norm;
      j     <= '0;
      c     <= '0;
      g     <= '0;
      m_t   <= FP16_NEG_INF;
      l_acc <= FP16_ZERO;
    end else begin
      unique case (state)
        R_MAX: begin
          m_t <= fp16_max(m_t, in_m[j]);
          j   <= last_j ? '0 : j + SW'(1);
          if (last_j) state <= R_SCALE;
        end
        R_SCALE: begin
          g <= last_g ? '0 : g + GW'(1);
          if (last_g) state <= R_ACC;
        end
        R_ACC: begin
          if (c == '0) l_acc <= fp16_add(l_acc, fp16_mul(scale[j], in_l[j]));
          c <= last_c ? '0 : c + CW'(1);
          if (last_c) begin
            j <= last_j ? '0 : j + SW'(1);
            if (last_j) state <= R_LOG;
          end
        end
        R_LOG: begin
          ln_l  <= log_out;
          lse   <= fp16_add(m_t, log_out);
          state <= (fin && !fp16_is_zero(l_acc)) ? R_NORM : R_DONE;
        end
        R_NORM: begin
          c <= last_c ? '0 : c + CW'(1);
          if (last_c) state <= R_DONE;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == R_SCALE) begin
      for (int k = 0; k < N_EXP; k++)
        if (int'(g) * N_EXP + k < N_IN)
          scale[int'(g) * N_EXP + k] <= (in_m[int'(g) * N_EXP + k] == FP16_NEG_INF) ? FP16_ZERO : exp_out[k];
    end
    if (state == R_ACC) begin
      for (int i = 0; i < LANES; i++)
        sbuf[int'(c) * LANES + i] <= fp16_add((j == '0) ? FP16_ZERO : sbuf[int'(c) * LANES + i], vs_prod[i]);
    end else if (state == R_NORM) begin
      for (int i = 0; i < LANES; i++) sbuf[int'(c) * LANES + i] <= vs_prod[i];
    end
  end

endmodule
