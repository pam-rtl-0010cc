// pam_pu: local attention Processing Unit (PU) of one memory bank.
//
// Executes Local_Attention of the PAMattention algorithm for one block of
// KV tokens read from the PU's own bank:
//     S_j = Q . K_j        (Q x K^T, one score per token)
//     m   = max_j S_j      (Row-wise Max Unit)
//     P_j = exp(S_j - m)   (FP16 exponential unit)
//     l   = sum_j P_j
//     O   = sum_j P_j V_j  (unnormalised; normalised later by the RUs)
// The PU has a Vector Unit of LANES FP16 multipliers with an adder tree and
// lane accumulators, a rowmax_unit, an fp16_exp, and a local buffer that holds
// the query Q and the output accumulator O (2*D FP16 words: 512 bytes for
// D = 128), plus a score buffer of MAX_TOK FP16 words.
//
// Operation: a `start` pulse latches q[] into the local buffer, clears O and
// l and takes the block size n_tok. The bank then streams, one LANES-wide
// burst per cycle on kv_valid/kv_data (kv_ready is high while the PU takes
// data): first the keys K_0..K_{n-1}, D/LANES bursts each, element 0 first;
// then the values V_0..V_{n-1} in the same order. The key pass computes and
// stores the scores and the running max; the value pass computes P_j and
// accumulates O and l. With kv_valid held high, `done` is high after
// 2*n_tok*D/LANES clock edges counted from the edge that samples start, and
// stays high until the next start; m_out,
// l_out and the O buffer (read RD_LANES words at a time through
// o_rd_chunk/o_rd_data, combinational) are then valid. n_tok = 0 gives
// m = -inf, l = 0, O = 0 at once.
//
// From the paper: the computation (Algorithm 1, lines 9-12), the lane counts
// (16 for HBM and SSD, 4 for DDR), the 512-byte buffer of the HBM/SSD PU,
// the Q/P operand mux, the MAX and EXP units and the in-place use of Q from
// the local buffer. This design's choices: the key-then-value streaming
// order, the separate score buffer, the one-burst-per-cycle unpipelined
// datapath, the handshake and the read port used by the RU.
module pam_pu
  import pam_pkg::*;
#(
  parameter int unsigned LANES    = 16,
  parameter int unsigned D        = HEAD_DIM,
  parameter int unsigned MAX_TOK  = 32,
  parameter int unsigned RD_LANES = BURST_FP16,
  localparam int unsigned TW      = $clog2(MAX_TOK + 1),
  localparam int unsigned NCH     = D / RD_LANES,
  localparam int unsigned CW      = (NCH > 1) ? $clog2(NCH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [TW-1:0] n_tok,
  input  fp16_t         q          [D],
  input  logic          kv_valid,
  input  fp16_t         kv_data    [LANES],
  output logic          kv_ready,
  output logic          busy,
  output logic          done,
  output fp16_t         m_out,
  output fp16_t         l_out,
  input  logic [CW-1:0] o_rd_chunk,
  output fp16_t         o_rd_data  [RD_LANES]
);

  localparam int unsigned NBEAT = D / LANES;
  localparam int unsigned BW    = (NBEAT > 1) ? $clog2(NBEAT) : 1;

  typedef enum logic [1:0] {S_IDLE, S_KEY, S_VAL, S_DONE} state_t;
  state_t state;

  fp16_t          qbuf [D];
  fp16_t          obuf [D];
  fp16_t          sbuf [MAX_TOK];
  fp16_t          sacc;
  fp16_t          lsum;
  logic [BW-1:0]  beat;
  logic [TW-1:0]  tok, ntok;

  fp16_t          q_sl   [LANES];
  fp16_t          acc_sl [LANES];
  fp16_t          acc_nx [LANES];
  fp16_t          dot, s_new, p, s_minus_m, m_cur;
  logic           last_beat, last_tok, take;

  vector_unit #(.LANES(LANES)) u_vec (
    .mode_pv (state == S_VAL),
    .kv      (kv_data),
    .q       (q_sl),
    .p       (p),
    .acc_in  (acc_sl),
    .dot     (dot),
    .acc_out (acc_nx)
  );

  rowmax_unit u_max (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (start),
    .in_valid (state == S_KEY && take && last_beat),
    .in       (s_new),
    .max_out  (m_cur)
  );

  fp16_exp u_exp (.x(s_minus_m), .y(p));

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      q_sl[i]   = qbuf[int'(beat) * LANES + i];
      acc_sl[i] = obuf[int'(beat) * LANES + i];
    end
    for (int i = 0; i < RD_LANES; i++) o_rd_data[i] = obuf[int'(o_rd_chunk) * RD_LANES + i];
  end

  assign s_minus_m = fp16_sub(sbuf[int'(tok) % MAX_TOK], m_cur);

  always_comb begin
    s_new     = fp16_add((beat == '0) ? FP16_ZERO : sacc, dot);
    last_beat = (int'(beat) == NBEAT - 1);
    last_tok  = (tok == ntok - TW'(1));
    kv_ready  = (state == S_KEY) || (state == S_VAL);
    take      = kv_ready && kv_valid;
    busy      = kv_ready;
    done      = (state == S_DONE);
    m_out     = m_cur;
    l_out     = lsum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      beat  <= '0;
      tok   <= '0;
      ntok  <= '0;
      sacc  <= FP16_ZERO;
      lsum  <= FP16_ZERO;
    end else if (start) begin
      beat  <= '0;
      tok   <= '0;
      ntok  <= n_tok;
      lsum  <= FP16_ZERO;
      state <= (n_tok == '0) ? S_DONE : S_KEY;
    end else if (take) begin
      beat <= last_beat ? '0 : beat + BW'(1);
      if (state == S_KEY) begin
        sacc <= s_new;
        if (last_beat) begin
          tok <= last_tok ? '0 : tok + TW'(1);
          if (last_tok) state <= S_VAL;
        end
      end else begin
        if (beat == '0) lsum <= fp16_add(lsum, p);
        if (last_beat) begin
          tok <= tok + TW'(1);
          if (last_tok) state <= S_DONE;
        end
      end
    end
  end

  // Local buffer (Q and O) and score buffer.
  always_ff @(posedge clk) begin
    if (start) begin
      for (int i = 0; i < D; i++) begin
        qbuf[i] <= q[i];
        obuf[i] <= FP16_ZERO;
      end
    end else if (take && state == S_KEY && last_beat) begin
      sbuf[int'(tok) % MAX_TOK] <= s_new;
    end else if (take && state == S_VAL) begin
      for (int i = 0; i < LANES; i++) obuf[int'(beat) * LANES + i] <= acc_nx[i];
    end
  end

endmodule
