// vector_unit: the Vector Unit of a local attention PU.
//
// LANES parallel FP16 multipliers whose second operand is selected by a mux
// (Figure 6 of the PU: Q or P). In dot mode (mode_pv = 0) the multipliers
// form kv[i] * q[i] and a binary FP16 adder tree sums the LANES products into
// `dot`, one slice of a Q x K^T score. In P x V mode (mode_pv = 1) every lane
// multiplies kv[i] by the broadcast scalar p and the lane adders form
// acc_out[i] = acc_in[i] + p * kv[i], one slice of the O accumulation.
// acc_out is also driven in dot mode (acc_in + q*kv), and dot in P x V mode;
// the caller uses the one that matches the mode.
//
// The unit is combinational; the PU registers its results, so the unit
// accepts one LANES-wide burst per cycle. LANES must be a power of two.
// The lane counts are the paper's (16 for the HBM and SSD PUs, 4 for the DDR
// PU); the one-cycle, unpipelined datapath is this design's choice.
module vector_unit
  import pam_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic  mode_pv,
  input  fp16_t kv     [LANES],
  input  fp16_t q      [LANES],
  input  fp16_t p,
  input  fp16_t acc_in [LANES],
  output fp16_t dot,
  output fp16_t acc_out[LANES]
);

  fp16_t prod [LANES];
  fp16_t tree [2*LANES-1];

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      prod[i]    = fp16_mul(kv[i], mode_pv ? p : q[i]);
      acc_out[i] = fp16_add(acc_in[i], prod[i]);
    end
  end

  // Adder tree: leaves tree[LANES-1 +: LANES], node k sums 2k+1 and 2k+2.
  always_comb begin
    for (int i = 0; i < LANES; i++) tree[LANES-1+i] = prod[i];
    for (int k = LANES - 2; k >= 0; k--) tree[k] = fp16_add(tree[2*k+1], tree[2*k+2]);
    dot = tree[0];
  end

endmodule
