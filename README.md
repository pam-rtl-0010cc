# PAM attention datapath in SystemVerilog

This is a processing-across-memory datapath for the decode-phase attention of
LLM serving. KV tokens sit in three memory tiers: HBM, DDR and SSD. Processing
units (PUs) next to every bank, or inside the SSD controller, compute attention
over the tokens they hold. Reduction units (RUs) then merge the partial results
with online-softmax rescaling, first inside each device and then across
devices. No tier ever sends its KV data anywhere; only the small partial
results (O, m, l) move. A separate hardware path, the PAM interface, migrates
KV tokens between devices that lay out data differently (DDR to HBM). It does
this without the host re-formatting anything.

The design follows the PAM architecture ("Processing Across Memory Hierarchy
for Efficient KV-centric LLM Serving System"): PAMattention (Algorithm 1), the
PU/RU microarchitecture (Sec. 5.2, Fig. 6) and the PAM interface (Sec. 6.2,
Fig. 8).

## What one attention call does

For one query vector `q` (head dimension D = 128) and all KV tokens stored in
the instantiated slice:

1. Every PU gets `n_tok` tokens from its bank. It streams all the keys, then
   all the values, computing:
   - `S = q.K^T`
   - `m = max S`
   - `P = exp(S - m)`
   - `l = sum P`
   - `O = P V`, left unnormalised.
2. The RU of each bank group merges its PUs' results:
   - `m_t = max m_j`
   - `c_j = exp(m_j - m_t)`
   - `l = sum c_j l_j`
   - `O = sum c_j O_j`

   It starts as soon as all PUs of its group are done, while other groups are
   still computing.
3. In the DDR tier, a device RU (the central-buffer RU) merges the bank-group
   results.
4. The global RU merges 13 sources:
   - the 4 HBM bank groups,
   - the DDR device,
   - the 8 SSD groups.

   It then normalises the result: `O = O * exp(-ln l)`. The outputs are `O`,
   `m`, `l` and `lse = m + ln l`.

## Hierarchy

| module | role |
|---|---|
| `pam_top` | Three tiers, the global RU and one DDR-to-HBM PAM interface. |
| `pim_tier` | One device slice: groups of PUs, one RU per group, an optional device RU, and the start/done sequencing. |
| `pam_pu` | Local attention PU: vector unit, row-max unit, exp unit, and a Q/O local buffer of 2·D FP16 (512 B). |
| `vector_unit` | LANES FP16 multipliers. Their products go to an adder tree (QK^T) or to lane accumulators (PV). |
| `rowmax_unit` | Running-max comparator. |
| `pam_ru` | Reduction unit: comparator, 4 exp units, a 16-wide vector-scalar multiplier, a log unit, and a 512 B scratch buffer. |
| `fp16_exp`, `fp16_log` | Table-plus-interpolation FP16 e^x and ln x. |
| `pam_interface` | `cmd_reorder` → `relayout_buffer` → `addr_gen`. |
| `cmd_reorder` | Issues a token's segment reads to its 4 source banks. It reorders across bank groups to respect tCCD_S = 4 and tCCD_L = 8 (DDR4-3200). |
| `relayout_buffer` | Dual-port buffer of 8 token slots. Regions of 2 tokens become ready when complete. |
| `addr_gen` | Writes each token to 2 destination banks at the same row/column, two segments per bank. |
| `pam_pkg` | FP16 add/mul/compare (round to nearest even, subnormals flushed) and shared types. |

Default sizes of the slice:

| tier | slice | PUs | PU width | RUs |
|---|---|---|---|---|
| HBM | one rank: 4 bank groups × 4 banks | 16 | 16 lanes | 4 |
| DDR | one chip: 2 bank groups × 4 banks | 8 | 4 lanes | 2 + 1 device RU |
| SSD | one controller | 64 | 16 lanes | 8 |

Each PU takes blocks of up to 32 tokens, so one call covers up to
88 × 32 = 2816 tokens.

## Interfaces and timing

- **Clock and reset.** Everything runs on one clock `clk` with an asynchronous
  active-low reset `rst_n`.
- **Attention.**
  - Pulse `start` with `q[]` and every PU's `*_n_tok[p]`.
  - Each PU then takes one burst per cycle on its `*_kv_valid/_kv_data/_kv_ready`
    stream: LANES FP16 words, all keys of its block followed by all values.
  - Bubbles in a stream stall that PU only.
  - With an unstalled stream, a PU finishes 2·n·D/LANES cycles after the edge
    that samples `start`. The top testbench checks this number for every PU.
  - An RU over N inputs takes about N + ⌈N/4⌉ + N·D/16 + 1 cycles, plus D/16
    more for the final normalisation.
  - `done` stays high until the next `start`. O is read 16 words at a time
    through `o_rd_chunk` → `o_rd_data`.
- **Migration.**
  - A request (`mig_valid/ready`) carries:
    - the source bank group, row and column of a DDR token;
    - the destination HBM bank group and token index.
  - The interface issues `src_rd_*` reads tagged {slot, segment}.
  - Data may return on `src_rdata_*` in any order.
  - It writes complete tokens with `dst_wr_*`, one token per cycle:
    - row = token / 16, column = token mod 16;
    - bank b receives segments 2b and 2b+1.
  - `mig_flush` drains a half-filled region.

## Why migration needs re-layout

A 128-element FP16 token (2048 bits) is cut into four 512-bit segments, H0
to H3. The two DRAM tiers store these segments differently, so that each
bank's PU can read a whole token's share in one burst pattern:

| tier | where the segments go |
|---|---|
| DDR (source) | One segment per bank in four banks of a bank group, all at the same row and column. |
| HBM (destination) | Two adjacent segments per bank in two banks of a bank group. Bank 0 holds {H1,H0} and bank 1 holds {H3,H2}, again at one row and column. |

Moving a token means four reads from four source banks. These reads are
spaced by the DDR column-to-column delays: 8 cycles within a bank group, 4
cycles across bank groups. The command reorder unit therefore interleaves
tokens from different bank groups. Reads come back in any order, so the
re-layout buffer collects them per token. When a region of two tokens is
complete, the address generator writes each token with one command, driving
both destination banks at once.

## Where the design departs from, or adds to, the paper

- **Insides the paper does not give.** These are the simplest circuits that
  do the job:
  - exp and log tables,
  - PU sequencing (a key pass, then a value pass),
  - serial max and sum in the RU,
  - the reorder policy: oldest command to another bank group once tCCD_S has
    passed, otherwise the oldest command once tCCD_L has passed.
- **DDR PU buffer.** The PU buffer holds Q and O, which is 512 B in every
  tier. The paper gives the DDR PU a 128 B buffer.
- **Meaning of ℓ.** Algorithm 1 is inconsistent here: lines 19–20 use ℓ as a
  plain sum, while line 21 returns ℓ = m_t + log Σℓ. This design keeps `l` as
  the sum and outputs `lse` separately.
- **Overlap of reduction and PU work.** The paper says the reduction is
  "fully overlapped" with PU work. Here the overlap is per bank group: an RU
  starts when its own PUs finish.
- **Slice, not the whole system.** Only a slice of Table 1's system is built:
  one HBM rank, one DDR chip, one SSD controller and one migration path. The
  full system would need 40960 HBM PUs and 5120 DDR PUs. Also not built are
  the 128 logic-die RUs and the four DDR central-buffer RUs; a single global
  RU and a single device RU stand in for them.
- **Host-side parts.** The host-side KV mapping, the online KV scheduling
  (importance factor, λ = 0.6) and the KV block table are software in the
  paper and are not built. Neither are the DRAM/flash arrays, the host and
  the interconnect. Their signals are the top's ports.
- **Synthesis.** At full size the top holds roughly 4000 FP16 arithmetic
  units. A generic synthesis run of it needs more than 15 GB of memory. A
  run of a single 16-lane vector unit takes over ten minutes. The whole
  design elaborates and lints cleanly. The exp, log and row-max units and
  the migration blocks (reorder, re-layout buffer, address generator,
  interface) synthesise quickly, with no latches.

## Workloads

One attention call fits every evaluated workload once the paper's 8× KV
compression is applied:

| workload | context (tokens) | active tokens after 8× | capacity of one call |
|---|---|---|---|
| ShareGPT | 534 | 67 | 2816 |
| WildChat | 738 | 93 | 2816 |
| Arxiv_sum / Write_doc | up to 8000 | up to 1000 | 2816 |

The head dimension of Qwen2.5-32B, LLaMA3-70B and OPT-175B (128) equals D.
Batches run as repeated calls. The KV capacity itself, for example 2304 GB for
256 OPT-175B requests, lives in the memory arrays outside this RTL.

## Testbenches

Each testbench in `tb/` is self-checking and ends with a `TB_RESULT` line:

| testbench | what it checks |
|---|---|
| `tb_fp16_exp`, `tb_fp16_log` | Sweeps against real arithmetic. |
| `tb_rowmax_unit`, `tb_vector_unit` | Random operands. |
| `tb_pam_pu` | Random blocks against a double-precision attention, including cycle counts, stalls and empty blocks. |
| `tb_pam_ru` | Rescaling and normalisation over 5 sources, including cycle counts. |
| `tb_pim_tier` | The DDR tier. |
| `tb_cmd_reorder` | tCCD spacing and reorder events. |
| `tb_relayout_buffer`, `tb_addr_gen`, `tb_pam_interface` | Out-of-order return, flush and layout. |
| `tb_pam_top` | The default-size top. |

`tb_pam_top` runs three attention calls:
- random sizes with bubbles,
- all PUs full with no bubbles, including the cycle-count check,
- random sizes again.

Alongside them, 45 tokens migrate. The testbench counts stalls, empty blocks,
group/device/global RU runs, RU–PU overlap, reorders, partial-region flushes
and migrated tokens, and fails if any count is zero.

Example build from `tb/`, with `pam_pkg.sv` first:

```
verilator --binary --timing ../rtl/pam_pkg.sv tb_fp16_pkg.sv \
  $(ls ../rtl/*.sv | grep -v pam_pkg) tb_pam_top.sv --top-module tb_pam_top
```
