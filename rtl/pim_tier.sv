// pim_tier: one PIM device slice (HBM-PIM, DDR-PIM or SSD-PIM) with its
// local attention PUs and reduction units.
//
// N_GRP groups of PPG PUs (a DRAM bank group of PPG banks, or a set of SSD
// channels), one RU per group for the intra-device reduction, and, when
// DEV_RU = 1, one more RU that merges the group results (the DDR central
// buffer RU). The controller (the paper's BG Ctrl / Local Ctrl, whose insides
// are not described) works as follows: a `start` pulse starts every PU on its
// own block (q[] and n_tok[p]); each group's RU is started as soon as all PUs
// of that group are done, so groups finish independently; the device RU is
// started when all group RUs are done; `done` then rises and stays high until
// the next start. Every PU streams its own bank's K/V on kv_valid/kv_data/
// kv_ready (see pam_pu). RU reads are routed to the PUs of the group (group
// RU) or to the group RUs (device RU) through pull-style read ports.
//
// The tier's result is N_OUT unnormalised partials (O, m, l): one per group
// (DEV_RU = 0) or one for the device (DEV_RU = 1). Their m and l are on
// out_m/out_l; their O vectors are read 16 FP16 words at a time with
// rd_src/rd_chunk -> rd_data (combinational). This is how the next level,
// the inter-device RU in the HBM logic die, fetches them.
//
// From the paper: PU and RU placement (one RU per bank group; HBM die 64 PUs
// and 16 RUs, DDR chip 8 PUs and 2 RUs plus central-buffer RUs, SSD
// controller 64 PUs and 8 RUs), PU lane counts. This design's choices: the
// start/done sequencing and the read-port routing. The PU/RU pipelining that
// the paper describes (RU overlapped with upstream PUs) is kept only at group
// granularity: a group RU starts when its own PUs finish.
module pim_tier
  import pam_pkg::*;
#(
  parameter int unsigned LANES   = 16,
  parameter int unsigned D       = HEAD_DIM,
  parameter int unsigned N_GRP   = 4,
  parameter int unsigned PPG     = 4,
  parameter bit          DEV_RU  = 1'b0,
  parameter int unsigned MAX_TOK = 32,
  parameter int unsigned N_EXP   = 4,
  localparam int unsigned N_PU   = N_GRP * PPG,
  localparam int unsigned N_OUT  = DEV_RU ? 1 : N_GRP,
  localparam int unsigned TW     = $clog2(MAX_TOK + 1),
  localparam int unsigned NCH    = D / BURST_FP16,
  localparam int unsigned CW     = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int unsigned OW     = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  fp16_t         q        [D],
  input  logic [TW-1:0] n_tok    [N_PU],
  input  logic          kv_valid [N_PU],
  input  fp16_t         kv_data  [N_PU][LANES],
  output logic          kv_ready [N_PU],
  output logic          busy,
  output logic          done,
  output fp16_t         out_m    [N_OUT],
  output fp16_t         out_l    [N_OUT],
  input  logic [OW-1:0] rd_src,
  input  logic [CW-1:0] rd_chunk,
  output fp16_t         rd_data  [BURST_FP16]
);

  localparam int unsigned PW = (PPG > 1) ? $clog2(PPG) : 1;
  localparam int unsigned GW = (N_GRP > 1) ? $clog2(N_GRP) : 1;

  logic          pu_done  [N_PU];
  logic          pu_busy  [N_PU];
  fp16_t         pu_m     [N_PU];
  fp16_t         pu_l     [N_PU];
  fp16_t         pu_o     [N_PU][BURST_FP16];
  logic [CW-1:0] pu_chunk [N_PU];

  logic          ru_start [N_GRP];
  logic          ru_done  [N_GRP];
  logic          ru_busy  [N_GRP];
  fp16_t         ru_m     [N_GRP];
  fp16_t         ru_l     [N_GRP];
  fp16_t         ru_lse   [N_GRP];
  logic [PW-1:0] ru_src   [N_GRP];
  logic [CW-1:0] ru_chunk [N_GRP];
  fp16_t         ru_in    [N_GRP][BURST_FP16];
  fp16_t         ru_o     [N_GRP][BURST_FP16];
  logic [CW-1:0] ru_ochunk;

  logic          running;
  logic [N_GRP-1:0] grp_started;
  logic          dev_started, dev_start, dev_done;
  logic          all_grp_done;

  // ---------------------------------------------------------------- PUs
  for (genvar p = 0; p < N_PU; p++) begin : g_pu
    pam_pu #(.LANES(LANES), .D(D), .MAX_TOK(MAX_TOK)) u_pu (
      .clk        (clk),
      .rst_n      (rst_n),
      .start      (start),
      .n_tok      (n_tok[p]),
      .q          (q),
      .kv_valid   (kv_valid[p]),
      .kv_data    (kv_data[p]),
      .kv_ready   (kv_ready[p]),
      .busy       (pu_busy[p]),
      .done       (pu_done[p]),
      .m_out      (pu_m[p]),
      .l_out      (pu_l[p]),
      .o_rd_chunk (pu_chunk[p]),
      .o_rd_data  (pu_o[p])
    );
    assign pu_chunk[p] = ru_chunk[p / PPG];
  end

  // ---------------------------------------------------- bank-group RUs
  for (genvar g = 0; g < N_GRP; g++) begin : g_ru
    fp16_t gm [PPG];
    fp16_t gl [PPG];
    for (genvar k = 0; k < PPG; k++) begin : g_in
      assign gm[k] = pu_m[g*PPG + k];
      assign gl[k] = pu_l[g*PPG + k];
    end
    assign ru_in[g] = pu_o[g*PPG + int'(ru_src[g])];

    pam_ru #(.N_IN(PPG), .D(D), .LANES(BURST_FP16), .N_EXP(N_EXP)) u_ru (
      .clk        (clk),
      .rst_n      (rst_n),
      .start      (ru_start[g]),
      .final_norm (1'b0),
      .in_m       (gm),
      .in_l       (gl),
      .rd_src     (ru_src[g]),
      .rd_chunk   (ru_chunk[g]),
      .rd_data    (ru_in[g]),
      .busy       (ru_busy[g]),
      .done       (ru_done[g]),
      .m_out      (ru_m[g]),
      .l_out      (ru_l[g]),
      .lse_out    (ru_lse[g]),
      .o_rd_chunk (ru_ochunk),
      .o_rd_data  (ru_o[g])
    );
  end

  // ------------------------------------------------------- controller
  always_comb begin
    all_grp_done = &grp_started;
    for (int g = 0; g < N_GRP; g++) begin
      logic grp_pu_done;
      grp_pu_done = 1'b1;
      for (int k = 0; k < PPG; k++) grp_pu_done &= pu_done[g*PPG + k];
      ru_start[g]  = running && !grp_started[g] && grp_pu_done;
      all_grp_done &= ru_done[g];
    end
    dev_start = DEV_RU && running && !dev_started && all_grp_done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running     <= 1'b0;
      grp_started <= '0;
      dev_started <= 1'b0;
      done        <= 1'b0;
    end else if (start) begin
      running     <= 1'b1;
      grp_started <= '0;
      dev_started <= 1'b0;
      done        <= 1'b0;
    end else if (running) begin
      for (int g = 0; g < N_GRP; g++) if (ru_start[g]) grp_started[g] <= 1'b1;
      if (dev_start) dev_started <= 1'b1;
      if (DEV_RU ? (dev_started && dev_done) : all_grp_done) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  always_comb begin
    busy = running;
  end

  // ------------------------------------------- device RU and tier output
  if (DEV_RU) begin : g_dev
    logic [GW-1:0] dsrc;
    logic [CW-1:0] dchunk;
    fp16_t         din  [BURST_FP16];
    fp16_t         dm   [1];
    fp16_t         dl   [1];
    fp16_t         dlse;
    logic          dbusy;

    assign din       = ru_o[int'(dsrc) % N_GRP];
    assign ru_ochunk = dchunk;

    pam_ru #(.N_IN(N_GRP), .D(D), .LANES(BURST_FP16), .N_EXP(N_EXP)) u_dev_ru (
      .clk        (clk),
      .rst_n      (rst_n),
      .start      (dev_start),
      .final_norm (1'b0),
      .in_m       (ru_m),
      .in_l       (ru_l),
      .rd_src     (dsrc),
      .rd_chunk   (dchunk),
      .rd_data    (din),
      .busy       (dbusy),
      .done       (dev_done),
      .m_out      (dm[0]),
      .l_out      (dl[0]),
      .lse_out    (dlse),
      .o_rd_chunk (rd_chunk),
      .o_rd_data  (rd_data)
    );
    assign out_m = dm;
    assign out_l = dl;
  end else begin : g_nodev
    assign dev_done  = 1'b0;
    assign ru_ochunk = rd_chunk;
    assign rd_data   = ru_o[int'(rd_src) % N_GRP];
    assign out_m     = ru_m;
    assign out_l     = ru_l;
  end

endmodule
