// phantom_core: one Phantom neural computational core.
//
// A 3x3 filter is held in the core; the input arrives as blocks of L_f
// convolution chunks (3x3 input windows), each in sparse-mask form (a 9-bit
// mask plus the packed non-zero bytes).  One block can be accepted per cycle.
// The pipeline follows the five blocks of the core:
//   LAM       ANDs the filter mask with every chunk mask (valid multiplications)
//   balancer  rotates the column groups of LAM_k (intra-core balancing, `bal_en`)
//   TDS       three out-of-order column selectors pick work for 3 threads each
//   TM        puts the selected activation/weight pairs into the PE registers
//   CE        3 PEs x 3 multiplier threads + L1 adders
//   OB        FIFOs + L2 accumulation into one sum per chunk, in block order
//   encoder   LAM reduction, ReLU, output mask and compaction
// The dense activation tiles of a block wait in a buffer, indexed by block
// slot, until the mapper has read them.  At most DEPTH blocks are in flight;
// `in_ready` drops (the input stalls) when the selectors fall behind.
//
// Interface: `w_load` loads a filter (mask + packed non-zeros) and must only
// be used while `idle`.  A block is taken when `in_valid && in_ready`.  Each
// finished block leaves in input order: `out_pre` are the raw sums (for the L3
// adders of Phantom-2D) with `out_lamr`, the reduced LAM bits; `out_mask`,
// `out_dense`, `out_packed`, `out_count` are the encoded outputs, one cycle
// later.  From acceptance to `pre_valid` the latency is 8 cycles plus the
// cycles the selectors need; the selectors finish a block of chunks in as
// many cycles as the densest column requires.
//
// Own choices: the block-slot bookkeeping, the in-flight depth of 4, one
// mapper per PE instead of one shared table, and signed 8-bit data.
module phantom_core
  import phantom_pkg::*;
#(
  parameter int LF    = 27,
  parameter int DEPTH = 4,
  localparam int SW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int KW   = (LF > 1) ? $clog2(LF) : 1,
  localparam int NW   = $clog2(LF + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                bal_en,
  // filter
  input  logic                w_load,
  input  mask_t               w_mask,
  input  packed_t             w_nz,
  // input chunks
  input  logic                in_valid,
  output logic                in_ready,
  input  mask_t   [LF-1:0]    ia_mask,
  input  packed_t [LF-1:0]    ia_nz,
  // raw block sums
  output logic                pre_valid,
  output acc_t    [LF-1:0]    out_pre,
  output logic    [LF-1:0]    out_lamr,
  // encoded outputs
  output logic                out_valid,
  output logic    [LF-1:0]    out_mask,
  output acc_t    [LF-1:0]    out_dense,
  output acc_t    [LF-1:0]    out_packed,
  output logic    [NW-1:0]    out_count,
  output logic                idle
);

  // ---------------------------------------------------------------- filter
  mask_t w_mask_q;
  tile_t w_tile_d, w_tile_q;

  length_equalizer u_weq (.mask(w_mask), .nz(w_nz), .dense(w_tile_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_mask_q <= '0;
      w_tile_q <= '0;
    end else if (w_load) begin
      w_mask_q <= w_mask;
      w_tile_q <= w_tile_d;
    end
  end

  // ---------------------------------------------------- admission control
  logic [SW:0]   inflight;
  logic          accept;
  logic [SW-1:0] wslot, lslot;
  logic          blk_valid;
  logic [SW-1:0] blk_slot;

  assign in_ready = (inflight < (SW+1)'(DEPTH)) && !w_load;
  assign accept   = in_valid && in_ready;
  assign idle     = (inflight == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + (SW+1)'(accept) - (SW+1)'(blk_valid);
  end

  // dense activation tiles, one row of L_f tiles per block slot
  tile_t [DEPTH-1:0][LF-1:0] act_buf;
  tile_t [LF-1:0]            ia_dense;

  for (genvar k = 0; k < LF; k++) begin : g_eq
    length_equalizer u_eq (.mask(ia_mask[k]), .nz(ia_nz[k]), .dense(ia_dense[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wslot   <= '0;
      act_buf <= '0;
    end else if (accept) begin
      act_buf[wslot] <= ia_dense;
      wslot          <= wslot + 1'b1;
    end
  end

  // ------------------------------------------------------------------ LAM
  logic           lam_valid;
  mask_t [LF-1:0] lam_q, lam_bal;
  logic  [DEPTH-1:0][LF-1:0] lamr_buf;

  lam #(.LF(LF)) u_lam (
    .clk, .rst_n, .accept, .w_mask(w_mask_q), .ia_mask, .lam_valid, .lam_out(lam_q)
  );

  intra_core_balancer #(.LF(LF)) u_bal (.en(bal_en), .lam_in(lam_q), .lam_out(lam_bal));

  // step 1 of output encoding: all-zero reduction of every LAM output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lslot    <= '0;
      lamr_buf <= '0;
    end else if (lam_valid) begin
      for (int k = 0; k < LF; k++) lamr_buf[lslot][k] <= (lam_q[k] != '0);
      lslot <= lslot + 1'b1;
    end
  end

  // ------------------------------------------------------ TDS, TM per PE
  logic  [NPE-1:0]                   map_valid;
  grp_t  [NPE-1:0][LF-1:0]           map;
  logic  [NPE-1:0][LF-1:0]           taken;
  logic  [NPE-1:0][LF-1:0][SW-1:0]   tslot;
  logic  [NPE-1:0][LF-1:0]           zero_taken;

  logic  [NPE-1:0][NTH-1:0]          th_valid;
  data_t [NPE-1:0][NTH-1:0]          th_act, th_wt;
  logic  [NPE-1:0][NTH-1:0][SW-1:0]  th_slot;
  logic  [NPE-1:0][NTH-1:0][KW-1:0]  th_k;
  l1_cfg_e [NPE-1:0]                 cfg;
  logic  [NPE-1:0]                   op_valid, tds_empty;

  for (genvar p = 0; p < NPE; p++) begin : g_col
    grp_t [LF-1:0] wr_grp;
    always_comb begin
      for (int k = 0; k < LF; k++) wr_grp[k] = lam_bal[k][p];
    end

    tds_column #(.LF(LF), .DEPTH(DEPTH)) u_tds (
      .clk, .rst_n,
      .wr        (lam_valid),
      .wr_grp    (wr_grp),
      .map_valid (map_valid[p]),
      .map       (map[p]),
      .taken     (taken[p]),
      .slot      (tslot[p]),
      .empty     (tds_empty[p])
    );

    always_comb begin
      for (int k = 0; k < LF; k++) zero_taken[p][k] = taken[p][k] && (map[p][k] == '0);
    end

    thread_mapper #(.LF(LF), .DEPTH(DEPTH), .SEL(p)) u_tm (
      .clk, .rst_n, .bal_en,
      .map_valid (map_valid[p]),
      .map       (map[p]),
      .slot      (tslot[p]),
      .act_buf   (act_buf),
      .w_tile    (w_tile_q),
      .op_valid  (op_valid[p]),
      .th_valid  (th_valid[p]),
      .th_act    (th_act[p]),
      .th_wt     (th_wt[p]),
      .th_slot   (th_slot[p]),
      .th_k      (th_k[p]),
      .cfg       (cfg[p])
    );
  end

  // ------------------------------------------------------------------- CE
  logic  [NPE-1:0][NTH-1:0]          l1_tag;
  acc_t  [NPE-1:0][NTH-1:0]          l1_val;
  logic  [NPE-1:0][NTH-1:0][SW-1:0]  l1_slot;
  logic  [NPE-1:0][NTH-1:0][KW-1:0]  l1_k;

  compute_engine #(.SW(SW), .KW(KW)) u_ce (
    .clk, .rst_n, .th_valid, .th_act, .th_wt, .th_slot, .th_k, .cfg,
    .l1_tag, .l1_val, .l1_slot, .l1_k
  );

  // ------------------------------------------------------------------- OB
  acc_t [LF-1:0] blk_val;
  logic          partial_seen;

  output_buffer #(.LF(LF), .DEPTH(DEPTH)) u_ob (
    .clk, .rst_n, .l1_tag, .l1_val, .l1_slot, .l1_k,
    .zero_taken, .zero_slot(tslot),
    .blk_valid, .blk_slot, .blk_val, .partial_seen
  );

  assign pre_valid = blk_valid;
  assign out_pre   = blk_val;
  assign out_lamr  = lamr_buf[blk_slot];

  // -------------------------------------------------------------- encoder
  output_encoder #(.LF(LF)) u_enc (
    .clk, .rst_n,
    .in_valid  (blk_valid),
    .in_val    (blk_val),
    .lam_r     (lamr_buf[blk_slot]),
    .out_valid, .out_mask, .out_dense, .out_packed, .out_count
  );

  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) w_load |-> idle);

endmodule
