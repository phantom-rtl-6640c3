// phantom_2d: the Phantom-2D accelerator, an R x C matrix of Phantom cores.
//
// Rows of the matrix take different parts of the input (chunks of output
// rows, or different filters in pointwise layers); columns take different
// channels.  Around the matrix:
//   inter-core balancer  gives every column its next filter, densest filter
//                        to the column that finished first (`inter_en`)
//   L3 adders            one per row, add the column results (pointwise / FC,
//                        `sum_mode`) or pass them (regular / depthwise)
//   SRAMs                input and weight buffers loaded by the host, one
//                        output bank per row written by that row's L3 adder
//
// Filter broadcast: `f_batch_valid` offers C filters (sparse masks and packed
// non-zeros).  One cycle later the balancer's choice appears on
// `f_assign_idx` (filter index per column) and every core of column c loads
// filter f_assign_idx[c]; the cores must be idle then.  The scheduler that
// reads the SRAMs and cuts the layer into chunks is not part of this RTL: its
// per-core chunk streams (`in_valid`, `in_ready`, `ia_mask`, `ia_nz`) and the
// SRAM read ports it would use are ports of this module.  It must send the
// input channel that belongs to the filter each column received.
//
// Output bank word (one per L3 result, written at the next address of the
// row's bank, `out_words[row]` counts them), lane c at bits
// [c*LW +: LW] with LW = 1 + LF + LF*AW + NW:
//   {lane_valid, mask[LF-1:0], packed[LF-1:0] (AW bits each, compacted), count}.
// `host_out_rdata` is the word at (`host_out_row`, `host_out_raddr`) one
// cycle after `host_out_re`.
//
// Admission: a core takes a new block only while it is fewer than L3_DEPTH
// blocks ahead of its row's L3 adder, so the L3 column FIFOs never overflow;
// `in_ready` already includes this limit.
//
// Sizes from the description: R = 7, C = 4, 3 PEs x 3 threads per core,
// L_f = 27.  SRAM depths, the in-flight depth, the L3 FIFO depth and the bank
// organisation are this implementation's choices.
module phantom_2d
  import phantom_pkg::*;
#(
  parameter int R       = 7,
  parameter int C       = 4,
  parameter int LF      = 27,
  parameter int DEPTH   = 4,
  parameter int IN_WORDS  = 4096,
  parameter int W_WORDS   = 1024,
  parameter int OUT_WORDS = 64,
  parameter int L3_DEPTH  = 8,
  localparam int IW     = (C > 1) ? $clog2(C) : 1,
  localparam int NW     = $clog2(LF + 1),
  localparam int TW     = K * K + K * K * DW,            // one tile: mask + packed non-zeros
  localparam int LW     = 1 + LF + LF * AW + NW,         // one output lane
  localparam int OW     = C * LW,                        // one output bank word
  localparam int IAW    = $clog2(IN_WORDS),
  localparam int WAW    = $clog2(W_WORDS),
  localparam int OAW    = $clog2(OUT_WORDS),
  localparam int RW     = (R > 1) ? $clog2(R) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // configuration
  input  logic                              bal_en,      // intra-core balancing
  input  logic                              inter_en,    // inter-core balancing
  input  logic                              sum_mode,    // L3: add columns (pointwise / FC)
  // filter broadcast
  input  logic                              f_batch_valid,
  input  mask_t   [C-1:0]                   f_mask,
  input  packed_t [C-1:0]                   f_nz,
  output logic                              f_assign_valid,
  output logic    [C-1:0][IW-1:0]           f_assign_idx,
  // chunk streams from the scheduler, one per core
  input  logic    [R-1:0][C-1:0]            in_valid,
  output logic    [R-1:0][C-1:0]            in_ready,
  input  mask_t   [R-1:0][C-1:0][LF-1:0]    ia_mask,
  input  packed_t [R-1:0][C-1:0][LF-1:0]    ia_nz,
  output logic    [C-1:0]                   col_idle,
  // input and weight SRAMs: host write port, scheduler read port
  input  logic                              host_in_we,
  input  logic    [IAW-1:0]                 host_in_waddr,
  input  logic    [TW-1:0]                  host_in_wdata,
  input  logic                              sch_in_re,
  input  logic    [IAW-1:0]                 sch_in_raddr,
  output logic    [TW-1:0]                  sch_in_rdata,
  input  logic                              host_w_we,
  input  logic    [WAW-1:0]                 host_w_waddr,
  input  logic    [TW-1:0]                  host_w_wdata,
  input  logic                              sch_w_re,
  input  logic    [WAW-1:0]                 sch_w_raddr,
  output logic    [TW-1:0]                  sch_w_rdata,
  // output SRAM banks: host read port
  input  logic                              host_out_re,
  input  logic    [RW-1:0]                  host_out_row,
  input  logic    [OAW-1:0]                 host_out_raddr,
  output logic    [OW-1:0]                  host_out_rdata,
  output logic    [R-1:0][OAW:0]            out_words
);

  // ------------------------------------------------------------ SRAMs in
  sram #(.W(TW), .WORDS(IN_WORDS)) u_in_sram (
    .clk, .we(host_in_we), .waddr(host_in_waddr), .wdata(host_in_wdata),
    .re(sch_in_re), .raddr(sch_in_raddr), .rdata(sch_in_rdata)
  );
  sram #(.W(TW), .WORDS(W_WORDS)) u_w_sram (
    .clk, .we(host_w_we), .waddr(host_w_waddr), .wdata(host_w_wdata),
    .re(sch_w_re), .raddr(sch_w_raddr), .rdata(sch_w_rdata)
  );

  // --------------------------------------------------- inter-core balancer
  logic [R-1:0][C-1:0] core_idle;
  logic [C-1:0]        col_idle_q, col_done;
  mask_t   [C-1:0]     f_mask_q;
  packed_t [C-1:0]     f_nz_q;

  always_comb begin
    for (int c = 0; c < C; c++) begin
      col_idle[c] = 1'b1;
      for (int r = 0; r < R; r++) if (!core_idle[r][c]) col_idle[c] = 1'b0;
    end
  end
  assign col_done = col_idle & ~col_idle_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_idle_q <= '1;
      f_mask_q   <= '0;
      f_nz_q     <= '0;
    end else begin
      col_idle_q <= col_idle;
      if (f_batch_valid) begin
        f_mask_q <= f_mask;
        f_nz_q   <= f_nz;
      end
    end
  end

  logic [C-1:0][$clog2(K*K+1)-1:0] density;

  inter_core_balancer #(.C(C)) u_icb (
    .clk, .rst_n, .en(inter_en), .col_done,
    .batch_valid (f_batch_valid),
    .batch_mask  (f_mask),
    .assign_valid(f_assign_valid),
    .assign_idx  (f_assign_idx),
    .density     (density)
  );

  // ------------------------------------------------------- compute matrix
  logic [R-1:0][C-1:0]                 pre_valid;
  logic [R-1:0][C-1:0]                 core_ready, core_in_valid, room;
  logic [R-1:0]                        l3_fire;
  // blocks a core has taken that its row's L3 adder has not yet consumed;
  // admission stops at L3_DEPTH so the L3 column FIFOs cannot overflow
  logic [R-1:0][C-1:0][$clog2(L3_DEPTH+1)-1:0] lead;

  always_comb begin
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        room[r][c]          = (lead[r][c] < ($clog2(L3_DEPTH+1))'(L3_DEPTH));
        core_in_valid[r][c] = in_valid[r][c] && room[r][c];
        in_ready[r][c]      = core_ready[r][c] && room[r][c];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lead <= '0;
    else
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          lead[r][c] <= lead[r][c] + ($clog2(L3_DEPTH+1))'(core_in_valid[r][c] && core_ready[r][c])
                        - ($clog2(L3_DEPTH+1))'(l3_fire[r]);
  end
  acc_t [R-1:0][C-1:0][LF-1:0]         pre;
  logic [R-1:0][C-1:0][LF-1:0]         lamr;

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      logic          ov;
      logic [LF-1:0] om;
      acc_t [LF-1:0] od, op;
      logic [NW-1:0] oc;
      phantom_core #(.LF(LF), .DEPTH(DEPTH)) u_core (
        .clk, .rst_n, .bal_en,
        .w_load     (f_assign_valid),
        .w_mask     (f_mask_q[f_assign_idx[c]]),
        .w_nz       (f_nz_q[f_assign_idx[c]]),
        .in_valid   (core_in_valid[r][c]),
        .in_ready   (core_ready[r][c]),
        .ia_mask    (ia_mask[r][c]),
        .ia_nz      (ia_nz[r][c]),
        .pre_valid  (pre_valid[r][c]),
        .out_pre    (pre[r][c]),
        .out_lamr   (lamr[r][c]),
        .out_valid  (ov),
        .out_mask   (om),
        .out_dense  (od),
        .out_packed (op),
        .out_count  (oc),
        .idle       (core_idle[r][c])
      );
    end
  end

  // ------------------------------------------- L3 adders and output banks
  logic [R-1:0][OW-1:0] bank_rdata;
  logic [RW-1:0]        rd_row_q;

  for (genvar r = 0; r < R; r++) begin : g_l3
    logic [C-1:0]          lane_v;
    logic [C-1:0][LF-1:0]  l_mask;
    acc_t [C-1:0][LF-1:0]  l_dense, l_packed;
    logic [C-1:0][NW-1:0]  l_count;
    logic [OW-1:0]         word;
    logic [OAW:0]          waddr;

    l3_adder #(.C(C), .LF(LF), .QDEPTH(L3_DEPTH)) u_l3 (
      .clk, .rst_n, .sum_mode,
      .in_valid      (pre_valid[r]),
      .in_pre        (pre[r]),
      .in_lamr       (lamr[r]),
      .out_lane_valid(lane_v),
      .out_mask      (l_mask),
      .out_dense     (l_dense),
      .out_packed    (l_packed),
      .out_count     (l_count),
      .fire          (l3_fire[r])
    );

    always_comb begin
      for (int c = 0; c < C; c++)
        word[c*LW +: LW] = {lane_v[c], l_mask[c], l_packed[c], l_count[c]};
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)         waddr <= '0;
      else if (|lane_v)   waddr <= waddr + 1'b1;
    end
    assign out_words[r] = waddr;

    sram #(.W(OW), .WORDS(OUT_WORDS)) u_out_sram (
      .clk,
      .we    (|lane_v),
      .waddr (waddr[OAW-1:0]),
      .wdata (word),
      .re    (host_out_re && host_out_row == RW'(r)),
      .raddr (host_out_raddr),
      .rdata (bank_rdata[r])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           rd_row_q <= '0;
    else if (host_out_re) rd_row_q <= host_out_row;
  end
  assign host_out_rdata = bank_rdata[rd_row_q];

endmodule
