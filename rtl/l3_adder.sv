// l3_adder: channel accumulation for one row of the Phantom-2D matrix.
//
// Each of the C cores of a row delivers blocks of L_f raw sums (before ReLU)
// together with their reduced LAM bits.  Every column has a small FIFO
// (QDEPTH blocks), because the cores of a row run independently and one may
// finish a block before another.  When every FIFO holds a block, the oldest
// block of each column is taken (`fire`) and:
//   sum mode (pointwise convolution, FC layers; channels split over the
//     columns): the C blocks are added element by element, the LAM bits ORed,
//     and the result is encoded once (ReLU, mask, compaction) on lane 0;
//   pass mode (regular / depthwise convolution; one channel per column):
//     every column's block is encoded on its own lane.
// `out_lane_valid` tells which lanes carry a result.  The owner must not let
// a column run more than QDEPTH blocks ahead of `fire` (the top limits the
// admission of its cores for that).  The FIFOs, ReLU after the channel sum
// and the pairing of the columns' blocks in arrival order are this
// implementation's choices.  The result follows the last arriving block by
// three cycles (FIFO, add, encode).
module l3_adder
  import phantom_pkg::*;
#(
  parameter int C  = 4,
  parameter int LF = 27,
  parameter int QDEPTH = 8,
  localparam int NW = $clog2(LF + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         sum_mode,
  input  logic [C-1:0]                 in_valid,
  input  acc_t [C-1:0][LF-1:0]         in_pre,
  input  logic [C-1:0][LF-1:0]         in_lamr,
  output logic [C-1:0]                 out_lane_valid,
  output logic [C-1:0][LF-1:0]         out_mask,
  output acc_t [C-1:0][LF-1:0]         out_dense,
  output acc_t [C-1:0][LF-1:0]         out_packed,
  output logic [C-1:0][NW-1:0]         out_count,
  output logic                         fire
);

  typedef struct packed {
    acc_t [LF-1:0] pre;
    logic [LF-1:0] lamr;
  } blk_t;

  logic [C-1:0] q_empty, q_full;
  blk_t [C-1:0] q_head;
  acc_t [C-1:0][LF-1:0] cur_val;
  logic [C-1:0][LF-1:0] cur_lamr;

  assign fire = (q_empty == '0);

  for (genvar c = 0; c < C; c++) begin : g_q
    fifo #(.T(blk_t), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .push  (in_valid[c]),
      .din   ('{pre: in_pre[c], lamr: in_lamr[c]}),
      .pop   (fire),
      .head  (q_head[c]),
      .empty (q_empty[c]),
      .full  (q_full[c])
    );
    assign cur_val[c]  = q_head[c].pre;
    assign cur_lamr[c] = q_head[c].lamr;
  end

  // stage 1: add or pass
  logic [C-1:0]         s_valid;
  acc_t [C-1:0][LF-1:0] s_val;
  logic [C-1:0][LF-1:0] s_lamr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid   <= '0;
      s_val     <= '0;
      s_lamr    <= '0;
    end else begin
      s_valid <= '0;
      if (fire) begin
        if (sum_mode) begin
          acc_t [LF-1:0] sv;
          logic [LF-1:0] sl;
          sv = '0;
          sl = '0;
          for (int c = 0; c < C; c++) begin
            for (int k = 0; k < LF; k++) sv[k] = sv[k] + cur_val[c][k];
            sl = sl | cur_lamr[c];
          end
          s_val[0]  <= sv;
          s_lamr[0] <= sl;
          s_valid   <= C'(1);
        end else begin
          s_val   <= cur_val;
          s_lamr  <= cur_lamr;
          s_valid <= '1;
        end
      end
    end
  end

  // stage 2: output encoding per lane
  for (genvar c = 0; c < C; c++) begin : g_enc
    output_encoder #(.LF(LF)) u_enc (
      .clk, .rst_n,
      .in_valid   (s_valid[c]),
      .in_val     (s_val[c]),
      .lam_r      (s_lamr[c]),
      .out_valid  (out_lane_valid[c]),
      .out_mask   (out_mask[c]),
      .out_dense  (out_dense[c]),
      .out_packed (out_packed[c]),
      .out_count  (out_count[c])
    );
  end

  // a column must not run more than QDEPTH blocks ahead
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) (in_valid & q_full) == '0);

endmodule
