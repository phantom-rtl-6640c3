// inter_core_balancer: system-level load balancing across the columns of
// the Phantom-2D compute matrix.
//
// In regular and depthwise convolution every column of the matrix works on one
// filter (one channel) at a time, and a column with a denser filter finishes
// later.  The balancer records the order in which the columns report that
// they finished (`col_done`).  When the next batch of C filters is offered
// (`batch_valid` with their sparse masks), it counts the ones of every mask
// (the density), ranks the filters densest first and gives the densest filter
// to the column that finished first, the next densest to the second, and so
// on.  Columns that did not report are ranked after the reporting ones, in
// index order; equal densities keep filter order.  With `en` low filter i goes
// to column i (balancing off, used for layers without filter reuse).
//
// `assign_valid` and `assign_idx[col]` (the filter index given to each
// column) appear one cycle after `batch_valid`; the completion order is then
// cleared for the next round.
module inter_core_balancer
  import phantom_pkg::*;
#(
  parameter int C  = 4,
  localparam int IW = (C > 1) ? $clog2(C) : 1,
  localparam int DNW = $clog2(K * K + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [C-1:0]          col_done,
  input  logic                  batch_valid,
  input  mask_t [C-1:0]         batch_mask,
  output logic                  assign_valid,
  output logic [C-1:0][IW-1:0]  assign_idx,
  output logic [C-1:0][DNW-1:0] density
);

  // completion order
  logic [C-1:0][IW-1:0] order;
  logic [IW:0]          n_done;
  logic [C-1:0]         reported;

  // densities
  always_comb begin
    for (int i = 0; i < C; i++) begin
      density[i] = '0;
      for (int c = 0; c < K; c++)
        for (int r = 0; r < K; r++) density[i] = density[i] + DNW'(batch_mask[i][c][r]);
    end
  end

  // rank of every filter, densest first, ties by index
  logic [C-1:0][IW-1:0] rank_of;
  always_comb begin
    for (int i = 0; i < C; i++) begin
      int unsigned rk;
      rk = 0;
      for (int j = 0; j < C; j++)
        if (density[j] > density[i] || (density[j] == density[i] && j < i)) rk++;
      rank_of[i] = IW'(rk);
    end
  end

  // full column order: reporting columns first, then the rest by index
  logic [C-1:0][IW-1:0] col_at;
  always_comb begin
    int unsigned pos;
    pos = 0;
    col_at = '0;
    for (int i = 0; i < C; i++)
      if (i < int'(n_done)) begin
        col_at[pos] = order[i];
        pos++;
      end
    for (int c = 0; c < C; c++)
      if (!reported[c]) begin
        col_at[pos] = IW'(c);
        pos++;
      end
  end

  logic [C-1:0][IW-1:0] asg;
  always_comb begin
    asg = '0;
    for (int i = 0; i < C; i++) begin
      if (en) asg[col_at[rank_of[i]]] = IW'(i);
      else    asg[i] = IW'(i);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      order        <= '0;
      n_done       <= '0;
      reported     <= '0;
      assign_valid <= 1'b0;
      assign_idx   <= '0;
    end else begin
      assign_valid <= batch_valid;
      if (batch_valid) begin
        assign_idx <= asg;
        order      <= '0;
        n_done     <= '0;
        reported   <= '0;
      end else begin
        // columns finishing in the same cycle are recorded lowest index first
        logic [IW:0] n;
        n = n_done;
        for (int c = 0; c < C; c++)
          if (col_done[c] && !reported[c] && n < (IW+1)'(C)) begin
            order[n[IW-1:0]] <= IW'(c);
            reported[c]      <= 1'b1;
            n = n + 1'b1;
          end
        n_done <= n;
      end
    end
  end

endmodule
