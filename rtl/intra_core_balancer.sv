// intra_core_balancer: thread-level load balancing inside one core.
//
// The TDS works column by column, so a filter whose ones sit in one column
// makes one column selector the bottleneck.  Before the TDS, the column groups
// of LAM_k (k counted from 0) are rotated right by k mod K positions; LAM_1 is
// unchanged, LAM_2 moves by one group, LAM_3 by two, which spreads a dense
// column over all three selectors.  The matching left rotation of the maps is
// not a separate stage here: the thread mapper reads data through
// phantom_pkg::orig_col(), which gives for every (selector, chunk) the column
// the selected bits came from.
//
// Purely combinational.  With `en` low the masks pass unchanged (the
// "unbalanced" configuration the design can be compared against).
module intra_core_balancer
  import phantom_pkg::*;
#(
  parameter int LF = 27
) (
  input  logic            en,
  input  mask_t [LF-1:0]  lam_in,
  output mask_t [LF-1:0]  lam_out
);

  always_comb begin
    for (int k = 0; k < LF; k++)
      for (int x = 0; x < K; x++)
        lam_out[k][x] = lam_in[k][orig_col(x, k, en)];
  end

endmodule
