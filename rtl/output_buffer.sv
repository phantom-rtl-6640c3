// output_buffer: FIFOs and L2 accumulation of one Phantom core.
//
// Nine FIFOs (F1..F9, one per L1 output lane, i.e. per multiplier thread)
// take the tagged L1 results.  Each L1 result is the contribution of one
// filter column to one output chunk, and carries that chunk's id (block slot
// and position).  The L2 accumulator pops every non-empty FIFO in every cycle
// and adds the values into a table of partial outputs, one per chunk of each
// block in flight.  Entries the TDS consumed with no ones at all (all-zero LAM
// groups) add nothing but still count, and arrive straight from the TDS.
// An output is "partial" while fewer than NPE column contributions have
// arrived and "valid" once all NPE have; when every output of the oldest
// block is valid the block is emitted (`blk_valid`, values, slot) and its
// table row is cleared for reuse.
//
// The description adds partial outputs to the same-coloured FIFOs
// (F1+F4+F7, ...) and rebuilds valid outputs from the tag bits; that pairing
// is only worked out for its example.  This implementation reaches the same
// sums by addressing the partial-output table with the chunk id, which works
// for any selection order.  Blocks leave in the order they entered.
module output_buffer
  import phantom_pkg::*;
#(
  parameter int LF    = 27,
  parameter int DEPTH = 4,
  parameter int FIFO_DEPTH = 2,
  localparam int SW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int KW   = (LF > 1) ? $clog2(LF) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // from the compute engine
  input  logic  [NPE-1:0][NTH-1:0]          l1_tag,
  input  acc_t  [NPE-1:0][NTH-1:0]          l1_val,
  input  logic  [NPE-1:0][NTH-1:0][SW-1:0]  l1_slot,
  input  logic  [NPE-1:0][NTH-1:0][KW-1:0]  l1_k,
  // from the TDS: entries consumed without any one
  input  logic  [NPE-1:0][LF-1:0]           zero_taken,
  input  logic  [NPE-1:0][LF-1:0][SW-1:0]   zero_slot,
  // finished blocks
  output logic                              blk_valid,
  output logic  [SW-1:0]                    blk_slot,
  output acc_t  [LF-1:0]                    blk_val,
  output logic                              partial_seen
);

  typedef struct packed {
    acc_t            val;
    logic [SW-1:0]   slot;
    logic [KW-1:0]   k;
  } entry_t;

  localparam int NF = NPE * NTH;
  localparam int CNTW = $clog2(NPE + 1);

  entry_t [NF-1:0] head;
  logic   [NF-1:0] f_empty;

  for (genvar f = 0; f < NF; f++) begin : g_fifo
    entry_t din;
    logic   f_full;
    assign din = '{val: l1_val[f/NTH][f%NTH], slot: l1_slot[f/NTH][f%NTH], k: l1_k[f/NTH][f%NTH]};
    fifo #(.T(entry_t), .DEPTH(FIFO_DEPTH)) u_f (
      .clk, .rst_n,
      .push  (l1_tag[f/NTH][f%NTH]),
      .din   (din),
      .pop   (!f_empty[f]),
      .head  (head[f]),
      .empty (f_empty[f]),
      .full  (f_full)
    );
    // the L2 stage drains every FIFO each cycle, so a FIFO cannot fill up
    a_no_full: assert property (@(posedge clk) disable iff (!rst_n) !(f_full && l1_tag[f/NTH][f%NTH]));
  end

  acc_t             acc [DEPTH][LF];
  logic [CNTW-1:0]  cnt [DEPTH][LF];
  logic [SW-1:0]    out_ptr;
  logic             done;

  always_comb begin
    done = 1'b1;
    for (int k = 0; k < LF; k++)
      if (cnt[out_ptr][k] != CNTW'(NPE)) done = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < DEPTH; s++)
        for (int k = 0; k < LF; k++) begin
          acc[s][k] <= '0;
          cnt[s][k] <= '0;
        end
      out_ptr      <= '0;
      blk_valid    <= 1'b0;
      blk_slot     <= '0;
      blk_val      <= '0;
      partial_seen <= 1'b0;
    end else begin
      partial_seen <= 1'b0;
      for (int s = 0; s < DEPTH; s++)
        for (int k = 0; k < LF; k++) begin
          acc_t            a;
          logic [CNTW-1:0] n;
          a = acc[s][k];
          n = cnt[s][k];
          for (int f = 0; f < NF; f++)
            if (!f_empty[f] && head[f].slot == SW'(s) && head[f].k == KW'(k)) begin
              a = a + head[f].val;
              n = n + 1'b1;
            end
          for (int p = 0; p < NPE; p++)
            if (zero_taken[p][k] && zero_slot[p][k] == SW'(s)) n = n + 1'b1;
          if (n != cnt[s][k] && n != CNTW'(NPE)) partial_seen <= 1'b1;
          acc[s][k] <= a;
          cnt[s][k] <= n;
        end
      blk_valid <= done;
      if (done) begin
        blk_slot <= out_ptr;
        for (int k = 0; k < LF; k++) begin
          blk_val[k]        <= acc[out_ptr][k];
          acc[out_ptr][k]   <= '0;
          cnt[out_ptr][k]   <= '0;
        end
        out_ptr <= (out_ptr == SW'(DEPTH - 1)) ? '0 : out_ptr + 1'b1;
      end
    end
  end

endmodule
