// tds_column: out-of-order top-down selector for one column of the LAM
// outputs (one per PE).
//
// Each of the L_f chunk positions has a small block memory with its own read
// address.  A LAM block writes one column group into every memory at the
// common write address, which advances every accepted block.  In every cycle
// the selector looks at the head entry of each memory: the entry holding
// priority P1 is taken first, then every other entry, top-down, is taken if
// its ones still fit in the NTH multiplier threads together with what is
// already taken.  Unlike in-order selection, an entry that does not fit does
// not stop the entries below it from being considered.  A taken entry bumps
// its memory's read address (its tag bit is set); an all-zero entry is taken
// for free.  In the next cycle P1 goes to the first head entry, top-down, that
// was left behind, so a missed entry is never starved; when nothing was left
// behind P1 returns to memory 0.  This reproduces the three iterations of the
// worked example of the paper (map11 = 011 000 010, map12 = 001 011 000,
// map13 = 000 011 001).  How P1 moves when more than one entry is missed is
// this implementation's choice.
//
// Outputs (registered, one cycle after the selection): `map` holds the taken
// groups and zeros elsewhere, `taken` marks every consumed entry (also empty
// ones), `slot` is the block slot (read address) each entry belongs to.
// `wr` must only be asserted when the memories have room; the owner (the core)
// guarantees this by limiting the blocks in flight to DEPTH.
module tds_column
  import phantom_pkg::*;
#(
  parameter int LF    = 27,
  parameter int DEPTH = 4,
  parameter int NT    = NTH,
  localparam int SW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr,
  input  grp_t [LF-1:0]           wr_grp,
  output logic                    map_valid,
  output grp_t [LF-1:0]           map,
  output logic [LF-1:0]           taken,
  output logic [LF-1:0][SW-1:0]   slot,
  output logic                    empty
);

  grp_t mem [LF][DEPTH];
  logic [SW:0] wr_ptr;
  logic [SW:0] rd_ptr [LF];
  logic [$clog2(LF+1)-1:0] p1;

  logic [LF-1:0] avail, sel;
  grp_t [LF-1:0] head;
  logic [$clog2(LF+1)-1:0] p1_next;

  always_comb begin
    int unsigned sum;
    logic found;
    for (int k = 0; k < LF; k++) begin
      avail[k] = (rd_ptr[k] != wr_ptr);
      head[k]  = mem[k][rd_ptr[k][SW-1:0]];
    end
    sel = '0;
    sum = 0;
    // highest priority first
    for (int k = 0; k < LF; k++) begin
      if (k == int'(p1) && avail[k] && (popcount_grp(head[k]) <= NT)) begin
        sel[k] = 1'b1;
        sum    = popcount_grp(head[k]);
      end
    end
    // then the rest, top-down, each one considered on its own
    for (int k = 0; k < LF; k++) begin
      if (k != int'(p1) && avail[k] && (sum + popcount_grp(head[k]) <= NT)) begin
        sel[k] = 1'b1;
        sum    = sum + popcount_grp(head[k]);
      end
    end
    p1_next = '0;
    found   = 1'b0;
    for (int k = 0; k < LF; k++) begin
      if (!found && avail[k] && !sel[k] && popcount_grp(head[k]) != 0) begin
        p1_next = ($clog2(LF+1))'(k);
        found   = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr)
      for (int k = 0; k < LF; k++) mem[k][wr_ptr[SW-1:0]] <= wr_grp[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      p1        <= '0;
      for (int k = 0; k < LF; k++) rd_ptr[k] <= '0;
      map_valid <= 1'b0;
      map       <= '0;
      taken     <= '0;
      slot      <= '0;
    end else begin
      if (wr) wr_ptr <= wr_ptr + 1'b1;
      for (int k = 0; k < LF; k++) begin
        if (sel[k]) rd_ptr[k] <= rd_ptr[k] + 1'b1;
        map[k]  <= sel[k] ? head[k] : '0;
        slot[k] <= rd_ptr[k][SW-1:0];
      end
      taken     <= sel;
      map_valid <= |sel;
      p1        <= p1_next;
    end
  end

  always_comb begin
    empty = 1'b1;
    for (int k = 0; k < LF; k++) if (avail[k]) empty = 1'b0;
  end

  // a write into a full memory would overwrite an unread entry
  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n)
      wr |-> ((wr_ptr - rd_ptr[0]) < (SW+1)'(DEPTH));
  endproperty
  a_no_overflow: assert property (p_no_overflow);

endmodule
