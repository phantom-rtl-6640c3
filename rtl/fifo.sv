// fifo: small synchronous first-in first-out buffer.
//
// DEPTH entries of type T.  `push` writes when not full, `pop` removes the
// head when not empty; both may happen in one cycle.  `head` shows the oldest
// entry whenever `empty` is low.  Reset empties the buffer.
module fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 2,
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     head,
  output logic empty,
  output logic full
);

  T            mem [DEPTH];
  logic [AW:0] wp, rp;

  assign empty = (wp == rp);
  assign full  = (wp - rp) == (AW+1)'(DEPTH);
  assign head  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp[AW-1:0]] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

endmodule
