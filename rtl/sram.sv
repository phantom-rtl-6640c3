// sram: on-chip buffer memory of Phantom-2D (input, weight and output SRAMs).
//
// A plain simple-dual-port memory: one synchronous write port and one
// synchronous read port (data one cycle after `re`), WORDS entries of W bits.
// The sizes are parameters; the description does not give the SRAM sizes or
// organisation, so the defaults used by phantom_2d are this implementation's
// choice.  Written as an array so synthesis can map it to a RAM macro.
module sram #(
  parameter int W     = 32,
  parameter int WORDS = 256,
  localparam int AW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
