// lam: lookahead mask.
//
// L_f parallel AND gates compare the weight sparse mask with the sparse masks
// of L_f input chunks.  A one in LAM_k marks a weight/activation pair that are
// both non-zero, i.e. a multiplication that has to be done for output chunk k.
// The weight mask is shared by all gates.
//
// Interface: `accept` captures `w_mask` AND `ia_mask[k]` into the output
// register; `lam_valid` follows one cycle later.  One set of L_f chunks per
// cycle, as in the description (six chunks with L_f = 3 take two cycles).
// Registering the output is this implementation's choice of pipeline stage.
module lam
  import phantom_pkg::*;
#(
  parameter int LF = 27
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            accept,
  input  mask_t           w_mask,
  input  mask_t [LF-1:0]  ia_mask,
  output logic            lam_valid,
  output mask_t [LF-1:0]  lam_out
);

  mask_t [LF-1:0] and_out;

  always_comb begin
    for (int k = 0; k < LF; k++) and_out[k] = w_mask & ia_mask[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lam_valid <= 1'b0;
      lam_out   <= '0;
    end else begin
      lam_valid <= accept;
      if (accept) lam_out <= and_out;
    end
  end

endmodule
