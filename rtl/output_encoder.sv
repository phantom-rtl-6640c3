// output_encoder: builds the sparse-mask form of an output block.
//
// Output activations are sparse only after the fact, so their mask is made on
// the fly.  Step 1 (done where the LAM outputs are produced, see
// phantom_core): each LAM output is reduced to one bit, 0 if it is all zeros
// (no valid multiplication, so the output is certainly zero) and 1 otherwise;
// that bit vector `lam_r` is the mask before the activation function.
// Step 2 (here): ReLU turns negative outputs into zero and clears their mask
// bit.  The mask is then stored as is and the outputs whose mask bit is set
// are shifted together (compacted) in chunk order; `count` says how many.
//
// As in the description, an output that is exactly zero while its LAM bit is
// one keeps mask bit 1.  Registered: results one cycle after `in_valid`.
module output_encoder
  import phantom_pkg::*;
#(
  parameter int LF = 27,
  localparam int NW = $clog2(LF + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  acc_t [LF-1:0]   in_val,
  input  logic [LF-1:0]   lam_r,
  output logic            out_valid,
  output logic [LF-1:0]   out_mask,
  output acc_t [LF-1:0]   out_dense,
  output acc_t [LF-1:0]   out_packed,
  output logic [NW-1:0]   out_count
);

  logic [LF-1:0] m;
  acc_t [LF-1:0] d, pk;
  logic [NW-1:0] n;

  always_comb begin
    pk = '0;
    n  = '0;
    for (int k = 0; k < LF; k++) begin
      m[k] = lam_r[k] && !in_val[k][AW-1];
      d[k] = m[k] ? in_val[k] : '0;
    end
    for (int k = 0; k < LF; k++)
      if (m[k]) begin
        pk[n] = d[k];
        n     = n + 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_mask   <= '0;
      out_dense  <= '0;
      out_packed <= '0;
      out_count  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_mask   <= m;
        out_dense  <= d;
        out_packed <= pk;
        out_count  <= n;
      end
    end
  end

endmodule
