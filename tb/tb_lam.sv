// tb_lam: checks the lookahead mask: every LAM output is the bitwise AND of
// the weight mask and its chunk mask, one cycle after `accept`, and the output
// holds while `accept` is low.
module tb_lam;
  import phantom_pkg::*;
  localparam int LF = 5;
  logic clk = 0, rst_n = 0, accept = 0, lam_valid;
  mask_t w_mask;
  mask_t [LF-1:0] ia_mask, lam_out, exp_out;
  int checks = 0, failures = 0;

  lam #(.LF(LF)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_mask = '0; ia_mask = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      w_mask = mask_t'($urandom);
      for (int k = 0; k < LF; k++) ia_mask[k] = mask_t'($urandom);
      accept = (($urandom >> 9) % 4) != 0;
      for (int k = 0; k < LF; k++)
        for (int c = 0; c < K; c++)
          for (int r = 0; r < K; r++)
            if (accept) exp_out[k][c][r] = w_mask[c][r] & ia_mask[k][c][r];
      @(posedge clk); #1;
      checks++;
      if (lam_valid !== accept || lam_out !== exp_out) begin
        failures++;
        $display("step %0d: valid %0b out %h expected %0b %h", i, lam_valid, lam_out, accept, exp_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
