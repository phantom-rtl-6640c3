// tb_intra_core_balancer: checks the right circular shift of the column
// groups.  First the example of a filter whose only non-zero column is the
// first one: LAM1..3 = 111,000,000 must become 111,000,000 / 000,111,000 /
// 000,000,111.  Then random masks against a reference rotation, and the
// identity when balancing is off.
module tb_intra_core_balancer;
  import phantom_pkg::*;
  localparam int LF = 7;
  logic en;
  mask_t [LF-1:0] lam_in, lam_out, exp_out;
  int checks = 0, failures = 0;
  logic clk = 0;

  intra_core_balancer #(.LF(LF)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // example
    en = 1;
    lam_in = '0;
    for (int k = 0; k < 3; k++) lam_in[k][0] = 3'b111;
    #1;
    for (int k = 0; k < 3; k++) begin
      checks++;
      for (int x = 0; x < K; x++)
        if (lam_out[k][x] !== ((x == k) ? 3'b111 : 3'b000)) begin
          failures++;
          $display("LAM%0d group %0d = %b", k + 1, x, lam_out[k][x]);
        end
    end
    for (int i = 0; i < 300; i++) begin
      en = ($urandom >> 9) % 2;
      for (int k = 0; k < LF; k++) lam_in[k] = mask_t'($urandom);
      for (int k = 0; k < LF; k++)
        for (int x = 0; x < K; x++)
          exp_out[k][en ? (x + k) % K : x] = lam_in[k][x];
      #1;
      checks++;
      if (lam_out !== exp_out) begin
        failures++;
        $display("en=%0b in %h out %h expected %h", en, lam_in, lam_out, exp_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
