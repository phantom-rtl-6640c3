// tb_output_encoder: checks ReLU, output mask and compaction.  The example:
// six outputs whose LAM bits are all one, O1 and O4 negative, give the mask
// 1,0,1,1,0,1 and the packed list O0,O2,O3,O5.  Then random blocks with
// random LAM bits against a reference.
module tb_output_encoder;
  import phantom_pkg::*;
  localparam int LF = 6;
  localparam int NW = $clog2(LF + 1);
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  acc_t [LF-1:0] in_val, out_dense, out_packed;
  logic [LF-1:0] lam_r, out_mask;
  logic [NW-1:0] out_count;
  int checks = 0, failures = 0;

  output_encoder #(.LF(LF)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input acc_t [LF-1:0] v, input logic [LF-1:0] lr);
    logic [LF-1:0] m;
    acc_t [LF-1:0] pk;
    int n;
    n = 0; pk = '0;
    for (int k = 0; k < LF; k++) begin
      m[k] = lr[k] && ($signed(v[k]) >= 0);
      if (m[k]) begin pk[n] = v[k]; n++; end
    end
    @(negedge clk);
    in_val = v; lam_r = lr; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || out_mask !== m || out_packed !== pk || int'(out_count) != n) begin
      failures++;
      $display("mask %b exp %b count %0d exp %0d", out_mask, m, out_count, n);
    end
    for (int k = 0; k < LF; k++) begin
      checks++;
      if (out_dense[k] !== (m[k] ? v[k] : '0)) begin failures++; $display("dense %0d wrong", k); end
    end
  endtask

  initial begin
    acc_t [LF-1:0] v;
    in_val = '0; lam_r = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    v = '0;
    for (int k = 0; k < LF; k++) v[k] = acc_t'(10 * (k + 1));
    v[1] = -acc_t'(7);
    v[4] = -acc_t'(3);
    run(v, '1);
    checks++;
    if (out_mask !== 6'b101101 || out_packed[0] !== acc_t'(10) || out_packed[1] !== acc_t'(30)
        || out_packed[2] !== acc_t'(40) || out_packed[3] !== acc_t'(60)) begin
      failures++; $display("example: mask %b", out_mask);
    end
    for (int i = 0; i < 200; i++) begin
      for (int k = 0; k < LF; k++) v[k] = acc_t'(($urandom >> 9) % 2001) - acc_t'(1000);
      run(v, LF'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
