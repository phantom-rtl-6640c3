// tb_l3_adder: checks the per-row channel accumulation.  In each round the
// four columns deliver one block each at random cycles.  In sum mode lane 0
// must carry the element-wise sum with the OR of the LAM bits, encoded (ReLU,
// mask, compaction); in pass mode every lane carries its own column's block,
// encoded.  The result must appear exactly two cycles after the last block
// arrived.
module tb_l3_adder;
  import phantom_pkg::*;
  localparam int C = 4, LF = 3, NW = 2;
  logic clk = 0, rst_n = 0, sum_mode = 0;
  logic [C-1:0]          in_valid, out_lane_valid;
  acc_t [C-1:0][LF-1:0]  in_pre, out_dense, out_packed;
  logic [C-1:0][LF-1:0]  in_lamr, out_mask;
  logic [C-1:0][NW-1:0]  out_count;
  logic                  fire;
  int checks = 0, failures = 0;
  int cyc = 0;

  l3_adder #(.C(C), .LF(LF)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_lane(input int c, input int v [LF], input logic [LF-1:0] lr);
    logic [LF-1:0] m;
    int n;
    n = 0;
    for (int k = 0; k < LF; k++) begin
      m[k] = lr[k] && v[k] >= 0;
      checks++;
      if (out_dense[c][k] !== (m[k] ? acc_t'(v[k]) : '0)) begin
        failures++; $display("lane %0d output %0d = %0d, expected %0d", c, k, out_dense[c][k], m[k] ? v[k] : 0);
      end
      if (m[k]) begin
        checks++;
        if (out_packed[c][n] !== acc_t'(v[k])) begin failures++; $display("lane %0d packed %0d wrong", c, n); end
        n++;
      end
    end
    checks++;
    if (out_mask[c] !== m || int'(out_count[c]) != n) begin
      failures++; $display("lane %0d mask %b count %0d, expected %b %0d", c, out_mask[c], out_count[c], m, n);
    end
  endtask

  initial begin
    int n_sum = 0, n_pass = 0;
    in_valid = '0; in_pre = '0; in_lamr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 300; round++) begin
      int v [C][LF];
      logic [C-1:0][LF-1:0] lr;
      int at [C];
      int last, t0, got_at;
      @(negedge clk);
      sum_mode = ($urandom >> 9) % 2;
      last = 0;
      for (int c = 0; c < C; c++) begin
        at[c] = ($urandom >> 9) % 6;
        if (at[c] > last) last = at[c];
        lr[c] = LF'($urandom);
        for (int k = 0; k < LF; k++) v[c][k] = int'(($urandom >> 9) % 2001) - 1000;
      end
      t0 = cyc;
      got_at = -1;
      for (int s = 0; s <= last + 4; s++) begin
        for (int c = 0; c < C; c++) begin
          in_valid[c] = (at[c] == s);
          in_pre[c] = '0;
          for (int k = 0; k < LF; k++) in_pre[c][k] = in_valid[c] ? acc_t'(v[c][k]) : acc_t'($urandom);
          in_lamr[c] = in_valid[c] ? lr[c] : LF'($urandom);
        end
        @(negedge clk);
        in_valid = '0;
        if (out_lane_valid != '0) begin
          checks++;
          if (got_at >= 0) begin failures++; $display("round %0d: two results", round); end
          got_at = s;
          if (sum_mode) begin
            int sv [LF];
            logic [LF-1:0] sl;
            sl = '0;
            for (int k = 0; k < LF; k++) begin
              sv[k] = 0;
              for (int c = 0; c < C; c++) sv[k] += v[c][k];
            end
            for (int c = 0; c < C; c++) sl |= lr[c];
            if (out_lane_valid !== 4'b0001) begin failures++; $display("sum mode lanes %b", out_lane_valid); end
            check_lane(0, sv, sl);
            n_sum++;
          end else begin
            if (out_lane_valid !== 4'b1111) begin failures++; $display("pass mode lanes %b", out_lane_valid); end
            for (int c = 0; c < C; c++) check_lane(c, v[c], lr[c]);
            n_pass++;
          end
        end
      end
      checks++;
      // sampled at the first edge; FIFO, add and encode take three
      if (got_at != last + 2) begin
        failures++; $display("round %0d: result %0d cycles after the last block, expected 3", round, got_at - last + 1);
      end
    end
    checks++;
    if (n_sum == 0 || n_pass == 0) begin failures++; $display("sum %0d pass %0d", n_sum, n_pass); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
