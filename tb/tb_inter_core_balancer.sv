// tb_inter_core_balancer: checks the filter-to-column assignment.  In each
// round some columns report completion in a random order (several may report
// in the same cycle, some not at all, some twice), then a batch of four random
// filter masks is offered.  With balancing on, the densest filter must go to
// the column that finished first and so on (ties: lower filter index denser,
// non-reporting columns last in index order); with it off filter i goes to
// column i.  The assignment must appear one cycle after the batch.
module tb_inter_core_balancer;
  import phantom_pkg::*;
  localparam int C = 4, IW = 2, DNW = 4;
  logic clk = 0, rst_n = 0, en = 0, batch_valid = 0, assign_valid;
  logic [C-1:0] col_done;
  mask_t [C-1:0] batch_mask;
  logic [C-1:0][IW-1:0] assign_idx;
  logic [C-1:0][DNW-1:0] density;
  int checks = 0, failures = 0;

  inter_core_balancer #(.C(C)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_moved = 0;
    col_done = '0; batch_mask = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 500; round++) begin
      int order [$];
      int dens [C], fil_rank [C], col_at [C], exp_idx [C];
      bit rep [C];
      rep = '{default: 0};
      order.delete();
      en = (($urandom >> 9) % 4) != 0;
      repeat (($urandom >> 9) % 8) begin
        @(negedge clk);
        col_done = C'($urandom) & C'($urandom);
        for (int c = 0; c < C; c++)
          if (col_done[c] && !rep[c]) begin order.push_back(c); rep[c] = 1; end
      end
      @(negedge clk);
      col_done = '0;
      for (int c = 0; c < C; c++) if (!rep[c]) order.push_back(c);
      for (int i = 0; i < C; i++) begin
        batch_mask[i] = mask_t'($urandom);
        dens[i] = $countones(batch_mask[i]);
      end
      // rank filters, densest first
      for (int i = 0; i < C; i++) begin
        fil_rank[i] = 0;
        for (int j = 0; j < C; j++) if (dens[j] > dens[i] || (dens[j] == dens[i] && j < i)) fil_rank[i]++;
      end
      for (int i = 0; i < C; i++) exp_idx[en ? order[fil_rank[i]] : i] = i;
      batch_valid = 1;
      @(negedge clk);
      batch_valid = 0;
      checks++;
      if (!assign_valid) begin failures++; $display("no assignment one cycle after the batch"); end
      for (int c = 0; c < C; c++) begin
        checks++;
        if (int'(assign_idx[c]) != exp_idx[c]) begin
          failures++; $display("round %0d en=%0b: column %0d gets filter %0d, expected %0d", round, en, c, assign_idx[c], exp_idx[c]);
        end
        if (exp_idx[c] != c) n_moved++;
      end
    end
    checks++;
    if (n_moved == 0) begin failures++; $display("no filter was ever moved"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
