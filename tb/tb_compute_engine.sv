// tb_compute_engine: checks the nine multipliers and the L1 adders of the
// three PEs.  Every cycle each PE gets a random thread pattern of the kind the
// mapper produces (n ones right-aligned, chunk ids in order, the matching
// configuration bits).  The check does not depend on which lane carries a
// result: for every PE the tagged outputs of the next cycle must hold exactly
// one sum per distinct output chunk, equal to the sum of the products that
// belong to it.
module tb_compute_engine;
  import phantom_pkg::*;
  localparam int SW = 2, KW = 3;
  logic clk = 0, rst_n = 0;
  logic  [NPE-1:0][NTH-1:0]          th_valid;
  data_t [NPE-1:0][NTH-1:0]          th_act, th_wt;
  logic  [NPE-1:0][NTH-1:0][SW-1:0]  th_slot;
  logic  [NPE-1:0][NTH-1:0][KW-1:0]  th_k;
  l1_cfg_e [NPE-1:0]                 cfg;
  logic  [NPE-1:0][NTH-1:0]          l1_tag;
  acc_t  [NPE-1:0][NTH-1:0]          l1_val;
  logic  [NPE-1:0][NTH-1:0][SW-1:0]  l1_slot;
  logic  [NPE-1:0][NTH-1:0][KW-1:0]  l1_k;
  int checks = 0, failures = 0;

  compute_engine #(.SW(SW), .KW(KW)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cfg_seen [4] = '{0, 0, 0, 0};
    th_valid = '0; th_act = '0; th_wt = '0; th_slot = '0; th_k = '0; cfg = '{default: L1_PASS};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      int exp_sum [NPE][int];
      @(negedge clk);
      for (int p = 0; p < NPE; p++) exp_sum[p].delete();
      for (int p = 0; p < NPE; p++) begin
        int n, id [3];
        logic [31:0] rb;
        logic a01, a12;
        n = ($urandom >> 9) % 4;
        th_valid[p] = '0;
        id[0] = ($urandom >> 9) % 4;
        rb = $urandom;
        id[1] = rb[4] ? id[0] : id[0] + 1;
        id[2] = rb[11] ? id[1] : id[1] + 1;
        for (int t = 0; t < NTH; t++) begin
          th_act[p][t] = data_t'($urandom);
          th_wt[p][t]  = data_t'($urandom);
          th_valid[p][t] = (t >= NTH - n);
          th_slot[p][t] = SW'(id[t] / 8);
          th_k[p][t] = KW'(id[t] % 8);
          if (th_valid[p][t])
            exp_sum[p][id[t]] = (exp_sum[p].exists(id[t]) ? exp_sum[p][id[t]] : 0)
                                + int'(th_act[p][t]) * int'(th_wt[p][t]);
        end
        a01 = th_valid[p][0] && th_valid[p][1] && id[0] == id[1];
        a12 = th_valid[p][1] && th_valid[p][2] && id[1] == id[2];
        cfg[p] = (a01 && a12) ? L1_ADDALL : a01 ? L1_ADD01 : a12 ? L1_ADD12 : L1_PASS;
        cfg_seen[int'(cfg[p])]++;
      end
      @(negedge clk);
      th_valid = '0;
      for (int p = 0; p < NPE; p++) begin
        int got [int];
        bit bad;
        bad = 0;
        got.delete();
        for (int t = 0; t < NTH; t++)
          if (l1_tag[p][t]) begin
            int id;
            id = int'(l1_slot[p][t]) * 8 + int'(l1_k[p][t]);
            if (got.exists(id)) bad = 1;
            got[id] = int'(l1_val[p][t]);
          end
        checks++;
        if (got.size() != exp_sum[p].size()) bad = 1;
        foreach (exp_sum[p][id]) if (!got.exists(id) || got[id] != exp_sum[p][id]) bad = 1;
        if (bad) begin failures++; $display("step %0d PE%0d cfg %b: wrong L1 results", i, p + 1, cfg[p]); end
      end
    end
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (cfg_seen[c] == 0) begin failures++; $display("configuration %0d never used", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
