// tb_output_buffer: checks the FIFOs and the L2 accumulation.  Rounds of four
// blocks (all slots in flight) are built from random column contributions:
// every (column, block, chunk) either sends one tagged L1 value on a random
// lane of that column's PE or is reported as an all-zero entry.  The events
// are shuffled and delivered over random cycles, up to three lanes per PE per
// cycle.  Each block must leave once, in slot order, with the sum of its
// contributions, and never before its last contribution arrived.  Partial
// outputs (some but not all columns in) must be observed.
module tb_output_buffer;
  import phantom_pkg::*;
  localparam int LF = 3, DEPTH = 4, SW = 2, KW = 2;
  logic clk = 0, rst_n = 0;
  logic  [NPE-1:0][NTH-1:0]          l1_tag;
  acc_t  [NPE-1:0][NTH-1:0]          l1_val;
  logic  [NPE-1:0][NTH-1:0][SW-1:0]  l1_slot;
  logic  [NPE-1:0][NTH-1:0][KW-1:0]  l1_k;
  logic  [NPE-1:0][LF-1:0]           zero_taken;
  logic  [NPE-1:0][LF-1:0][SW-1:0]   zero_slot;
  logic                              blk_valid, partial_seen;
  logic  [SW-1:0]                    blk_slot;
  acc_t  [LF-1:0]                    blk_val;
  int checks = 0, failures = 0;

  output_buffer #(.LF(LF), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int p, s, k, v; bit z; } ev_t;
  int exp_val [DEPTH][LF];
  int remaining [DEPTH];
  int next_out = 0, n_out = 0, n_partial = 0;

  always @(posedge clk) begin
    #1;
    if (partial_seen) n_partial++;
    if (blk_valid) begin
      checks++;
      if (int'(blk_slot) != next_out || remaining[next_out] != 0) begin
        failures++;
        $display("block slot %0d out (expected %0d, %0d contributions missing)", blk_slot, next_out,
                 remaining[next_out]);
      end
      for (int k = 0; k < LF; k++)
        if (int'(blk_val[k]) != exp_val[next_out][k]) begin
          failures++; $display("slot %0d chunk %0d = %0d expected %0d", next_out, k, blk_val[k], exp_val[next_out][k]);
        end
      remaining[next_out] = -1;
      next_out = (next_out + 1) % DEPTH;
      n_out++;
    end
  end

  initial begin
    ev_t evs [$];
    l1_tag = '0; l1_val = '0; l1_slot = '0; l1_k = '0; zero_taken = '0; zero_slot = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 100; round++) begin
      evs.delete();
      for (int s = 0; s < DEPTH; s++) begin
        remaining[s] = NPE * LF;
        for (int k = 0; k < LF; k++) begin
          exp_val[s][k] = 0;
          for (int p = 0; p < NPE; p++) begin
            ev_t e;
            e.p = p; e.s = s; e.k = k;
            e.z = (($urandom >> 9) % 4) == 0;
            e.v = e.z ? 0 : int'(($urandom >> 9) % 20001) - 10000;
            exp_val[s][k] += e.v;
            evs.push_back(e);
          end
        end
      end
      evs.shuffle();
      while (evs.size() > 0) begin
        int used [NPE];
        ev_t left [$];
        @(negedge clk);
        l1_tag = '0; zero_taken = '0;
        used = '{default: 0};
        left.delete();
        foreach (evs[i]) begin
          ev_t e;
          e = evs[i];
          if ((($urandom >> 9) % 2) == 0) left.push_back(e);
          else if (e.z) begin
            if (zero_taken[e.p][e.k]) left.push_back(e);
            else begin
              zero_taken[e.p][e.k] = 1; zero_slot[e.p][e.k] = SW'(e.s); remaining[e.s]--;
            end
          end else if (used[e.p] < NTH) begin
            int t;
            t = used[e.p]++;
            l1_tag[e.p][t] = 1; l1_val[e.p][t] = acc_t'(e.v);
            l1_slot[e.p][t] = SW'(e.s); l1_k[e.p][t] = KW'(e.k);
            remaining[e.s]--;
          end else left.push_back(e);
        end
        evs = left;
      end
      @(negedge clk);
      l1_tag = '0; zero_taken = '0;
      repeat (12) @(negedge clk);
      checks++;
      if (n_out != 4 * (round + 1)) begin
        failures++; $display("round %0d: %0d blocks out, expected %0d", round, n_out, 4 * (round + 1));
        n_out = 4 * (round + 1);
      end
    end
    checks++;
    if (n_partial == 0) begin failures++; $display("no partial output seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
