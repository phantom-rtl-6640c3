// tb_tds_column: checks the out-of-order top-down selector.
//
// Part 1 is the worked example of three chunks and two blocks: for each of
// the three filter columns the selector must finish in exactly three
// iterations and produce the maps of the example (map11 = 011 000 010,
// map12 = 001 011 000, map13 = 000 011 001, and likewise for columns 2 and
// 3).  Part 2 feeds random streams and compares every cycle with a reference
// model kept in the testbench (queues per chunk, the same P1 rule), and checks
// that no map ever carries more ones than there are threads and that every
// written entry leaves exactly once.
module tb_tds_column;
  import phantom_pkg::*;
  localparam int LF = 3, DEPTH = 4, SW = 2;
  logic clk = 0, rst_n = 0, wr = 0, map_valid, empty;
  grp_t [LF-1:0] wr_grp, map;
  logic [LF-1:0] taken;
  logic [LF-1:0][SW-1:0] slot;
  int checks = 0, failures = 0;

  tds_column #(.LF(LF), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic grp_t s2g(input string s);  // "011" -> rows 1 and 2
    grp_t g;
    for (int r = 0; r < K; r++) g[r] = (s[r] == "1");
    return g;
  endfunction

  string lamstr [2][LF][K] = '{
    '{'{"011","010","110"}, '{"011","110","100"}, '{"010","100","010"}},
    '{'{"001","010","100"}, '{"011","100","100"}, '{"001","100","110"}}};
  string expmap [K][3] = '{
    '{"011000010", "001011000", "000011001"},
    '{"010110000", "010100100", "000000100"},
    '{"110100000", "100100010", "000000110"}};

  // reference model
  grp_t q [LF][$];
  int   qslot [LF][$];
  int   wslot = 0;
  int   p1 = 0;
  bit   model_on = 0;
  grp_t [LF-1:0] e_map;
  logic [LF-1:0] e_taken;
  int   e_slot [LF];
  int   written = 0, consumed = 0;

  function automatic int pc(input grp_t g);
    return $countones(g);
  endfunction

  always @(posedge clk) begin
    if (model_on) begin
      int sum, np1;
      bit found;
      e_map = '0; e_taken = '0; sum = 0;
      if (q[p1].size() > 0) begin
        e_taken[p1] = 1; sum = pc(q[p1][0]);
      end
      for (int k = 0; k < LF; k++)
        if (k != p1 && q[k].size() > 0 && sum + pc(q[k][0]) <= NTH) begin
          e_taken[k] = 1; sum += pc(q[k][0]);
        end
      np1 = 0; found = 0;
      for (int k = 0; k < LF; k++)
        if (!found && q[k].size() > 0 && !e_taken[k] && pc(q[k][0]) != 0) begin
          np1 = k; found = 1;
        end
      for (int k = 0; k < LF; k++)
        if (e_taken[k]) begin
          e_map[k] = q[k].pop_front();
          e_slot[k] = qslot[k].pop_front();
          consumed++;
        end
      p1 = np1;
      if (wr) begin
        for (int k = 0; k < LF; k++) begin q[k].push_back(wr_grp[k]); qslot[k].push_back(wslot); end
        wslot = (wslot + 1) % DEPTH;
        written += LF;
      end
      #1;
      checks++;
      if (taken !== e_taken || (|e_taken && map !== e_map)) begin
        failures++;
        $display("%0t: taken %b map %b expected %b %b", $time, taken, map, e_taken, e_map);
      end
      for (int k = 0; k < LF; k++)
        if (e_taken[k] && int'(slot[k]) != e_slot[k]) begin
          failures++; $display("slot of chunk %0d is %0d, expected %0d", k, slot[k], e_slot[k]);
        end
      if (pc(map[0]) + pc(map[1]) + pc(map[2]) > NTH) begin
        failures++; $display("map %b has more ones than threads", map);
      end
    end
  end

  // maps seen during the example
  grp_t [LF-1:0] seen [$];
  always @(posedge clk) begin
    #1;
    if (!model_on && map_valid) seen.push_back(map);
  end

  initial begin
    int cyc;
    wr_grp = '0;
    // ---------------- part 1: the worked example, one column at a time
    for (int c = 0; c < K; c++) begin
      seen.delete();
      rst_n = 0;
      repeat (2) @(posedge clk);
      rst_n = 1;
      for (int b = 0; b < 2; b++) begin
        @(negedge clk);
        wr = 1;
        for (int k = 0; k < LF; k++) wr_grp[k] = s2g(lamstr[b][k][c]);
      end
      @(negedge clk);
      wr = 0;
      repeat (8) @(posedge clk);
      cyc = seen.size();
      checks++;
      if (cyc != 3) begin failures++; $display("column %0d took %0d iterations, expected 3", c + 1, cyc); end
      for (int it = 0; it < 3 && it < seen.size(); it++)
        for (int k = 0; k < LF; k++) begin
          checks++;
          if (seen[it][k] !== s2g(expmap[c][it].substr(3 * k, 3 * k + 2))) begin
            failures++;
            $display("map%0d%0d chunk %0d = %b, expected %s", c + 1, it + 1, k, seen[it][k],
                     expmap[c][it].substr(3 * k, 3 * k + 2));
          end
        end
    end
    // ---------------- part 2: random streams against the model
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    model_on = 1;
    for (int i = 0; i < 3000; i++) begin
      int maxq;
      @(negedge clk);
      maxq = 0;
      for (int k = 0; k < LF; k++) if (q[k].size() > maxq) maxq = q[k].size();
      wr = (maxq < DEPTH) && (($urandom >> 9) % 3 != 0);
      for (int k = 0; k < LF; k++) wr_grp[k] = grp_t'($urandom);
    end
    @(negedge clk);
    wr = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (consumed != written || !empty) begin
      failures++; $display("consumed %0d of %0d entries, empty=%0b", consumed, written, empty);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
