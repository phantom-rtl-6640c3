// tb_phantom_core: self-checking test of one Phantom core at L_f = 3.
//
// Part 1 replays the worked example: six chunks whose LAM outputs are
//   LAM1..3 = 011,010,110 / 011,110,100 / 010,100,010   (first block)
//   LAM1..3 = 001,010,100 / 011,100,100 / 001,100,110   (second block)
// (an all-ones filter mask makes the chunk masks the LAM outputs).  The three
// column selectors must need exactly three cycles, and the nine maps must be
// map11..map33 of the example.  Part 2 streams random sparse blocks, with and
// without intra-core balancing, back to back so the input stalls, and checks
// every raw sum and every encoded output against a direct 3x3 dot product.
module tb_phantom_core;
  import phantom_pkg::*;

  localparam int LF = 3;
  localparam int DEPTH = 4;
  localparam int NW = $clog2(LF + 1);

  logic clk = 0, rst_n = 0, bal_en = 0;
  logic w_load = 0;
  mask_t w_mask;
  packed_t w_nz;
  logic in_valid = 0, in_ready;
  mask_t [LF-1:0] ia_mask;
  packed_t [LF-1:0] ia_nz;
  logic pre_valid, out_valid, idle;
  acc_t [LF-1:0] out_pre, out_dense, out_packed;
  logic [LF-1:0] out_lamr, out_mask;
  logic [NW-1:0] out_count;

  int checks = 0, failures = 0;

  phantom_core #(.LF(LF), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic mask_t str2mask(input string s);  // "011010110"
    mask_t m;
    for (int c = 0; c < K; c++)
      for (int r = 0; r < K; r++) m[c][r] = (s[3*c + r] == "1");
    return m;
  endfunction

  function automatic void pack(input tile_t t, output mask_t m, output packed_t nz);
    int n = 0;
    nz = '0;
    for (int c = 0; c < K; c++)
      for (int r = 0; r < K; r++) begin
        m[c][r] = (t[c][r] != 0);
        if (t[c][r] != 0) begin nz[n] = t[c][r]; n++; end
      end
  endfunction

  // xorshift generator for the sparsity pattern
  int unsigned xs_state = 32'h2545f491;
  function automatic int unsigned xs();
    xs_state ^= xs_state << 13;
    xs_state ^= xs_state >> 17;
    xs_state ^= xs_state << 5;
    return xs_state;
  endfunction

  function automatic tile_t rand_tile(input int pct);
    tile_t t;
    for (int c = 0; c < K; c++)
      for (int r = 0; r < K; r++)
        if ((xs() % 100) < pct) begin
          t[c][r] = data_t'(xs() >> 8);
          if (t[c][r] == 0) t[c][r] = 8'sd1;
        end else t[c][r] = '0;
    return t;
  endfunction

  // expected blocks
  typedef acc_t [LF-1:0] blk_t;
  typedef logic [LF-1:0] lr_t;
  blk_t exp_pre [$];
  lr_t  exp_lamr [$];
  tile_t wt;

  task automatic load_filter(input tile_t t);
    mask_t m; packed_t nz;
    pack(t, m, nz);
    wt = t;
    @(negedge clk);
    w_mask = m; w_nz = nz; w_load = 1;
    @(negedge clk);
    w_load = 0;
  endtask

  task automatic send_block(input tile_t ta [LF]);
    blk_t  e;
    lr_t   lr;
    mask_t mw;
    packed_t dummy;
    pack(wt, mw, dummy);
    for (int k = 0; k < LF; k++) begin
      mask_t m; packed_t nz;
      pack(ta[k], m, nz);
      ia_mask[k] = m; ia_nz[k] = nz;
      e[k] = '0;
      for (int c = 0; c < K; c++)
        for (int r = 0; r < K; r++) e[k] += acc_t'(wt[c][r] * ta[k][c][r]);
      lr[k] = ((m & mw) != '0);
    end
    exp_pre.push_back(e);
    exp_lamr.push_back(lr);
    in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  // checker
  int blocks_seen = 0, stalls = 0;
  blk_t pend_pre [$];
  lr_t  pend_lr [$];
  always @(posedge clk) begin
    if (in_valid && !in_ready) stalls++;
    if (pre_valid) begin
      blk_t e;
      lr_t  lr;
      if (exp_pre.size() == 0) begin
        failures++; $display("unexpected block");
      end else begin
        e = exp_pre.pop_front();
        lr = exp_lamr.pop_front();
        for (int k = 0; k < LF; k++) begin
          checks++;
          if (out_pre[k] !== e[k] || out_lamr[k] !== lr[k]) begin
            failures++;
            $display("block %0d chunk %0d: sum %0d lamr %0b, expected %0d %0b", blocks_seen, k, out_pre[k], out_lamr[k], e[k], lr[k]);
          end
        end
        pend_pre.push_back(e);
        pend_lr.push_back(lr);
        blocks_seen++;
      end
    end
    if (out_valid && pend_pre.size() > 0) begin
      blk_t e;
      lr_t  lr;
      int n;
      n = 0;
      e = pend_pre.pop_front();
      lr = pend_lr.pop_front();
      for (int k = 0; k < LF; k++) begin
        logic m;
        m = lr[k] && ($signed(e[k]) >= 0);
        checks++;
        if (out_mask[k] !== m || out_dense[k] !== (m ? e[k] : 0)) begin
          failures++; $display("encode chunk %0d mask %0b val %0d", k, out_mask[k], out_dense[k]);
        end
        if (m) begin
          checks++;
          if (out_packed[n] !== e[k]) begin failures++; $display("packed %0d wrong", n); end
          n++;
        end
      end
      checks++;
      if (int'(out_count) != n) begin failures++; $display("count %0d exp %0d", out_count, n); end
    end
  end

  // selector activity during the worked example
  int sel_cycles = 0;
  bit count_sel = 0;
  grp_t [LF-1:0] maps [K][$];
  always @(posedge clk) begin
    if (count_sel && (dut.g_col[0].u_tds.map_valid || dut.g_col[1].u_tds.map_valid || dut.g_col[2].u_tds.map_valid)) begin
      sel_cycles++;
      maps[0].push_back(dut.g_col[0].u_tds.map);
      maps[1].push_back(dut.g_col[1].u_tds.map);
      maps[2].push_back(dut.g_col[2].u_tds.map);
    end
  end

  string lamstr [2][LF][K] = '{
    '{'{"011","010","110"}, '{"011","110","100"}, '{"010","100","010"}},
    '{'{"001","010","100"}, '{"011","100","100"}, '{"001","100","110"}}};
  // expected maps [column][iteration] as in the example (map_xy: column x, iteration y)
  string expmap [K][3] = '{
    '{"011000010", "001011000", "000011001"},
    '{"010110000", "010100100", "000000100"},
    '{"110100000", "100100010", "000000110"}};

  initial begin
    tile_t ones, ta [LF];
    ia_mask = '0; ia_nz = '0; w_mask = '0; w_nz = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- part 1: the worked example
    for (int c = 0; c < K; c++) for (int r = 0; r < K; r++) ones[c][r] = data_t'(c * 3 + r + 1);
    load_filter(ones);
    count_sel = 1;
    for (int b = 0; b < 2; b++) begin
      for (int k = 0; k < LF; k++) begin
        mask_t m;
        m = str2mask({lamstr[b][k][0], lamstr[b][k][1], lamstr[b][k][2]});
        for (int c = 0; c < K; c++) for (int r = 0; r < K; r++)
          ta[k][c][r] = m[c][r] ? data_t'(10 * b + 3 * k + c + r + 1) : '0;
      end
      send_block(ta);
    end
    while (!idle) @(posedge clk);
    repeat (3) @(posedge clk);
    count_sel = 0;
    checks++;
    if (sel_cycles != 3) begin failures++; $display("selectors took %0d cycles, expected 3", sel_cycles); end
    for (int c = 0; c < K; c++)
      for (int it = 0; it < 3; it++) begin
        mask_t em;
        grp_t [LF-1:0] got;
        em = str2mask(expmap[c][it]);
        got = (it < maps[c].size()) ? maps[c][it] : '0;
        checks++;
        for (int k = 0; k < LF; k++)
          if (got[k] != em[k]) begin
            failures++;
            $display("map%0d%0d chunk %0d = %b, expected %b", c + 1, it + 1, k, got[k], em[k]);
          end
      end
    // ---------------- part 2: random streams
    for (int run = 0; run < 8; run++) begin
      bal_en = run[0];
      load_filter(rand_tile(20 + 10 * run));
      for (int b = 0; b < 12; b++) begin
        for (int k = 0; k < LF; k++) ta[k] = rand_tile(30 + 8 * run);
        send_block(ta);
      end
      while (!idle) @(posedge clk);
      repeat (3) @(posedge clk);
    end
    checks++;
    if (exp_pre.size() != 0) begin failures++; $display("%0d blocks missing", exp_pre.size()); end
    checks++;
    if (stalls == 0) begin failures++; $display("input never stalled"); end
    $display("blocks=%0d stalls=%0d", blocks_seen, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
