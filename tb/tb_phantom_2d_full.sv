// tb_phantom_2d_full: end-to-end test of the Phantom-2D accelerator at the default size (7 x 4 cores, L_f = 27).
//
// The testbench plays host and scheduler.  It writes and reads back words of
// the input and weight SRAMs, then runs four phases, one per mode
// combination: (pass, intra on, inter on), (sum, intra off, inter off),
// (pass, intra off, inter on), (sum, intra on, inter on).  In every phase it
// offers C random filters of different densities, checks the column
// assignment of the inter-core balancer against the order in which it saw
// the columns go idle (densest filter to the first), streams NB blocks of
// L_f random sparse chunks into every core with random gaps, keeping
// `in_valid` up while a core is not ready, and finally reads every row's
// output bank through the host port.  Each word is compared with a reference
// worked out here: per column the dot products of the assigned filter with
// every chunk, the LAM bits, then in pass mode every lane encoded on its own
// (ReLU, mask, compaction), in sum mode the columns added, LAM bits ORed and
// encoded on lane 0.
//
// Mechanisms counted, each must happen at least once: stalls (in_valid while
// not ready), blocks with intra-core balancing on and off, filters moved to
// another column by the inter-core balancer, column-done events, L3 sum and
// pass results, partial outputs in an output buffer, outputs removed by ReLU,
// SRAM writes and reads.
module tb_phantom_2d_full;
  import phantom_pkg::*;
  localparam int R = 7, C = 4, LF = 27, NB = 3;
  localparam int IW  = (C > 1) ? $clog2(C) : 1;
  localparam int NW  = $clog2(LF + 1);
  localparam int TW  = K * K + K * K * DW;
  localparam int LW  = 1 + LF + LF * AW + NW;
  localparam int OW  = C * LW;
  localparam int RW  = (R > 1) ? $clog2(R) : 1;
  localparam int IAW = 12, WAW = 10, OAW = 6;

  logic clk = 0, rst_n = 0;
  logic bal_en = 0, inter_en = 0, sum_mode = 0;
  logic f_batch_valid = 0, f_assign_valid;
  mask_t   [C-1:0] f_mask;
  packed_t [C-1:0] f_nz;
  logic [C-1:0][IW-1:0] f_assign_idx;
  logic    [R-1:0][C-1:0]         in_valid, in_ready;
  mask_t   [R-1:0][C-1:0][LF-1:0] ia_mask;
  packed_t [R-1:0][C-1:0][LF-1:0] ia_nz;
  logic [C-1:0] col_idle;
  logic host_in_we = 0, sch_in_re = 0, host_w_we = 0, sch_w_re = 0, host_out_re = 0;
  logic [IAW-1:0] host_in_waddr, sch_in_raddr;
  logic [WAW-1:0] host_w_waddr, sch_w_raddr;
  logic [TW-1:0]  host_in_wdata, sch_in_rdata, host_w_wdata, sch_w_rdata;
  logic [RW-1:0]  host_out_row;
  logic [OAW-1:0] host_out_raddr;
  logic [OW-1:0]  host_out_rdata;
  logic [R-1:0][OAW:0] out_words;
  int checks = 0, failures = 0;

  phantom_2d dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ helpers
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

  // ------------------------------------------------------ mechanism counters
  int n_stall = 0, n_bal_on = 0, n_bal_off = 0, n_moved = 0, n_col_done = 0;
  int n_sum = 0, n_pass = 0, n_partial = 0, n_relu = 0, n_sram_w = 0, n_sram_r = 0;

  // order in which columns became idle since the last filter batch
  int done_order [$];
  logic [C-1:0] idle_q = '1;
  always @(posedge clk) begin
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        if (in_valid[r][c] && !in_ready[r][c]) n_stall++;
    for (int c = 0; c < C; c++)
      if (col_idle[c] && !idle_q[c]) begin done_order.push_back(c); n_col_done++; end
    idle_q <= col_idle;
  end
  for (genvar r = 0; r < R; r++) begin : g_mon_r
    for (genvar c = 0; c < C; c++) begin : g_mon_c
      always @(posedge clk) if (dut.g_row[r].g_col[c].u_core.u_ob.partial_seen) n_partial++;
    end
  end

  // ---------------------------------------------------------- reference
  tile_t filt [C];                       // filters of the current batch
  int    col_f [C];                      // filter held by each column
  tile_t chunks [R][C][NB][LF];          // data streamed in this phase

  int n_streams_done = 0;

  task automatic send_stream(input int r, input int c);
    for (int b = 0; b < NB; b++) begin
      repeat (($urandom >> 9) % 3) @(negedge clk);
      for (int k = 0; k < LF; k++) begin
        mask_t m; packed_t nz;
        pack(chunks[r][c][b][k], m, nz);
        ia_mask[r][c][k] = m;
        ia_nz[r][c][k] = nz;
      end
      in_valid[r][c] = 1;
      @(posedge clk);
      while (!in_ready[r][c]) @(posedge clk);
      @(negedge clk);
      in_valid[r][c] = 0;
      if (bal_en) n_bal_on++; else n_bal_off++;
    end
  endtask

  task automatic run_phase(input int ph, input bit s_mode, input bit b_en, input bit i_en);
    int dens [C], rank [C], order [$], exp_idx [C];
    logic [OAW:0] base [R];
    bit rep [C];
    // filter batch, densities 15% .. 90%
    sum_mode = s_mode; bal_en = b_en; inter_en = i_en;
    for (int i = 0; i < C; i++) filt[i] = rand_tile(15 + ((($urandom >> 9) % 4) * 25));
    @(negedge clk);
    for (int i = 0; i < C; i++) begin
      pack(filt[i], f_mask[i], f_nz[i]);
      dens[i] = $countones(f_mask[i]);
    end
    for (int i = 0; i < C; i++) begin
      rank[i] = 0;
      for (int j = 0; j < C; j++) if (dens[j] > dens[i] || (dens[j] == dens[i] && j < i)) rank[i]++;
    end
    rep = '{default: 0};
    foreach (done_order[i]) if (!rep[done_order[i]]) begin order.push_back(done_order[i]); rep[done_order[i]] = 1; end
    for (int c = 0; c < C; c++) if (!rep[c]) order.push_back(c);
    for (int i = 0; i < C; i++) exp_idx[i_en ? order[rank[i]] : i] = i;
    f_batch_valid = 1;
    @(negedge clk);
    f_batch_valid = 0;
    done_order.delete();
    checks++;
    if (!f_assign_valid) begin failures++; $display("phase %0d: no filter assignment", ph); end
    for (int c = 0; c < C; c++) begin
      col_f[c] = int'(f_assign_idx[c]);
      checks++;
      if (col_f[c] != exp_idx[c]) begin
        failures++; $display("phase %0d: column %0d got filter %0d, expected %0d", ph, c, col_f[c], exp_idx[c]);
      end
      if (col_f[c] != c) n_moved++;
    end
    // data
    for (int r = 0; r < R; r++) begin
      base[r] = out_words[r];
      for (int c = 0; c < C; c++)
        for (int b = 0; b < NB; b++)
          for (int k = 0; k < LF; k++) chunks[r][c][b][k] = rand_tile(10 + (($urandom >> 9) % 80));
    end
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        fork
          automatic int rr = r, cc = c;
          begin
            send_stream(rr, cc);
            n_streams_done++;
          end
        join_none
    wait (n_streams_done == R * C);
    n_streams_done = 0;
    @(negedge clk);
    while (col_idle != '1) @(negedge clk);
    repeat (6) @(negedge clk);
    // read back and compare
    for (int r = 0; r < R; r++) begin
      checks++;
      if (int'(out_words[r] - base[r]) != NB) begin
        failures++; $display("phase %0d row %0d: %0d output words, expected %0d", ph, r, out_words[r] - base[r], NB);
      end
      for (int b = 0; b < NB; b++) begin
        int pre [C][LF];
        logic [LF-1:0] lr [C];
        int nlane;
        for (int c = 0; c < C; c++) begin
          mask_t mw, mi;
          packed_t d;
          pack(filt[col_f[c]], mw, d);
          for (int k = 0; k < LF; k++) begin
            pre[c][k] = 0;
            for (int x = 0; x < K; x++)
              for (int y = 0; y < K; y++) pre[c][k] += int'(filt[col_f[c]][x][y]) * int'(chunks[r][c][b][k][x][y]);
            pack(chunks[r][c][b][k], mi, d);
            lr[c][k] = ((mw & mi) != '0);
          end
        end
        if (s_mode) begin
          for (int k = 0; k < LF; k++) begin
            for (int c = 1; c < C; c++) pre[0][k] += pre[c][k];
            for (int c = 1; c < C; c++) lr[0][k] |= lr[c][k];
          end
          nlane = 1;
        end else nlane = C;
        @(negedge clk);
        host_out_re = 1; host_out_row = RW'(r); host_out_raddr = OAW'(base[r] + b);
        @(negedge clk);
        host_out_re = 0;
        n_sram_r++;
        for (int c = 0; c < C; c++) begin
          logic [LW-1:0] lane;
          logic [LF-1:0] em;
          int n;
          lane = host_out_rdata[c * LW +: LW];
          checks++;
          if (lane[LW-1] != (c < nlane)) begin
            failures++; $display("phase %0d row %0d block %0d lane %0d valid %0b", ph, r, b, c, lane[LW-1]);
          end
          if (c >= nlane) continue;
          n = 0;
          for (int k = 0; k < LF; k++) begin
            em[k] = lr[c][k] && pre[c][k] >= 0;
            if (lr[c][k] && pre[c][k] < 0) n_relu++;
            if (em[k]) begin
              checks++;
              if (lane[NW + n * AW +: AW] !== AW'(pre[c][k])) begin
                failures++; $display("phase %0d row %0d block %0d lane %0d output %0d wrong", ph, r, b, c, k);
              end
              n++;
            end
          end
          checks++;
          if (lane[NW + LF * AW +: LF] !== em || int'(lane[NW-1:0]) != n) begin
            failures++;
            $display("phase %0d row %0d block %0d lane %0d: mask %b count %0d, expected %b %0d", ph, r, b, c,
                     lane[NW + LF * AW +: LF], lane[NW-1:0], em, n);
          end
        end
        if (s_mode) n_sum++; else n_pass++;
      end
    end
  endtask

  // ---------------------------------------------------------------- main
  initial begin
    logic [TW-1:0] wv [4];
    in_valid = '0; ia_mask = '0; ia_nz = '0; f_mask = '0; f_nz = '0;
    host_in_waddr = '0; host_in_wdata = '0; sch_in_raddr = '0;
    host_w_waddr = '0; host_w_wdata = '0; sch_w_raddr = '0;
    host_out_row = '0; host_out_raddr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // input and weight SRAMs: host writes, scheduler port reads back
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      wv[i] = {$urandom, $urandom, $urandom};
      host_in_we = 1; host_in_waddr = IAW'(i * 97); host_in_wdata = wv[i];
      host_w_we = 1; host_w_waddr = WAW'(i * 31); host_w_wdata = ~wv[i];
      n_sram_w++;
    end
    @(negedge clk);
    host_in_we = 0; host_w_we = 0;
    for (int i = 0; i < 4; i++) begin
      sch_in_re = 1; sch_in_raddr = IAW'(i * 97);
      sch_w_re = 1; sch_w_raddr = WAW'(i * 31);
      @(negedge clk);
      sch_in_re = 0; sch_w_re = 0;
      checks++;
      if (sch_in_rdata !== wv[i] || sch_w_rdata !== ~wv[i]) begin failures++; $display("SRAM word %0d wrong", i); end
      n_sram_r++;
    end
    // compute phases
    run_phase(0, 0, 1, 1);
    run_phase(1, 1, 0, 0);
    run_phase(2, 0, 0, 1);
    run_phase(3, 1, 1, 1);
    // every mechanism must have happened
    begin
      string nm [10] = '{"stall", "intra-core balancing on", "intra-core balancing off",
                         "inter-core reassignment", "column done", "L3 sum", "L3 pass",
                         "partial output", "ReLU removal", "SRAM write"};
      int    ct [10];
      ct = '{n_stall, n_bal_on, n_bal_off, n_moved, n_col_done, n_sum, n_pass, n_partial, n_relu, n_sram_w};
      for (int i = 0; i < 10; i++) begin
        $display("%s: %0d", nm[i], ct[i]);
        checks++;
        if (ct[i] == 0) begin failures++; $display("mechanism never exercised: %s", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
