// tb_thread_mapper: checks the thread mapper of PE 1 and PE 2 (two
// instances) over every 9-bit map with at most three ones: there are 130 such
// maps, which the testbench counts.  For each map, with random tiles, slots
// and balancing on or off, it checks which thread carries which activation
// and weight (ones right-aligned, chunk then row order), the chunk ids and the
// two configuration bits, worked out here from which neighbouring threads
// share a chunk.  The configurations listed in the mapper example are checked
// by name: 000 000 001 -> 00, 000 000 011 -> 10, 011 000 010 -> 01,
// 111 000 000 -> 11.  Latency: one cycle.
module tb_thread_mapper;
  import phantom_pkg::*;
  localparam int LF = 3, DEPTH = 4, SW = 2, KW = 2;
  logic clk = 0, rst_n = 0, bal_en = 0, map_valid = 0;
  grp_t  [LF-1:0]            map;
  logic  [LF-1:0][SW-1:0]    slot;
  tile_t [DEPTH-1:0][LF-1:0] act_buf;
  tile_t                     w_tile;
  logic                      op_valid [2];
  logic  [NTH-1:0]           th_valid [2];
  data_t [NTH-1:0]           th_act [2], th_wt [2];
  logic  [NTH-1:0][SW-1:0]   th_slot [2];
  logic  [NTH-1:0][KW-1:0]   th_k [2];
  l1_cfg_e                   cfg [2];
  int checks = 0, failures = 0;

  for (genvar p = 0; p < 2; p++) begin : g_pe
    thread_mapper #(.LF(LF), .DEPTH(DEPTH), .SEL(p)) u_tm (
      .clk, .rst_n, .bal_en, .map_valid, .map, .slot, .act_buf, .w_tile,
      .op_valid(op_valid[p]), .th_valid(th_valid[p]), .th_act(th_act[p]), .th_wt(th_wt[p]),
      .th_slot(th_slot[p]), .th_k(th_k[p]), .cfg(cfg[p]));
  end

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [8:0] s2m(input string s);  // "011000010", left bit = chunk 0 row 0
    logic [8:0] m;
    for (int i = 0; i < 9; i++) m[i] = (s[i] == "1");
    return m;
  endfunction

  string   ex_map [4] = '{"000000001", "000000011", "011000010", "111000000"};
  l1_cfg_e ex_cfg [4] = '{L1_PASS, L1_ADD12, L1_ADD01, L1_ADDALL};

  initial begin
    int nmaps;
    act_buf = '0; w_tile = '0; map = '0; slot = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    nmaps = 0;
    for (int rep = 0; rep < 4; rep++)
      for (int mm = 0; mm < 512; mm++) begin
        logic [8:0] m9;
        int n, kk [3], rr [3];
        logic [2:0] ev;
        m9 = 9'(mm);
        if ($countones(m9) > 3) continue;
        if (rep == 0) nmaps++;
        @(negedge clk);
        bal_en = rep[0];
        for (int k = 0; k < LF; k++) begin
          map[k] = m9[3 * k +: 3];
          slot[k] = SW'($urandom);
        end
        for (int s = 0; s < DEPTH; s++)
          for (int k = 0; k < LF; k++)
            for (int c = 0; c < K; c++)
              for (int r = 0; r < K; r++) act_buf[s][k][c][r] = data_t'($urandom);
        for (int c = 0; c < K; c++) for (int r = 0; r < K; r++) w_tile[c][r] = data_t'($urandom);
        map_valid = 1;
        // reference
        n = 0;
        for (int i = 0; i < 9; i++) if (m9[i]) begin kk[n] = i / 3; rr[n] = i % 3; n++; end
        @(negedge clk);
        map_valid = 0;
        for (int p = 0; p < 2; p++) begin
          logic a01, a12;
          l1_cfg_e ec;
          int tk [3];
          ev = '0;
          for (int j = 0; j < n; j++) begin
            int t, c;
            t = 3 - n + j;
            tk[t] = kk[j];
            ev[t] = 1;
            c = bal_en ? (p + 3 - kk[j] % 3) % 3 : p;
            checks++;
            if (th_act[p][t] !== act_buf[slot[kk[j]]][kk[j]][c][rr[j]] || th_wt[p][t] !== w_tile[c][rr[j]]
                || th_slot[p][t] !== slot[kk[j]] || int'(th_k[p][t]) != kk[j]) begin
              failures++;
              $display("PE%0d map %b thread %0d: operands or chunk id wrong", p + 1, m9, t);
            end
          end
          a01 = ev[0] && ev[1] && tk[0] == tk[1];
          a12 = ev[1] && ev[2] && tk[1] == tk[2];
          ec = (a01 && a12) ? L1_ADDALL : a01 ? L1_ADD01 : a12 ? L1_ADD12 : L1_PASS;
          checks++;
          if (th_valid[p] !== ev || cfg[p] !== ec || op_valid[p] !== (n > 0)) begin
            failures++;
            $display("PE%0d map %b: valid %b cfg %b, expected %b %b", p + 1, m9, th_valid[p], cfg[p], ev, ec);
          end
          for (int e = 0; e < 4; e++)
            if (m9 == s2m(ex_map[e])) begin
              checks++;
              if (cfg[p] !== ex_cfg[e]) begin
                failures++; $display("example map %s: cfg %b expected %b", ex_map[e], cfg[p], ex_cfg[e]);
              end
            end
        end
      end
    checks++;
    if (nmaps != 130) begin failures++; $display("%0d maps with at most three ones, expected 130", nmaps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
