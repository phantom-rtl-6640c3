// thread_mapper: maps the selected multiplications of one TDS column onto the
// three multiplier threads of its PE.
//
// The input map holds at most NTH ones (the TDS guarantees it).  The ones are
// assigned right-aligned, in chunk order and then row order: with n ones they
// go to threads NTH-n .. NTH-1.  Each thread receives an 8-bit activation and
// an 8-bit weight taken from the dense (length-equalised) tiles, i.e. the
// 48 data bits of the mapper word.  The two configuration bits tell the L1
// adder which neighbouring threads belong to the same output chunk:
// 01 = th0+th1, 10 = th1+th2, 11 = all three, 00 = none.  This reproduces the
// mapper words listed for the worked example (000 000 011 -> 2'b10,
// 011 000 010 -> 2'b01, 111 000 000 -> 2'b11).
//
// The mapper of the paper is a table of the 130 maps (of 9 bits) that have at
// most three ones, and one table is shared by the three PEs in time.  Here the
// same function is computed with priority logic, one mapper per PE; that also
// works for L_f = 27 where a table would be far too large.  With the
// intra-core balancer on, the column whose data is used for chunk position k
// is phantom_pkg::orig_col(SEL, k, bal_en) (the "left shift" of the maps).
//
// Besides the data, every thread carries the output-chunk id (block slot and
// chunk position) so the output buffer knows where its product belongs.
// Output registered: one cycle after `map_valid`.
module thread_mapper
  import phantom_pkg::*;
#(
  parameter int LF    = 27,
  parameter int DEPTH = 4,
  parameter int SEL   = 0,
  localparam int SW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int KW   = (LF > 1) ? $clog2(LF) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       bal_en,
  input  logic                       map_valid,
  input  grp_t  [LF-1:0]             map,
  input  logic  [LF-1:0][SW-1:0]     slot,
  input  tile_t [DEPTH-1:0][LF-1:0]  act_buf,
  input  tile_t                      w_tile,
  output logic                       op_valid,
  output logic  [NTH-1:0]            th_valid,
  output data_t [NTH-1:0]            th_act,
  output data_t [NTH-1:0]            th_wt,
  output logic  [NTH-1:0][SW-1:0]    th_slot,
  output logic  [NTH-1:0][KW-1:0]    th_k,
  output l1_cfg_e                    cfg
);

  logic  [NTH-1:0]         v_d;
  data_t [NTH-1:0]         a_d, w_d;
  logic  [NTH-1:0][SW-1:0] s_d;
  logic  [NTH-1:0][KW-1:0] k_d;
  l1_cfg_e                 cfg_d;

  always_comb begin
    int unsigned n, j, t;
    int unsigned kk [NTH];
    int unsigned rr [NTH];
    logic [CW-1:0] c;
    n = 0;
    t = 0;
    c = '0;
    for (int i = 0; i < NTH; i++) begin kk[i] = 0; rr[i] = 0; end
    for (int k = 0; k < LF; k++)
      for (int r = 0; r < K; r++)
        if (map[k][r] && n < NTH) begin
          kk[n] = k;
          rr[n] = r;
          n++;
        end
    v_d = '0; a_d = '0; w_d = '0; s_d = '0; k_d = '0;
    for (j = 0; j < NTH; j++) begin
      if (j < n) begin
        t = NTH - n + j;
        c = orig_col(SEL, kk[j], bal_en);
        v_d[t] = 1'b1;
        a_d[t] = act_buf[slot[kk[j]]][kk[j]][c][rr[j]];
        w_d[t] = w_tile[c][rr[j]];
        s_d[t] = slot[kk[j]];
        k_d[t] = KW'(kk[j]);
      end
    end
    // L1 configuration: which neighbouring threads share an output chunk
    cfg_d = L1_PASS;
    if (n == 3) begin
      if (kk[0] == kk[1] && kk[1] == kk[2]) cfg_d = L1_ADDALL;
      else if (kk[0] == kk[1])             cfg_d = L1_ADD01;
      else if (kk[1] == kk[2])             cfg_d = L1_ADD12;
    end else if (n == 2) begin
      if (kk[0] == kk[1])                  cfg_d = L1_ADD12;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_valid <= 1'b0;
      th_valid <= '0;
      th_act   <= '0;
      th_wt    <= '0;
      th_slot  <= '0;
      th_k     <= '0;
      cfg      <= L1_PASS;
    end else begin
      op_valid <= map_valid && (v_d != '0);
      th_valid <= map_valid ? v_d : '0;
      th_act   <= a_d;
      th_wt    <= w_d;
      th_slot  <= s_d;
      th_k     <= k_d;
      cfg      <= cfg_d;
    end
  end

endmodule
