// phantom_pkg: types and constants shared by the Phantom core and the
// Phantom-2D array.
//
// A 3x3 filter and a 3x3 input chunk are handled column by column.  A sparse
// mask of one 3x3 tile is stored as K column groups of K bits each:
// mask[c][r] is the bit of filter column c, row r.  In the bit strings used in
// the documentation ("011 000 010") the left group is column 0 and, inside a
// group, the left bit is row 0.  Dense tile data uses the same [c][r] order.
//
// The numbers that come from the description of the design are K = 3 (3x3
// tiles, and therefore 3 column selectors / PEs), 3 multiplier threads per PE,
// 8-bit activations and weights, a 7 x 4 core matrix and L_f = 27.  Signed
// data, the 24-bit accumulator width and the in-flight depth of 4 blocks are
// choices of this implementation.
package phantom_pkg;

  localparam int K    = 3;        // tile side: rows per column group, column groups per tile
  localparam int NPE  = K;        // PEs per core, one per filter column
  localparam int NTH  = 3;        // multiplier threads per PE
  localparam int DW   = 8;        // activation and weight width
  localparam int PW   = 2 * DW;   // product width
  localparam int AW   = 24;       // accumulator / output width
  localparam int CW   = $clog2(K); // column index width

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [PW-1:0] prod_t;
  typedef logic signed [AW-1:0] acc_t;

  typedef logic [K-1:0]          grp_t;    // one column group of a mask, bit r = row r
  typedef grp_t [K-1:0]          mask_t;   // whole tile mask, [c][r]
  typedef data_t [K-1:0][K-1:0]  tile_t;   // dense tile data, [c][r]
  typedef data_t [K*K-1:0]       packed_t; // sparse tile data: non-zeros first, in [c][r] order

  // L1 adder configuration carried by the last two bits of the mapper word.
  typedef enum logic [1:0] {
    L1_PASS   = 2'b00,  // th0, th1, th2 passed separately
    L1_ADD01  = 2'b01,  // th0 + th1, th2 passed
    L1_ADD12  = 2'b10,  // th1 + th2, th0 passed
    L1_ADDALL = 2'b11   // th0 + th1 + th2
  } l1_cfg_e;

  // Column of the original LAM output that the TDS column selector `sel`
  // sees at chunk position `k` after the intra-core right circular shift.
  function automatic logic [CW-1:0] orig_col(input int unsigned sel,
                                             input int unsigned k,
                                             input logic bal_en);
    int unsigned c;
    c = bal_en ? ((sel + K - (k % K)) % K) : sel;
    return CW'(c);
  endfunction

  function automatic int unsigned popcount_grp(input grp_t g);
    int unsigned n;
    n = 0;
    for (int i = 0; i < K; i++) n += int'(g[i]);
    return n;
  endfunction

endpackage
