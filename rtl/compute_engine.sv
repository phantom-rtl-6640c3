// compute_engine: the multi-threaded PEs of one Phantom core.
//
// NPE = 3 PEs with NTH = 3 multiplier threads each (9 multipliers).  Every
// thread multiplies the 8-bit activation and weight the thread mapper placed
// in its register; the products of one PE go through that PE's L1 adder,
// configured by the mapper's two config bits.  Multiplication and L1 addition
// form one registered stage: the L1 outputs (value, tag, output-chunk id)
// appear one cycle after the thread registers are loaded.  Threads without a
// valid operand contribute nothing (tag 0).
module compute_engine
  import phantom_pkg::*;
#(
  parameter int SW = 2,
  parameter int KW = 5
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic  [NPE-1:0][NTH-1:0]          th_valid,
  input  data_t [NPE-1:0][NTH-1:0]          th_act,
  input  data_t [NPE-1:0][NTH-1:0]          th_wt,
  input  logic  [NPE-1:0][NTH-1:0][SW-1:0]  th_slot,
  input  logic  [NPE-1:0][NTH-1:0][KW-1:0]  th_k,
  input  l1_cfg_e [NPE-1:0]                 cfg,
  output logic  [NPE-1:0][NTH-1:0]          l1_tag,
  output acc_t  [NPE-1:0][NTH-1:0]          l1_val,
  output logic  [NPE-1:0][NTH-1:0][SW-1:0]  l1_slot,
  output logic  [NPE-1:0][NTH-1:0][KW-1:0]  l1_k
);

  for (genvar pe = 0; pe < NPE; pe++) begin : g_pe
    prod_t [NTH-1:0]         prod;
    logic  [NTH-1:0]         tag_d;
    acc_t  [NTH-1:0]         val_d;
    logic  [NTH-1:0][SW-1:0] slot_d;
    logic  [NTH-1:0][KW-1:0] k_d;

    always_comb begin
      for (int t = 0; t < NTH; t++) prod[t] = th_act[pe][t] * th_wt[pe][t];
    end

    l1_adder #(.SW(SW), .KW(KW)) u_l1 (
      .cfg      (cfg[pe]),
      .in_valid (th_valid[pe]),
      .prod     (prod),
      .in_slot  (th_slot[pe]),
      .in_k     (th_k[pe]),
      .out_tag  (tag_d),
      .out_val  (val_d),
      .out_slot (slot_d),
      .out_k    (k_d)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        l1_tag[pe]  <= '0;
        l1_val[pe]  <= '0;
        l1_slot[pe] <= '0;
        l1_k[pe]    <= '0;
      end else begin
        l1_tag[pe]  <= tag_d;
        l1_val[pe]  <= val_d;
        l1_slot[pe] <= slot_d;
        l1_k[pe]    <= k_d;
      end
    end
  end

endmodule
