// l1_adder: configurable adder behind the three multiplier threads of a PE.
//
// The two configuration bits from the mapper decide which products are
// summed: 00 passes th0, th1, th2 separately; 01 adds th0 and th1 and passes
// th2; 10 passes th0 and adds th1 and th2; 11 adds all three.  A sum is
// placed on the output lane of its lowest thread (01 -> lane 0, 10 -> lane 1,
// 11 -> lane 0); the lane it frees is marked with tag 0, which matches the
// zero entries with tag 0 of the output-buffer example.  The output-chunk id
// travels with the value.  Combinational.
module l1_adder
  import phantom_pkg::*;
#(
  parameter int SW = 2,
  parameter int KW = 5
) (
  input  l1_cfg_e                  cfg,
  input  logic  [NTH-1:0]          in_valid,
  input  prod_t [NTH-1:0]          prod,
  input  logic  [NTH-1:0][SW-1:0]  in_slot,
  input  logic  [NTH-1:0][KW-1:0]  in_k,
  output logic  [NTH-1:0]          out_tag,
  output acc_t  [NTH-1:0]          out_val,
  output logic  [NTH-1:0][SW-1:0]  out_slot,
  output logic  [NTH-1:0][KW-1:0]  out_k
);

  acc_t [NTH-1:0] p;

  always_comb begin
    for (int t = 0; t < NTH; t++) p[t] = in_valid[t] ? acc_t'(prod[t]) : '0;
    out_tag  = in_valid;
    out_val  = p;
    out_slot = in_slot;
    out_k    = in_k;
    unique case (cfg)
      L1_ADD01: begin
        out_val[0] = p[0] + p[1];
        out_tag[0] = in_valid[0] | in_valid[1];
        out_val[1] = '0;
        out_tag[1] = 1'b0;
      end
      L1_ADD12: begin
        out_val[1]  = p[1] + p[2];
        out_tag[1]  = in_valid[1] | in_valid[2];
        out_slot[1] = in_slot[2];
        out_k[1]    = in_k[2];
        out_val[2]  = '0;
        out_tag[2]  = 1'b0;
      end
      L1_ADDALL: begin
        out_val[0]  = p[0] + p[1] + p[2];
        out_tag[0]  = |in_valid;
        out_slot[0] = in_slot[2];
        out_k[0]    = in_k[2];
        out_val[1]  = '0;
        out_tag[1]  = 1'b0;
        out_val[2]  = '0;
        out_tag[2]  = 1'b0;
      end
      default: ;
    endcase
  end

endmodule
