// fssc_leaf_unit: the special-node cluster. It decodes a whole node at stage s
// (<= log2 PE) of the packed alpha word in one step and returns the node's
// partial sums at the stage-s field (b_out, b_mask):
//   Rep        (s = 2 .. log2 PE)  sign of the LLR sum, Eq. (6)
//   SPC        (s = 2 .. log2 PE)  Wagner decoding, Eq. (7)-(10)
//   ML         (s = 2)             exhaustive search over the FFII node
//   RepSPC     (s = 3)             Rep(4) left child, SPC(4) right child
//   Rep-Rate1  (s = 3)             Rep(4) left child, Rate-1(4) right child:
//                                  hard decisions of G with the Rep estimate
//   Rate0-ML   (s = 3)             Rate-0 left child, ML(4) right child on G0
//   Rep-RepSPC (s = 4)             the Rep-RepSPC processor
// Purely combinational.
module fssc_leaf_unit import fssc_pkg::*; #(
  parameter int PE = 64
) (
  input  op_e             op,
  input  logic [3:0]      stage,
  input  llr_t            a      [2*PE],
  output logic [2*PE-1:0] b_out,
  output logic [2*PE-1:0] b_mask
);
  localparam int LOGPE = $clog2(PE);

  // ---- Rep, all sizes
  logic [15:0] rep_d;
  for (genvar s = 0; s < 16; s++) begin : g_rep
    if (s >= 2 && s <= LOGPE) begin : g_on
      llr_t v [1 << s];
      always_comb for (int j = 0; j < (1 << s); j++) v[j] = a[lo_off(PE, s) + j];
      fssc_rep #(.W(1 << s)) u_rep (.a(v), .d(rep_d[s]));
    end else begin : g_off
      assign rep_d[s] = 1'b0;
    end
  end

  // ---- SPC, one PE-wide decoder with a valid mask
  llr_t          sv [PE];
  logic [PE-1:0] svalid, sb;
  always_comb begin
    for (int j = 0; j < PE; j++) begin
      sv[j] = '0;
      svalid[j] = 1'b0;
    end
    for (int s = 2; s <= LOGPE; s++)
      if (32'(stage) == s)
        for (int j = 0; j < (1 << s); j++) begin
          sv[j] = a[lo_off(PE, s) + j];
          svalid[j] = 1'b1;
        end
  end
  fssc_spc #(.W(PE)) u_spc (.a(sv), .valid(svalid), .b(sb));

  // ---- fixed-size nodes
  llr_t a4 [4], a8 [8], a16 [16];
  always_comb begin
    for (int j = 0; j < 4; j++)  a4[j]  = a[lo_off(PE, 2) + j];
    for (int j = 0; j < 8; j++)  a8[j]  = a[lo_off(PE, 3) + j];
    for (int j = 0; j < 16; j++) a16[j] = a[lo_off(PE, 4) + j];
  end

  logic [3:0]  ml_b;
  logic [7:0]  repspc_b;
  logic [15:0] reprepspc_b;
  fssc_ml        u_ml   (.a(a4),  .b(ml_b));
  fssc_repspc    u_rs   (.a(a8),  .b(repspc_b));
  fssc_reprepspc u_rrs  (.a(a16), .b(reprepspc_b));

  // Rep-Rate1: F -> Rep(4), then hard decisions of G
  llr_t rr_f [4];
  logic rr_r;
  logic [3:0] rr_hd;
  // Rate0-ML: G0 -> ML(4)
  llr_t r0_g [4];
  logic [3:0] r0_ml;
  always_comb
    for (int j = 0; j < 4; j++) begin
      rr_f[j]  = f_op(a8[j], a8[j + 4]);
      rr_hd[j] = hd(g_op(a8[j], a8[j + 4], rr_r));
      r0_g[j]  = g_op(a8[j], a8[j + 4], 1'b0);
    end
  fssc_rep #(.W(4)) u_rr_rep (.a(rr_f), .d(rr_r));
  fssc_ml           u_r0_ml  (.a(r0_g), .b(r0_ml));

  // ---- output image
  always_comb begin
    b_out  = '0;
    b_mask = '0;
    for (int s = 2; s <= LOGPE; s++)
      if (32'(stage) == s)
        for (int j = 0; j < (1 << s); j++) begin
          b_mask[lo_off(PE, s) + j] = 1'b1;
          b_out[lo_off(PE, s) + j]  = (op == OP_SPC) ? sb[j] : rep_d[s];
        end
    case (op)
      OP_ML:        b_out[lo_off(PE, 2) +: 4]  = ml_b;
      OP_REPSPC:    b_out[lo_off(PE, 3) +: 8]  = repspc_b;
      OP_REPRATE1:  b_out[lo_off(PE, 3) +: 8]  = {rr_hd, rr_hd ^ {4{rr_r}}};
      OP_RATE0ML:   b_out[lo_off(PE, 3) +: 8]  = {r0_ml, r0_ml};
      OP_REPREPSPC: b_out[lo_off(PE, 4) +: 16] = reprepspc_b;
      default: ;
    endcase
  end
endmodule
