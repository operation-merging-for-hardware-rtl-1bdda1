// fssc_repspc: RepSPC node decoder for an 8-LLR node whose left child is a
// 4-bit repetition node and whose right child is a 4-bit SPC node.
// Built as the dashed box of the Rep-RepSPC processor: F feeds the Rep
// decision while G0 and G1 (G with the left estimate assumed 0 or 1) feed two
// SPC decoders in parallel; the Rep decision selects one SPC result. The output
// is the node's partial-sum vector [rep ^ spc, spc]. Purely combinational.
module fssc_repspc import fssc_pkg::*; (
  input  llr_t       a [8],
  output logic [7:0] b
);
  llr_t fl [4], g0 [4], g1 [4];
  logic r;
  logic [3:0] s0, s1, s;
  always_comb
    for (int i = 0; i < 4; i++) begin
      fl[i] = f_op(a[i], a[i+4]);
      g0[i] = g_op(a[i], a[i+4], 1'b0);
      g1[i] = g_op(a[i], a[i+4], 1'b1);
    end
  fssc_rep #(.W(4)) u_rep (.a(fl), .d(r));
  fssc_spc #(.W(4)) u_spc0 (.a(g0), .valid(4'hf), .b(s0));
  fssc_spc #(.W(4)) u_spc1 (.a(g1), .valid(4'hf), .b(s1));
  assign s = r ? s1 : s0;
  assign b = {s, s ^ {4{r}}};
endmodule
