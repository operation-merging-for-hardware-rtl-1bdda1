// fssc_reprepspc: Rep-RepSPC processor for a 16-LLR node whose left child is an
// 8-bit repetition node and whose right child is a RepSPC node.
// Structure: F -> Rep gives the left decision r; G0 and G1 (right-child LLRs
// for r = 0 and r = 1) each feed a RepSPC unit; r selects one RepSPC result
// with the final multiplexer. All three paths run in parallel, so the whole
// node is decoded in one step. Output: node partial sums [r ^ q, q], where q
// is the selected RepSPC vector. Purely combinational.
module fssc_reprepspc import fssc_pkg::*; (
  input  llr_t        a [16],
  output logic [15:0] b
);
  llr_t fl [8], g0 [8], g1 [8];
  logic r;
  logic [7:0] q0, q1, q;
  always_comb
    for (int i = 0; i < 8; i++) begin
      fl[i] = f_op(a[i], a[i+8]);
      g0[i] = g_op(a[i], a[i+8], 1'b0);
      g1[i] = g_op(a[i], a[i+8], 1'b1);
    end
  fssc_rep #(.W(8)) u_rep (.a(fl), .d(r));
  fssc_repspc u_rs0 (.a(g0), .b(q0));
  fssc_repspc u_rs1 (.a(g1), .b(q1));
  assign q = r ? q1 : q0;
  assign b = {q, q ^ {8{r}}};
endmodule
