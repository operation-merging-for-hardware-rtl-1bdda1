// tb_fssc_leaf_unit: random words through the special-node cluster. Every
// opcode is tried at each stage it supports and the partial sums at the
// node's field are compared with a step-by-step reference:
//   Rep / SPC at s = 2 .. log2 PE, ML at s = 2, RepSPC, Rep-Rate1 and
//   Rate0-ML at s = 3, Rep-RepSPC at s = 4.
// Nothing outside the node's field may be written.
module tb_fssc_leaf_unit;
  import fssc_pkg::*;
  import fssc_tb_pkg::*;
  localparam int PE = 64;
  localparam int LOGPE = $clog2(PE);

  op_e             op;
  logic [3:0]      stage;
  llr_t            a      [2*PE];
  logic [2*PE-1:0] b_out, b_mask;
  fssc_leaf_unit #(.PE(PE)) dut (.*);
  `include "tb_fssc_merged_units.svh"

  task automatic run(input op_e o, input int s, const ref int av [2*PE]);
    int node [], f [], g [];
    bit e [], l [], r [];
    op = o; stage = 4'(s);
    #1;
    node = new[1 << s];
    foreach (node[k]) node[k] = av[ref_off(PE, s) + k];
    case (o)
      OP_REP:       ref_const(1 << s, ref_rep(node), e);
      OP_SPC:       ref_spc(node, e);
      OP_ML:        ref_ml(node, e);
      OP_REPSPC:    ref_repspc(node, e);
      OP_REPREPSPC: ref_reprepspc(node, e);
      OP_REPRATE1: begin
        ref_fv(node, f);
        ref_const(4, ref_rep(f), l);
        ref_gv(node, l, g);
        ref_hd(g, r);
        ref_comb(l, r, e);
      end
      OP_RATE0ML: begin
        ref_const(4, 0, l);
        ref_gv(node, l, g);
        ref_ml(g, r);
        ref_comb(l, r, e);
      end
      default: ;
    endcase
    for (int k = 0; k < 2 * PE; k++) begin
      int p;
      p = k - ref_off(PE, s);
      if (p >= 0 && p < (1 << s)) chk(b_mask[k] && b_out[k] == e[p], $sformatf("%s s=%0d bit %0d", o.name(), s, p));
      else                        chk(!b_mask[k], $sformatf("%s s=%0d mask %0d", o.name(), s, k));
    end
  endtask

  initial begin
    int av [2*PE];
    for (int it = 0; it < 100; it++) begin
      for (int k = 0; k < 2 * PE; k++) begin
        av[k] = rsat(rnd_llr() + ((it % 3 == 1) ? 8 : ((it % 3 == 2) ? -8 : 0)));
        a[k] = llr_t'(av[k]);
      end
      for (int s = 2; s <= LOGPE; s++) begin
        run(OP_REP, s, av);
        run(OP_SPC, s, av);
      end
      run(OP_ML, 2, av);
      run(OP_REPSPC, 3, av);
      run(OP_REPRATE1, 3, av);
      run(OP_RATE0ML, 3, av);
      run(OP_REPREPSPC, 4, av);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
