// tb_fssc_datapath: random operand words through the whole datapath for every
// opcode, at the stages each opcode is used at. The testbench computes the
// expected alpha write (data + mask) and beta write (bits + mask) from the
// node-level reference functions, so it checks both the units and the
// result selection (which unit drives which memory, and which half word a
// high-stage step writes), including G0 x2 and F-G0 on a one-word node.
module tb_fssc_datapath;
  import fssc_pkg::*;
  import fssc_tb_pkg::*;
  localparam int PE = 64;
  localparam int LOGPE = $clog2(PE);

  op_e             op;
  logic [3:0]      stage;
  logic            bank, obank;
  llr_t            a       [2*PE];
  logic [2*PE-1:0] b0, b1;
  logic            a_we, b_we;
  llr_t            a_wdata [2*PE];
  logic [2*PE-1:0] a_wmask, b_wdata, b_wmask;
  fssc_datapath #(.PE(PE)) dut (.*);
  `include "tb_fssc_merged_units.svh"

  int  av [2*PE];
  int  ea [2*PE];
  bit  eam [2*PE], eb [2*PE], ebm [2*PE];
  bit  ewa, ewb;

  // place a vector at a field
  function automatic void put_a(input int off, input int v []);
    foreach (v[i]) begin ea[off + i] = v[i]; eam[off + i] = 1; end
  endfunction
  function automatic void put_b(input int off, input bit v []);
    foreach (v[i]) begin eb[off + i] = v[i]; ebm[off + i] = 1; end
  endfunction
  function automatic void node_a(input int s, output int v []);
    v = new[1 << s];
    foreach (v[i]) v[i] = av[ref_off(PE, s) + i];
  endfunction
  function automatic void field_b(input logic [2*PE-1:0] w, input int s, output bit v []);
    v = new[1 << s];
    foreach (v[i]) v[i] = w[ref_off(PE, s) + i];
  endfunction

  // expected image of one low-stage operation at stage s
  function automatic void expect_low(input op_e o, input int s);
    int node [], c1 [], c2 [];
    bit l [], r [], e [], z [];
    node_a(s, node);
    case (o)
      OP_F:   begin ewa = 1; ref_fv(node, c1); put_a(ref_off(PE, s - 1), c1); end
      OP_F2:  begin ewa = 1; ref_fv(node, c1); ref_fv(c1, c2); put_a(ref_off(PE, s - 1), c1); put_a(ref_off(PE, s - 2), c2); end
      OP_G0:  begin ewa = 1; ref_const(1 << (s - 1), 0, z); ref_gv(node, z, c1); put_a(ref_off(PE, s - 1), c1); end
      OP_G02: begin ewa = 1; ref_const(1 << (s - 1), 0, z); ref_gv(node, z, c1);
                    ref_const(1 << (s - 2), 0, z); ref_gv(c1, z, c2); put_a(ref_off(PE, s - 2), c2); end
      OP_G:   begin ewa = 1; field_b(b0, s - 1, l); ref_gv(node, l, c1); put_a(ref_off(PE, s - 1), c1); end
      OP_GF:  begin ewa = 1; field_b(b0, s - 1, l); ref_gv(node, l, c1); ref_fv(c1, c2);
                    put_a(ref_off(PE, s - 1), c1); put_a(ref_off(PE, s - 2), c2); end
      OP_FG0: begin ewa = 1; ref_fv(node, c1); ref_const(1 << (s - 2), 0, z); ref_gv(c1, z, c2);
                    put_a(ref_off(PE, s - 2), c2); end
      OP_FREP: begin ewb = 1; ref_fv(node, c1); ref_const(1 << (s - 1), ref_rep(c1), e); put_b(ref_off(PE, s - 1), e); end
      OP_REP: begin ewb = 1; ref_const(1 << s, ref_rep(node), e); put_b(ref_off(PE, s), e); end
      OP_SPC: begin ewb = 1; ref_spc(node, e); put_b(ref_off(PE, s), e); end
      OP_ML:  begin ewb = 1; ref_ml(node, e); put_b(ref_off(PE, s), e); end
      OP_REPSPC:    begin ewb = 1; ref_repspc(node, e); put_b(ref_off(PE, s), e); end
      OP_REPREPSPC: begin ewb = 1; ref_reprepspc(node, e); put_b(ref_off(PE, s), e); end
      OP_PR1, OP_P01, OP_PRSPC, OP_P0SPC: begin
        ewb = 1;
        if (o == OP_P01 || o == OP_P0SPC) ref_const(1 << (s - 1), 0, l); else field_b(b0, s - 1, l);
        ref_gv(node, l, c1);
        if (o == OP_PR1 || o == OP_P01) ref_hd(c1, r); else ref_spc(c1, r);
        ref_comb(l, r, e);
        put_b(ref_off(PE, s), e);
      end
      OP_C, OP_C0, OP_C2, OP_C02: begin
        int cnt;
        ewb = 1;
        cnt = (o == OP_C2 || o == OP_C02) ? 2 : 1;
        if (o == OP_C0 || o == OP_C02) ref_const(1 << (s - 1), 0, l); else field_b(b0, s - 1, l);
        field_b(b1, s - 1, r);
        ref_comb(l, r, e);
        if (cnt == 2) begin
          r = e;
          if (o == OP_C02) ref_const(1 << s, 0, l); else field_b(b0, s, l);
          ref_comb(l, r, e);
        end
        put_b(ref_off(PE, s + cnt - 1), e);
      end
      default: ;
    endcase
  endfunction

  // expected image of one high-stage step (node at stage > log2 PE)
  function automatic void expect_high(input op_e o);
    int node [], c [];
    bit l [], r [], e [];
    node = new[2 * PE];
    foreach (node[i]) node[i] = av[i];
    l = new[PE]; r = new[PE];
    foreach (l[i]) begin l[i] = b0[bank * PE + i]; r[i] = b1[bank * PE + i]; end
    if (o == OP_C0 || o == OP_P01) foreach (l[i]) l[i] = 0;
    case (o)
      OP_F, OP_G, OP_G0: begin
        ewa = 1;
        if (o == OP_F) ref_fv(node, c);
        else if (o == OP_G) ref_gv(node, l, c);
        else begin bit z []; ref_const(PE, 0, z); ref_gv(node, z, c); end
        put_a(obank * PE, c);
      end
      OP_C, OP_C0: begin ewb = 1; ref_comb(l, r, e); put_b(0, e); end
      OP_PR1, OP_P01: begin ewb = 1; ref_gv(node, l, c); ref_hd(c, r); ref_comb(l, r, e); put_b(0, e); end
      OP_G02, OP_FG0: begin
        int c2 [];
        bit z [];
        ewa = 1;
        if (o == OP_FG0) ref_fv(node, c);
        else begin ref_const(PE, 0, z); ref_gv(node, z, c); end
        ref_const(PE / 2, 0, z);
        ref_gv(c, z, c2);
        put_a(ref_off(PE, LOGPE - 1), c2);
      end
      default: ;
    endcase
  endfunction

  task automatic compare(input string what);
    chk(a_we == ewa, {what, " a_we"});
    chk(b_we == ewb, {what, " b_we"});
    for (int k = 0; k < 2 * PE; k++) begin
      if (ewa) chk(a_wmask[k] == eam[k] && (!eam[k] || int'(a_wdata[k]) == ea[k]), $sformatf("%s alpha %0d", what, k));
      if (ewb) chk(b_wmask[k] == ebm[k] && (!ebm[k] || b_wdata[k] == eb[k]), $sformatf("%s beta %0d", what, k));
    end
  endtask

  task automatic try(input op_e o, input int s, input bit hi);
    op = o; stage = 4'(s);
    bank = 1'($urandom); obank = 1'($urandom);
    #1;
    ewa = 0; ewb = 0;
    foreach (eam[k]) begin eam[k] = 0; ebm[k] = 0; ea[k] = 0; eb[k] = 0; end
    if (hi) expect_high(o); else expect_low(o, s);
    compare($sformatf("%s s=%0d", o.name(), s));
  endtask

  initial begin
    for (int it = 0; it < 25; it++) begin
      for (int k = 0; k < 2 * PE; k++) begin
        av[k] = rsat(rnd_llr() + ((it % 3 == 1) ? 6 : ((it % 3 == 2) ? -6 : 0)));
        a[k] = llr_t'(av[k]);
        b0[k] = 1'($urandom); b1[k] = 1'($urandom);
      end
      foreach (expect_ops_hi[i]) try(expect_ops_hi[i], LOGPE + 1 + it % 4, 1);
      try(OP_G02, LOGPE + 1, 1);
      try(OP_FG0, LOGPE + 1, 1);
      for (int s = 3; s <= LOGPE; s++) begin
        foreach (ops_lo3[i]) try(ops_lo3[i], s, 0);
        if (s >= 4) foreach (ops_lo4[i]) try(ops_lo4[i], s, 0);
        if (s >= 4 && s <= 6) try(OP_FREP, s, 0);
        if (s < LOGPE) begin try(OP_C2, s, 0); try(OP_C02, s, 0); end
      end
      try(OP_ML, 2, 0); try(OP_REP, 2, 0); try(OP_SPC, 2, 0);
      try(OP_REPSPC, 3, 0); try(OP_REPREPSPC, 4, 0);
      try(OP_END, 3, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  op_e expect_ops_hi [7] = '{OP_F, OP_G, OP_G0, OP_C, OP_C0, OP_PR1, OP_P01};
  op_e ops_lo3 [12] = '{OP_F, OP_G0, OP_G, OP_REP, OP_SPC, OP_PR1, OP_P01, OP_PRSPC, OP_P0SPC, OP_C, OP_C0, OP_END};
  op_e ops_lo4 [4] = '{OP_F2, OP_G02, OP_GF, OP_FG0};
endmodule
