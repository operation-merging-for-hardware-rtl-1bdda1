// tb_fssc_gf_unit: random words through the merged G-F unit at every low
// stage it supports. The right child's LLRs (stage s-1 field) and its left
// child's LLRs (stage s-2 field) are compared with G then F done separately;
// all other positions must stay unmasked.
module tb_fssc_gf_unit;
  import fssc_pkg::*;
  import fssc_tb_pkg::*;
  localparam int PE = 64;
  localparam int LOGPE = $clog2(PE);

  logic [3:0]      stage;
  llr_t            a       [2*PE];
  logic [2*PE-1:0] b0;
  llr_t            lo_data [2*PE];
  logic [2*PE-1:0] lo_mask;
  fssc_gf_unit #(.PE(PE)) dut (.*);
  `include "tb_fssc_merged_units.svh"

  initial begin
    int av [2*PE];
    for (int it = 0; it < 40; it++) begin
      for (int k = 0; k < 2 * PE; k++) begin av[k] = rnd_llr(); a[k] = llr_t'(av[k]); b0[k] = 1'($urandom); end
      for (int s = 4; s <= LOGPE; s++) begin
        int node [], g [], f [];
        bit l [];
        stage = 4'(s);
        #1;
        node = new[1 << s]; l = new[1 << (s - 1)];
        foreach (node[k]) node[k] = av[ref_off(PE, s) + k];
        foreach (l[j]) l[j] = b0[ref_off(PE, s - 1) + j];
        ref_gv(node, l, g);
        ref_fv(g, f);
        for (int k = 0; k < 2 * PE; k++) begin
          int p1, p2;
          p1 = k - ref_off(PE, s - 1);
          p2 = k - ref_off(PE, s - 2);
          if (p1 >= 0 && p1 < g.size())      chk(lo_mask[k] && int'(lo_data[k]) == g[p1], $sformatf("s=%0d g %0d", s, k));
          else if (p2 >= 0 && p2 < f.size()) chk(lo_mask[k] && int'(lo_data[k]) == f[p2], $sformatf("s=%0d f %0d", s, k));
          else                               chk(!lo_mask[k], $sformatf("s=%0d mask %0d", s, k));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
