// tb_fssc_fg0_unit: random words through the merged F-G0 unit at every low
// stage it supports. Only the stage s-2 field may be written and it must equal
// G0 applied to F of the node.
module tb_fssc_fg0_unit;
  import fssc_pkg::*;
  import fssc_tb_pkg::*;
  localparam int PE = 64;
  localparam int LOGPE = $clog2(PE);

  logic [3:0]      stage;
  llr_t            a       [2*PE];
  llr_t            lo_data [2*PE];
  logic [2*PE-1:0] lo_mask;
  fssc_fg0_unit #(.PE(PE)) dut (.*);
  `include "tb_fssc_merged_units.svh"

  initial begin
    int av [2*PE];
    for (int it = 0; it < 40; it++) begin
      for (int k = 0; k < 2 * PE; k++) begin av[k] = rnd_llr(); a[k] = llr_t'(av[k]); end
      for (int s = 4; s <= LOGPE; s++) begin
        int node [], f [], g [];
        bit z [];
        stage = 4'(s);
        #1;
        node = new[1 << s];
        foreach (node[k]) node[k] = av[ref_off(PE, s) + k];
        ref_fv(node, f);
        ref_const(1 << (s - 2), 0, z);
        ref_gv(f, z, g);
        for (int k = 0; k < 2 * PE; k++) begin
          int p;
          p = k - ref_off(PE, s - 2);
          if (p >= 0 && p < g.size()) chk(lo_mask[k] && int'(lo_data[k]) == g[p], $sformatf("s=%0d %0d", s, k));
          else                        chk(!lo_mask[k], $sformatf("s=%0d mask %0d", s, k));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
