// tb_fssc_frep_unit: random words through the merged F-Rep unit. For each
// supported stage the left child's partial sums (stage s-1 field) must all
// equal the Rep decision on F of the node, and nothing else may be written.
// Words are drawn both uniformly and biased so that both decisions occur.
module tb_fssc_frep_unit;
  import fssc_pkg::*;
  import fssc_tb_pkg::*;
  localparam int PE = 64;
  localparam int LOGPE = $clog2(PE);
  localparam int SMAX = (LOGPE < 6) ? LOGPE : 6;

  logic [3:0]      stage;
  llr_t            a      [2*PE];
  logic [2*PE-1:0] b_out, b_mask;
  fssc_frep_unit #(.PE(PE)) dut (.*);
  `include "tb_fssc_merged_units.svh"

  initial begin
    int av [2*PE];
    int ones = 0;
    for (int it = 0; it < 60; it++) begin
      for (int k = 0; k < 2 * PE; k++) begin
        av[k] = rnd_llr() + ((it % 3 == 0) ? 0 : ((it % 3 == 1) ? 12 : -12));
        av[k] = rsat(av[k]);
        a[k] = llr_t'(av[k]);
      end
      for (int s = 4; s <= SMAX; s++) begin
        int node [], f [];
        bit d;
        stage = 4'(s);
        #1;
        node = new[1 << s];
        foreach (node[k]) node[k] = av[ref_off(PE, s) + k];
        ref_fv(node, f);
        d = ref_rep(f);
        ones += int'(d);
        for (int k = 0; k < 2 * PE; k++) begin
          int p;
          p = k - ref_off(PE, s - 1);
          if (p >= 0 && p < f.size()) chk(b_mask[k] && b_out[k] == d, $sformatf("s=%0d %0d", s, k));
          else                        chk(!b_mask[k], $sformatf("s=%0d mask %0d", s, k));
        end
      end
    end
    chk(ones > 0, "never decided 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
