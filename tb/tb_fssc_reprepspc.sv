// tb_fssc_reprepspc: random 16-LLR nodes through the Rep-RepSPC processor,
// compared with the node decoded step by step (F, Rep, G, then RepSPC on the
// right child: F, Rep, G, SPC). Biased draws make both Rep outcomes and both
// parities common.
module tb_fssc_reprepspc;
  import fssc_pkg::*;
  import fssc_tb_pkg::*;

  llr_t        a [16];
  logic [15:0] b;
  fssc_reprepspc dut (.*);
  `include "tb_fssc_merged_units.svh"

  initial begin
    for (int it = 0; it < 4000; it++) begin
      int av [];
      bit e [];
      av = new[16];
      foreach (av[k]) begin
        av[k] = rsat(rnd_llr() + ((it % 4 == 1) ? 10 : ((it % 4 == 2) ? -10 : 0)));
        a[k] = llr_t'(av[k]);
      end
      #1;
      ref_reprepspc(av, e);
      for (int k = 0; k < 16; k++) chk(b[k] == e[k], $sformatf("it %0d bit %0d", it, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
