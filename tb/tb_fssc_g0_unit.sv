// tb_fssc_g0_unit: random LLR words through the G0 unit. High-stage mode is
// checked lane by lane against a[i] + a[i+PE] (saturated); low stage for
// single G0 and G0 x2 (only the last field written), both the written fields (data and mask)
// and that nothing else is marked for writing.
module tb_fssc_g0_unit;
  import fssc_pkg::*;
  import fssc_tb_pkg::*;
  localparam int PE = 64;
  localparam int LOGPE = $clog2(PE);

  logic high, dbl;
  logic [3:0] stage;
  llr_t a_in [2*PE];
  llr_t lane [PE];
  llr_t lo_data [2*PE];
  logic [2*PE-1:0] lo_mask;
  fssc_g0_unit #(.PE(PE)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a [2*PE];
    for (int it = 0; it < 40; it++) begin
      for (int i = 0; i < 2 * PE; i++) begin a[i] = rnd_llr(); a_in[i] = llr_t'(a[i]); end
      high = 1; dbl = 0; stage = 4'(LOGPE + 1 + it % 3);
      #1;
      for (int i = 0; i < PE; i++) begin
        checks++;
        if (int'(lane[i]) != rg(a[i], a[i + PE], 0)) failures++;
      end
      for (int s = 3; s <= LOGPE; s++)
        for (int d = 0; d < 2; d++) begin
          int node [], c1 [], c2 [];
          int exp [2*PE];
          bit em [2*PE];
          if (d == 1 && s < 4) continue;
          high = 0; dbl = 1'(d); stage = 4'(s);
          #1;
          node = new[1 << s];
          foreach (node[i]) node[i] = a[ref_off(PE, s) + i];
          begin bit z []; ref_const(1 << (s - 1), 0, z); ref_gv(node, z, c1); end
          begin bit z []; ref_const(1 << (s - 2), 0, z); ref_gv(c1, z, c2); end
          foreach (em[k]) em[k] = 0;
          if (!d) foreach (c1[i]) begin em[ref_off(PE, s - 1) + i] = 1; exp[ref_off(PE, s - 1) + i] = c1[i]; end
          if (d) foreach (c2[i]) begin em[ref_off(PE, s - 2) + i] = 1; exp[ref_off(PE, s - 2) + i] = c2[i]; end
          for (int k = 0; k < 2 * PE; k++) begin
            checks++;
            if (lo_mask[k] != em[k] || (em[k] && int'(lo_data[k]) != exp[k])) begin
              failures++;
              if (failures < 5) $display("s=%0d d=%0d k=%0d mask %b/%b data %0d/%0d", s, d, k,
                                         lo_mask[k], em[k], lo_data[k], exp[k]);
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
