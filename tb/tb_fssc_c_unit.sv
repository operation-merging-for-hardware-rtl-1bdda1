// tb_fssc_c_unit: random partial-sum words through the combine unit.
// High stage: out must be {beta_r, beta_l ^ beta_r} from the selected bank
// (beta_l forced to 0 for C0). Low stage: every stage and every merge depth
// (1..3 cascaded combines) is checked against a step-by-step reference, both
// the written field and the write mask.
module tb_fssc_c_unit;
  import fssc_pkg::*;
  import fssc_tb_pkg::*;
  localparam int PE = 64;
  localparam int LOGPE = $clog2(PE);

  logic            high, zero_l, bank;
  logic [3:0]      stage;
  logic [1:0]      cnt;
  logic [2*PE-1:0] b0, b1, out, out_mask;
  fssc_c_unit #(.PE(PE)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(input bit em [2*PE], input bit ev [2*PE], input string what);
    for (int k = 0; k < 2 * PE; k++) begin
      checks++;
      if (out_mask[k] != em[k] || (em[k] && out[k] != ev[k])) begin
        failures++;
        if (failures < 5) $display("%s k=%0d mask %b/%b bit %b/%b", what, k, out_mask[k], em[k], out[k], ev[k]);
      end
    end
  endtask

  initial begin
    for (int it = 0; it < 40; it++) begin
      bit em [2*PE], ev [2*PE];
      for (int k = 0; k < 2 * PE; k++) begin b0[k] = 1'($urandom); b1[k] = 1'($urandom); end
      // high stage
      high = 1; zero_l = 1'($urandom); bank = 1'($urandom); stage = 4'(LOGPE + 1); cnt = 1;
      #1;
      for (int j = 0; j < PE; j++) begin
        bit l, r;
        l = zero_l ? 1'b0 : b0[bank * PE + j];
        r = b1[bank * PE + j];
        em[j] = 1; ev[j] = l ^ r;
        em[j + PE] = 1; ev[j + PE] = r;
      end
      cmp(em, ev, "high");
      // low stage, cascades
      for (int s = 3; s <= LOGPE; s++)
        for (int c = 1; c <= 3; c++) begin
          bit l [], r [], res [];
          if (s + c - 1 > LOGPE) continue;
          high = 0; stage = 4'(s); cnt = 2'(c); zero_l = 1'($urandom);
          #1;
          l = new[1 << (s - 1)]; r = new[1 << (s - 1)];
          foreach (l[j]) begin
            l[j] = zero_l ? 1'b0 : b0[ref_off(PE, s - 1) + j];
            r[j] = b1[ref_off(PE, s - 1) + j];
          end
          ref_comb(l, r, res);
          for (int t = s + 1; t <= s + c - 1; t++) begin
            l = new[1 << (t - 1)];
            foreach (l[j]) l[j] = zero_l ? 1'b0 : b0[ref_off(PE, t - 1) + j];
            r = res;
            ref_comb(l, r, res);
          end
          foreach (em[k]) em[k] = 0;
          foreach (res[j]) begin em[ref_off(PE, s + c - 1) + j] = 1; ev[ref_off(PE, s + c - 1) + j] = res[j]; end
          cmp(em, ev, $sformatf("low s=%0d c=%0d", s, c));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
