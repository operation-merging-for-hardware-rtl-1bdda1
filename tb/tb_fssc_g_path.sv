// tb_fssc_g_path: random LLR and partial-sum words through the G path in its
// three modes (G, Sign for P-R1/P-01, SPC for P-RSPC/P-0SPC), high stage and
// every low stage, with and without a Rate-0 left child. Checked: the G lanes,
// the written LLR field, and the combined partial sums against a reference.
module tb_fssc_g_path;
  import fssc_pkg::*;
  import fssc_tb_pkg::*;
  localparam int PE = 64;
  localparam int LOGPE = $clog2(PE);

  logic            high, zero_l, bank;
  logic [3:0]      stage;
  logic [1:0]      mode;
  llr_t            a       [2*PE];
  logic [2*PE-1:0] b0;
  llr_t            lane    [PE];
  llr_t            lo_data [2*PE];
  logic [2*PE-1:0] lo_mask, b_out, b_mask;
  fssc_g_path #(.PE(PE)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int av [2*PE];
    for (int it = 0; it < 30; it++) begin
      for (int k = 0; k < 2 * PE; k++) begin av[k] = rnd_llr(); a[k] = llr_t'(av[k]); b0[k] = 1'($urandom); end
      for (int md = 0; md < 3; md++) begin
        int node [], g [];
        bit l [], r [], res [];
        // high stage (SPC only for a one-word node)
        high = 1; mode = 2'(md); bank = 1'($urandom); zero_l = 1'($urandom);
        stage = 4'(LOGPE + 1 + ((md == 2) ? 0 : it % 3));
        #1;
        node = new[2 * PE]; l = new[PE];
        foreach (node[k]) node[k] = av[k];
        foreach (l[j]) l[j] = zero_l ? 1'b0 : b0[bank * PE + j];
        ref_gv(node, l, g);
        if (md == 2) ref_spc(g, r); else ref_hd(g, r);
        ref_comb(l, r, res);
        for (int j = 0; j < PE; j++) chk(int'(lane[j]) == g[j], $sformatf("high lane %0d md %0d", j, md));
        if (md != 0)
          for (int k = 0; k < 2 * PE; k++) chk(b_mask[k] && b_out[k] == res[k], $sformatf("high b %0d md %0d", k, md));
        chk(lo_mask == '0, "high lo_mask");
        // low stages
        for (int s = 3; s <= LOGPE; s++) begin
          high = 0; stage = 4'(s); zero_l = 1'($urandom);
          #1;
          node = new[1 << s]; l = new[1 << (s - 1)];
          foreach (node[k]) node[k] = av[ref_off(PE, s) + k];
          foreach (l[j]) l[j] = zero_l ? 1'b0 : b0[ref_off(PE, s - 1) + j];
          ref_gv(node, l, g);
          if (md == 2) ref_spc(g, r); else ref_hd(g, r);
          ref_comb(l, r, res);
          for (int k = 0; k < 2 * PE; k++) begin
            int fs, bs;
            fs = k - ref_off(PE, s - 1);
            bs = k - ref_off(PE, s);
            if (fs >= 0 && fs < (1 << (s - 1)))
              chk(lo_mask[k] && int'(lo_data[k]) == g[fs], $sformatf("low s=%0d lo %0d", s, k));
            else
              chk(!lo_mask[k], $sformatf("low s=%0d lo_mask %0d", s, k));
            if (bs >= 0 && bs < (1 << s)) begin
              if (md != 0) chk(b_mask[k] && b_out[k] == res[bs], $sformatf("low s=%0d md=%0d b %0d", s, md, k));
            end else
              chk(!b_mask[k], $sformatf("low s=%0d b_mask %0d", s, k));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
