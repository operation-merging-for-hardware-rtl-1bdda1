// tb_fssc_decoder: end-to-end test of the decoder at its default size
// (N = 1024, P_e = 64).
//
// For each code it compiles an unmerged and a merged program, loads the merged
// one, and decodes frames:
//   * clean frames: random information bits, encoded, channel LLRs with the
//     right signs and random magnitudes -> the decoder must return the exact
//     codeword;
//   * noisy frames: BPSK over AWGN (Box-Muller), quantised to 5-bit LLRs with
//     one fractional bit -> the codeword must equal the software reference
//     decoder running the *unmerged* program (merging must not change the
//     result, bit for bit).
// The decode time (busy cycles) must equal the sum of the instruction step
// counts. Codes: polarization-weight constructions of rates 1/4, 1/2, 3/4 and
// one hand-made frozen pattern that contains every special node the decoder
// knows; every opcode must be executed at least once over the run, and so
// must each mechanism around them (word-serial high-stage steps, the upper
// half-word step, G0 x2 / F-G0 on a one-word node, channel reads at the
// root, codeword writes, two-field alpha writes).
module tb_fssc_decoder;
  import fssc_pkg::*;
  import fssc_tb_pkg::*;

  localparam int PE = 64;
  localparam int N  = 1024;
  localparam int IDEPTH = 512;
  localparam int FRAMES_CLEAN = 3;
  localparam int FRAMES_NOISY = 4;

  logic clk = 0, rst_n = 0;
  logic im_we = 0;
  logic [$clog2(IDEPTH)-1:0] im_waddr = '0;
  instr_t im_wdata;
  logic ch_we = 0;
  logic [$clog2(N/PE)-1:0] ch_waddr = '0;
  chllr_t ch_wdata [PE];
  logic start = 0, busy, done;
  logic [$clog2(N/PE)-1:0] cw_raddr = '0;
  logic [PE-1:0] cw_rdata;

  fssc_decoder dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int op_seen [32];
  int mech [6];
  string mech_name [6] = '{"high-stage word step", "upper-half (bank 1) step", "G0x2/F-G0 on one word",
                           "channel memory read", "codeword memory write", "two-field alpha write"};
  int busy_cycles;

  always @(posedge clk) begin
    if (busy) begin
      busy_cycles++;
      op_seen[int'(dut.u_ctrl.op)]++;
      // mechanisms besides the opcodes
      if (32'(dut.u_ctrl.stage) > $clog2(PE) && dut.u_ctrl.op != OP_END) mech[0]++;  // word-serial step
      if (dut.u_ctrl.bank) mech[1]++;                                                  // second half of a node
      if (32'(dut.u_ctrl.stage) == $clog2(PE) + 1 &&
          (dut.u_ctrl.op == OP_G02 || dut.u_ctrl.op == OP_FG0)) mech[2]++;            // merged op on a one-word node
      if (dut.u_ctrl.a_rd_ch) mech[3]++;                                               // root: channel memory read
      if (dut.u_ctrl.cw_we) mech[4]++;                                                 // codeword memory write
      if (dut.u_ctrl.op inside {OP_F2, OP_GF} ) mech[5]++;                            // two alpha fields in one write
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_prog(const ref prog_t p);
    foreach (p[i]) begin
      @(negedge clk);
      im_we = 1; im_waddr = $clog2(IDEPTH)'(i); im_wdata = p[i];
    end
    @(negedge clk) im_we = 0;
  endtask

  task automatic load_channel(const ref int ch [1024]);
    for (int h = 0; h < N / PE; h++) begin
      @(negedge clk);
      ch_we = 1; ch_waddr = $clog2(N/PE)'(h);
      for (int i = 0; i < PE; i++) ch_wdata[i] = chllr_t'(ch[h * PE + i]);
    end
    @(negedge clk) ch_we = 0;
  endtask

  task automatic run_decode(output bit x [1024]);
    busy_cycles = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    for (int h = 0; h < N / PE; h++) begin
      cw_raddr = $clog2(N/PE)'(h);
      #1;
      for (int i = 0; i < PE; i++) x[h * PE + i] = cw_rdata[i];
    end
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = (real'($urandom % 1000000)) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

  task automatic test_code(string name, const ref bit info [1024], input int k, input real ebn0);
    prog_t pb, pm;
    int eb, em, nb, nm, cb, cm;
    bit u [1024];
    bit x [1024];
    bit xr [1024];
    bit xd [1024];
    int ch [1024];
    real sigma, rate;
    eb = compile_prog(info, N, PE, 0, pb);
    em = compile_prog(info, N, PE, 1, pm);
    checks++;
    if (eb != 0 || em != 0 || pm.size() > IDEPTH) begin
      failures++;
      $display("%s: compile failed (%0d %0d)", name, eb, em);
      return;
    end
    nb = pb.size() - 1; nm = pm.size() - 1;
    cb = prog_cycles(pb, PE) - 1; cm = prog_cycles(pm, PE) - 1;
    $display("%s: operations %0d -> %0d (%.2f%% fewer), time steps %0d -> %0d (%.2f%% fewer)",
             name, nb, nm, 100.0 * (nb - nm) / nb, cb, cm, 100.0 * (cb - cm) / cb);
    load_prog(pm);
    rate = real'(k) / real'(N);
    sigma = $sqrt(1.0 / (2.0 * rate * (10.0 ** (ebn0 / 10.0))));
    for (int f = 0; f < FRAMES_CLEAN + FRAMES_NOISY; f++) begin
      bit noisy;
      int errs;
      noisy = f >= FRAMES_CLEAN;
      for (int i = 0; i < N; i++) u[i] = info[i] ? 1'($urandom) : 1'b0;
      encode(N, u, x);
      for (int i = 0; i < N; i++) begin
        if (!noisy) begin
          ch[i] = 1 + int'($urandom % 15);
        end else begin
          real y, l;
          y = 1.0 + sigma * gauss();
          l = 2.0 * y / (sigma * sigma) * 2.0;       // one fractional bit
          ch[i] = int'(l);
          if (ch[i] > 15) ch[i] = 15;
          if (ch[i] < -15) ch[i] = -15;
        end
        if (x[i] && !noisy) ch[i] = -ch[i];
        if (x[i] && noisy)  ch[i] = -ch[i];
      end
      load_channel(ch);
      run_decode(xd);
      ref_decode(N, pb, ch, xr);
      checks++;
      if (busy_cycles != cm + 1) begin
        failures++;
        $display("%s frame %0d: %0d cycles, expected %0d", name, f, busy_cycles, cm + 1);
      end
      errs = 0;
      for (int i = 0; i < N; i++) if (xd[i] != xr[i]) errs++;
      checks++;
      if (errs != 0) begin
        failures++;
        $display("%s frame %0d: %0d bits differ from the reference decoder", name, f, errs);
      end
      if (!noisy) begin
        errs = 0;
        for (int i = 0; i < N; i++) if (xd[i] != x[i]) errs++;
        checks++;
        if (errs != 0) begin
          failures++;
          $display("%s frame %0d: %0d bits differ from the sent codeword", name, f, errs);
        end
      end
    end
  endtask

  // hand-made pattern: repeated 64-bit blocks built from special nodes
  function automatic void build_mix(output bit info [1024], output int k);
    string blk [8];
    string s;
    blk[0] = {"FFFFFFFIFFFIFIII", "FFFFFFFFFFFFFFII", "FFFIIIIIFFFIFIII", "FFFFFFFIFIIIIIII"};
    blk[1] = {"FFFFFFFFFFFFFFFI", "FFFFFFFIFFFIFIII", "FFFFFFIIFIIIIIII", "FFFFIIIIFFFIIIII"};
    blk[2] = {"FFFFFFFFFFFFFFFFFFFFFFFFFFFFFFFI", "FFFFFFFFFFFFFFFIFFFFFFFIFFFIIIII"};
    blk[3] = {"FFFFFFFFFFFFFFFFFFFFFFFFFFFFFFFF", "FFFFFFFFFFFFFFFFFFFFFFFFFFFFFFFI"};
    blk[4] = {"FFFFFFFFFFFFFFFFFFFFFFFFFFFFFFFI", "FIIIIIIIIIIIIIIIIIIIIIIIIIIIIIII"};
    blk[5] = {"FFFFFFFFFFFFFFFFFFFFFFFFFFFFFFFF", "FFFFFFFFFFFFFFFFFFFFFFFFFFFFFIII"};
    blk[6] = {"FFFFFFFFFFFFFFFI", "FFFFFFFIFIIIIIII", "FFFFFFIIFIIIIIII", "FFFIIIIIIIIIIIII"};
    blk[7] = {"FFFFFFFFFFFFFFFF", "FFFFFFFFFFFFFFFF", "FFFFFFFFFFFFFFFF", "FFFFFFFFFFFFFFFI"};
    s = "";
    for (int b = 0; b < 16; b++) s = {s, blk[(b * 3 + b / 4) % 8]};
    // make the last quarter high-rate so the top of the tree has a Rate-1 right child
    k = 0;
    for (int i = 0; i < 1024; i++) begin
      info[i] = (i >= 768 + 128) ? 1'b1 : (i >= 768) ? (i != 768) : (s[i] == "I");
      k += int'(info[i]);
    end
  endfunction

  initial begin
    bit info [1024];
    int k;
    foreach (op_seen[i]) op_seen[i] = 0;
    foreach (mech[i]) mech[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    build_pw_frozen(N, 256, info); test_code("PC(1024,256)", info, 256, 2.5);
    build_pw_frozen(N, 512, info); test_code("PC(1024,512)", info, 512, 2.5);
    build_pw_frozen(N, 768, info); test_code("PC(1024,768)", info, 768, 3.5);
    build_mix(info, k);            test_code("mixed pattern", info, k, 3.0);
    // every operation must have been executed
    for (int o = 1; o <= int'(OP_RATE0ML); o++) begin
      checks++;
      $display("operation %-12s executed %0d cycles", op_e'(o), op_seen[o]);
      if (op_seen[o] == 0) begin
        failures++;
        $display("operation %s never executed", op_e'(o));
      end
    end
    foreach (mech[i]) begin
      checks++;
      $display("mechanism %-26s %0d cycles", mech_name[i], mech[i]);
      if (mech[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
