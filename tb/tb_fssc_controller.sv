// tb_fssc_controller: runs compiled instruction programs (polar codes of
// length 1024 with several rates, merged and unmerged) through the controller
// with a behavioural instruction memory. Every cycle the opcode, stage, bank,
// all memory addresses and write enables are compared with an independent
// model of the memory map (high-stage words stacked from stage log2(N)-1 down,
// packed low-stage word last, root on the channel / codeword memories). Also
// checked: the cycle count of each program, `busy`, the single `done` pulse,
// and that a second start after completion runs again from address 0.
module tb_fssc_controller;
  import fssc_pkg::*;
  import fssc_tb_pkg::*;
  localparam int PE = 64;
  localparam int N = 1024;
  localparam int IDEPTH = 512;
  localparam int LOGN = $clog2(N);
  localparam int LOGPE = $clog2(PE);
  localparam int AW = 3;          // words 0..7 for PE = 64, N = 1024
  localparam int CWAW = $clog2(N / (2 * PE));

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done;
  logic [$clog2(IDEPTH)-1:0] pc;
  instr_t instr;
  op_e op;
  logic [3:0] stage;
  logic bank, obank, dp_a_we, dp_b_we, a_rd_ch, a_we, b_we, b_wsel, cw_we;
  logic [AW-1:0] a_raddr, a_waddr, b_raddr, b_waddr;
  logic [CWAW-1:0] cw_waddr;
  fssc_controller #(.PE(PE), .N(N), .IDEPTH(IDEPTH)) dut (.*);
  `include "tb_fssc_merged_units.svh"

  instr_t imem [IDEPTH];
  assign instr = imem[pc];

  // model of the memory map
  function automatic int words(input int s);
    return (s > LOGPE) ? (1 << (s - 1)) / PE : 1;
  endfunction
  function automatic int base(input int s);
    int b;
    if (s <= LOGPE) s = LOGPE;
    b = 0;
    for (int t = LOGN - 1; t > s; t--) b += words(t);
    return b;
  endfunction

  task automatic run_prog(const ref prog_t prog, input string name);
    int cyc, ndone;
    foreach (imem[i]) imem[i] = '0;
    foreach (prog[i]) imem[i] = prog[i];
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    foreach (prog[i]) begin
      int s, m, mh;
      s = prog[i].stage;
      m = words(s);
      mh = words(s - 1);
      for (int k = 0; k < m; k++) begin
        bit ch;
        int kc, bk, exp_ar, exp_aw;
        dp_a_we = 1'($urandom); dp_b_we = 1'($urandom);
        #1;
        ch = (s - 1 > LOGPE);
        bk = ch ? (k >= mh) : 0;
        kc = ch ? k % mh : 0;
        exp_ar = (s == LOGN) ? k : (s > LOGPE) ? base(s) + k : base(LOGPE);
        exp_aw = ch ? base(s - 1) + kc : base(LOGPE);
        chk(busy, "busy");
        if (prog[i].op == OP_END) begin
          chk(op == OP_END, "END op");
        end else begin
          chk(op == prog[i].op && int'(stage) == s, $sformatf("%s instr %0d op/stage", name, i));
          chk(int'(pc) == i, $sformatf("%s pc %0d", name, i));
          chk(bank == 1'(bk) && obank == 1'(bk), $sformatf("%s instr %0d bank", name, i));
          chk(a_rd_ch == (s == LOGN), $sformatf("%s rd_ch", name));
          chk(int'(a_raddr) == exp_ar, $sformatf("%s instr %0d k %0d a_raddr %0d/%0d", name, i, k, a_raddr, exp_ar));
          chk(int'(a_waddr) == exp_aw, $sformatf("%s instr %0d a_waddr", name, i));
          chk(int'(b_raddr) == exp_aw, $sformatf("%s instr %0d b_raddr", name, i));
          chk(a_we == dp_a_we, $sformatf("%s a_we", name));
          chk(b_we == (dp_b_we && s != LOGN), $sformatf("%s b_we", name));
          chk(cw_we == (dp_b_we && s == LOGN), $sformatf("%s cw_we", name));
          if (s != LOGN)
            chk(int'(b_waddr) == ((s > LOGPE) ? base(s) + k : base(LOGPE)), $sformatf("%s instr %0d b_waddr", name, i));
          else
            chk(int'(cw_waddr) == k, $sformatf("%s cw_waddr", name));
          chk(b_wsel == prog[i].dst, $sformatf("%s wsel", name));
        end
        chk(!done, "early done");
        @(negedge clk);
        cyc++;
      end
    end
    dp_a_we = 0; dp_b_we = 0;
    chk(done && !busy, $sformatf("%s done after END", name));
    chk(cyc == prog_cycles(prog, PE), $sformatf("%s cycles", name));
    ndone = 0;
    repeat (5) begin
      @(negedge clk);
      ndone += int'(done);
      chk(!busy, "idle");
    end
    chk(ndone == 0, "done is a single pulse");
  endtask

  initial begin
    bit info [1024];
    prog_t prog;
    rst_n = 0; start = 0; dp_a_we = 0; dp_b_we = 0;
    foreach (imem[i]) imem[i] = '0;
    repeat (3) @(negedge clk);
    chk(!busy && !done, "reset state");
    rst_n = 1;
    for (int r = 1; r <= 3; r++)
      for (int mg = 0; mg < 2; mg++) begin
        build_pw_frozen(N, 256 * r, info);
        chk(compile_prog(info, N, PE, 1'(mg), prog) == 0, "compile");
        run_prog(prog, $sformatf("K=%0d merge=%0d", 256 * r, mg));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
