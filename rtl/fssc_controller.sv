// fssc_controller: instruction sequencer and memory address generator.
//
// After `start` it executes the instruction memory from address 0 until an END
// instruction. Each instruction is one time step, except that an operation on
// a node at a high stage S > log2(PE) takes 2^S/(2*PE) clock cycles, one per
// memory word (loop counter k). For every cycle it produces:
//   * the alpha read address (channel word k for the root stage, word
//     base(S)+k at a high stage, the packed word otherwise);
//   * the child location for stage S-1, used for the alpha write of F/G/G0
//     and for reading beta_l/beta_r: word base(S-1) + (k mod M/2) and bank
//     k div (M/2) while S-1 is a high stage, the packed word otherwise
//     (M = words of the node at stage S);
//   * the beta write: unit `dst` at word base(S)+k (high stage), the packed
//     word (low stage, all merged operations), or the codeword memory word k
//     when S = log2(N).
// `done` pulses for one cycle when END is reached; `busy` is high while
// decoding. Instruction fetch is combinational, so there is no bubble
// between steps.
// Reset is asynchronous and active low. The two assertions at the end are
// disabled while rst_n is low, so lint reports rst_n as used both
// asynchronously (by the registers) and synchronously (by the assertions);
// this is intended and has no hardware effect.
module fssc_controller import fssc_pkg::*; import fssc_mem_pkg::*; #(
  parameter int PE    = 64,
  parameter int N     = 1024,
  parameter int IDEPTH = 512,
  localparam int AW   = $clog2(depth_of(PE, $clog2(N)) + 1),
  localparam int CWAW = $clog2(N / (2 * PE))
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // instruction memory
  output logic [$clog2(IDEPTH)-1:0] pc,
  input  instr_t                    instr,
  // to the datapath
  output op_e                       op,
  output logic [3:0]                stage,
  output logic                      bank,
  output logic                      obank,
  input  logic                      dp_a_we,
  input  logic                      dp_b_we,
  // alpha memory
  output logic                      a_rd_ch,
  output logic [AW-1:0]             a_raddr,
  output logic                      a_we,
  output logic [AW-1:0]             a_waddr,
  // beta memory
  output logic [AW-1:0]             b_raddr,
  output logic                      b_we,
  output logic                      b_wsel,
  output logic [AW-1:0]             b_waddr,
  // codeword memory
  output logic                      cw_we,
  output logic [CWAW-1:0]           cw_waddr
);
  localparam int LOGN  = $clog2(N);
  localparam int LOGPE = $clog2(PE);
  localparam int PACK  = depth_of(PE, LOGN);

  // per-stage word counts and base addresses
  logic [15:0]   words_tab [16];
  logic [AW-1:0] base_tab  [16];
  for (genvar s = 0; s < 16; s++) begin : g_tab
    if (s > LOGPE && s < LOGN) begin : g_hi
      assign words_tab[s] = 16'(words_of(PE, s));
      assign base_tab[s]  = AW'(base_of(PE, LOGN, s));
    end else if (s == LOGN) begin : g_root
      assign words_tab[s] = 16'(words_of(PE, s));
      assign base_tab[s]  = '0;
    end else begin : g_lo
      assign words_tab[s] = 16'd1;
      assign base_tab[s]  = AW'(PACK);
    end
  end

  logic        run;
  logic [15:0] k, m, mh;
  logic        high, child_high, last;
  logic [AW-1:0] kc;

  assign op     = run ? instr.op : OP_END;
  assign stage  = instr.stage;
  assign high   = 32'(stage) > LOGPE;
  assign m      = high ? words_tab[stage] : 16'd1;
  assign last   = (k == m - 16'd1);
  assign child_high = 32'(stage) - 1 > LOGPE;
  assign mh     = words_tab[stage - 4'd1];          // words of the child stage
  assign kc     = child_high ? AW'((k >= mh) ? k - mh : k) : '0;
  assign bank   = child_high ? (k >= mh) : 1'b0;
  assign obank  = bank;

  assign a_rd_ch = (32'(stage) == LOGN);
  assign a_raddr = a_rd_ch ? AW'(k) : high ? base_tab[stage] + AW'(k) : AW'(PACK);
  assign a_waddr = child_high ? base_tab[stage - 4'd1] + kc : AW'(PACK);
  assign a_we    = run && dp_a_we;
  assign b_raddr = child_high ? base_tab[stage - 4'd1] + kc : AW'(PACK);

  logic root_w;
  assign root_w   = (32'(stage) == LOGN);
  assign b_we     = run && dp_b_we && !root_w;
  assign b_wsel   = instr.dst;
  assign b_waddr  = high ? base_tab[stage] + AW'(k) : AW'(PACK);
  assign cw_we    = run && dp_b_we && root_w;
  assign cw_waddr = CWAW'(k);

  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      pc   <= '0;
      k    <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          run <= 1'b1;
          pc  <= '0;
          k   <= '0;
        end
      end else if (instr.op == OP_END) begin
        run  <= 1'b0;
        done <= 1'b1;
      end else if (last) begin
        k  <= '0;
        pc <= pc + 1'b1;
      end else begin
        k <= k + 16'd1;
      end
    end
  end

  // a high-stage P-RSPC/P-0SPC must fit in one word
  a_spc_one_word: assert property (@(posedge clk) disable iff (!rst_n)
    run && (instr.op == OP_PRSPC || instr.op == OP_P0SPC) |-> 32'(stage) <= LOGPE + 1);
  // the other merged operations exist at low stage only
  a_merge_low: assert property (@(posedge clk) disable iff (!rst_n)
    run && (instr.op inside {OP_F2, OP_GF, OP_FREP, OP_C2, OP_C3, OP_C02, OP_C03})
      |-> 32'(stage) <= LOGPE);
  // G0 x2 and F-G0 also on a one-word node
  a_merge_word: assert property (@(posedge clk) disable iff (!rst_n)
    run && (instr.op inside {OP_G02, OP_FG0}) |-> 32'(stage) <= LOGPE + 1);
endmodule
