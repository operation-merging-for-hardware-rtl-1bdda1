// fssc_decoder: Fast-SSC polar decoder with merged operations (top level).
//
// Instruction RAM -> controller -> {channel/alpha RAM, beta RAM} <-> datapath,
// with the root combine writing the codeword RAM.
// Use:
//   1. load the instruction sequence (im_we/im_waddr/im_wdata), once per code;
//   2. load the N channel LLRs, PE per cycle in natural order
//      (ch_waddr = h carries LLRs [h*PE, h*PE+PE));
//   3. pulse `start`; `busy` stays high while decoding and `done` pulses once
//      when the END instruction is reached;
//   4. read the estimated codeword, PE bits per address in natural order
//      (cw_raddr = h gives codeword bits [h*PE, h*PE+PE)), combinationally.
// Decoding time: one clock per instruction at a low stage, 2^S/(2*PE) clocks
// for an instruction on a node at stage S > log2(PE), plus one clock for END.
// Defaults: N = 1024, P_e = 64, Q(6,5,1) LLRs, 512 instruction words.
module fssc_decoder import fssc_pkg::*; import fssc_mem_pkg::*; #(
  parameter int PE     = 64,
  parameter int N      = 1024,
  parameter int IDEPTH = 512
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // instruction load
  input  logic                      im_we,
  input  logic [$clog2(IDEPTH)-1:0] im_waddr,
  input  instr_t                    im_wdata,
  // channel LLR load
  input  logic                      ch_we,
  input  logic [$clog2(N/PE)-1:0]   ch_waddr,
  input  chllr_t                    ch_wdata [PE],
  // control
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // codeword read
  input  logic [$clog2(N/PE)-1:0]   cw_raddr,
  output logic [PE-1:0]             cw_rdata
);
  localparam int LOGN = $clog2(N);
  localparam int AW   = $clog2(depth_of(PE, LOGN) + 1);
  localparam int CWAW = $clog2(N / (2 * PE));

  // instruction memory
  logic [$clog2(IDEPTH)-1:0] pc;
  instr_t instr;
  fssc_instr_ram #(.DEPTH(IDEPTH)) u_imem (.clk(clk), .we(im_we), .waddr(im_waddr), .wdata(im_wdata),
                                           .raddr(pc), .rdata(instr));

  // controller
  op_e op;
  logic [3:0] stage;
  logic bank, obank, dp_a_we, dp_b_we;
  logic a_rd_ch, a_we, b_we, b_wsel, cw_we;
  logic [AW-1:0] a_raddr, a_waddr, b_raddr, b_waddr;
  logic [CWAW-1:0] cw_waddr;
  fssc_controller #(.PE(PE), .N(N), .IDEPTH(IDEPTH)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done),
    .pc(pc), .instr(instr), .op(op), .stage(stage), .bank(bank), .obank(obank),
    .dp_a_we(dp_a_we), .dp_b_we(dp_b_we),
    .a_rd_ch(a_rd_ch), .a_raddr(a_raddr), .a_we(a_we), .a_waddr(a_waddr),
    .b_raddr(b_raddr), .b_we(b_we), .b_wsel(b_wsel), .b_waddr(b_waddr),
    .cw_we(cw_we), .cw_waddr(cw_waddr));

  // channel / alpha memory
  llr_t a_rdata [2*PE], a_wdata [2*PE];
  logic [2*PE-1:0] a_wmask;
  fssc_alpha_ram #(.PE(PE), .N(N)) u_aram (
    .clk(clk), .ch_we(ch_we), .ch_waddr(ch_waddr[CWAW-1:0]), .ch_wbank(ch_waddr[CWAW]),
    .ch_wdata(ch_wdata), .we(a_we), .waddr(a_waddr), .wdata(a_wdata), .wmask(a_wmask),
    .rd_ch(a_rd_ch), .raddr(a_raddr), .rdata(a_rdata));

  // beta memory
  logic [2*PE-1:0] b_rdata0, b_rdata1, b_wdata, b_wmask;
  fssc_beta_ram #(.PE(PE), .N(N)) u_bram (
    .clk(clk), .we(b_we), .wsel(b_wsel), .waddr(b_waddr), .wdata(b_wdata), .wmask(b_wmask),
    .raddr(b_raddr), .rdata0(b_rdata0), .rdata1(b_rdata1));

  // datapath
  fssc_datapath #(.PE(PE)) u_dp (
    .op(op), .stage(stage), .bank(bank), .obank(obank), .a(a_rdata), .b0(b_rdata0), .b1(b_rdata1),
    .a_we(dp_a_we), .a_wdata(a_wdata), .a_wmask(a_wmask),
    .b_we(dp_b_we), .b_wdata(b_wdata), .b_wmask(b_wmask));

  // codeword memory
  fssc_codeword_ram #(.PE(PE), .N(N)) u_cw (
    .clk(clk), .we(cw_we), .waddr(cw_waddr), .wdata(b_wdata), .raddr(cw_raddr), .rdata(cw_rdata));
endmodule
