// fssc_alpha_ram: channel / alpha memory.
//
// Two register arrays behind one read port:
//   * channel words: N/(2*PE) words of 2*PE channel LLRs (QC bits), written a
//     half word (one bank, PE LLRs) per cycle from the channel input;
//   * alpha words: the internal LLRs (QI bits) of the high stages plus the
//     packed low-stage word, see fssc_mem_pkg; written with a per-element
//     mask (a half word at high stage, one or two fields at low stage).
// The read port is combinational and returns either a channel word (sign
// extended to QI bits, same fractional format) or an alpha word, so one full
// word is read and one (masked) word is written per cycle.
module fssc_alpha_ram import fssc_pkg::*; import fssc_mem_pkg::*; #(
  parameter int PE = 64,
  parameter int N  = 1024
) (
  input  logic            clk,
  // channel load
  input  logic            ch_we,
  input  logic [$clog2(N/(2*PE))-1:0] ch_waddr,
  input  logic            ch_wbank,
  input  chllr_t          ch_wdata [PE],
  // alpha write
  input  logic            we,
  input  logic [$clog2(depth_of(PE, $clog2(N)) + 1)-1:0] waddr,
  input  llr_t            wdata [2*PE],
  input  logic [2*PE-1:0] wmask,
  // read
  input  logic            rd_ch,
  input  logic [$clog2(depth_of(PE, $clog2(N)) + 1)-1:0] raddr,
  output llr_t            rdata [2*PE]
);
  localparam int LOGN  = $clog2(N);
  localparam int DEPTH = depth_of(PE, LOGN) + 1;
  localparam int NCW   = N / (2 * PE);

  chllr_t ch_mem [NCW][2*PE];
  llr_t   a_mem  [DEPTH][2*PE];

  always_ff @(posedge clk) begin
    if (ch_we)
      for (int i = 0; i < PE; i++) ch_mem[ch_waddr][ch_wbank ? PE + i : i] <= ch_wdata[i];
    if (we)
      for (int i = 0; i < 2 * PE; i++)
        if (wmask[i]) a_mem[waddr][i] <= wdata[i];
  end

  always_comb
    for (int i = 0; i < 2 * PE; i++)
      rdata[i] = rd_ch ? ch2llr(ch_mem[$clog2(NCW)'(raddr)][i]) : a_mem[raddr][i];
endmodule
