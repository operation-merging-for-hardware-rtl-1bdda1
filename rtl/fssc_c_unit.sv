// fssc_c_unit: combine unit for C and C0 (Eq. (3)), single or merged.
//
// C builds a node's partial sums from its children's: [beta_l ^ beta_r, beta_r].
// C0 is the same with beta_l = 0.
//   * high = 1: one high-stage step. A half word of the left-child unit (beta0)
//     and of the right-child unit (beta1), both taken from bank `bank`, give one
//     full output word {beta_r, beta_l ^ beta_r}.
//   * high = 0: `cnt` (1..3) cascaded combines starting at node stage `stage`
//     (<= log2 PE) inside the packed low-stage words. The first combine takes
//     beta_l and beta_r from the stage-1 fields of the two units; each further
//     combine takes beta_l from beta0 and beta_r from the result of the combine
//     below it. Only the last result is written (lo_mask), since the
//     intermediate ones are right-child partial sums that nothing else reads.
// Purely combinational.
module fssc_c_unit import fssc_pkg::*; #(
  parameter int PE = 64
) (
  input  logic            high,
  input  logic [3:0]      stage,
  input  logic [1:0]      cnt,
  input  logic            zero_l,
  input  logic            bank,
  input  logic [2*PE-1:0] b0,
  input  logic [2*PE-1:0] b1,
  output logic [2*PE-1:0] out,
  output logic [2*PE-1:0] out_mask
);
  localparam int LOGPE = $clog2(PE);

  // one result field per node stage t = 3 .. log2 PE
  for (genvar t = 3; t <= LOGPE; t++) begin : g_st
    localparam int H = 1 << (t - 1);
    logic [H-1:0]   l, r;
    logic [2*H-1:0] res;
    assign l = zero_l ? '0 : b0[lo_off(PE, t - 1) +: H];
    if (t > 3) begin : g_ch
      assign r = (32'(stage) == t) ? b1[lo_off(PE, t - 1) +: H] : g_st[t - 1].res;
    end else begin : g_bot
      assign r = b1[lo_off(PE, t - 1) +: H];
    end
    assign res = {r, l ^ r};
  end

  logic [PE-1:0] hl, hr;
  assign hl = zero_l ? '0 : (bank ? b0[PE +: PE] : b0[0 +: PE]);
  assign hr = bank ? b1[PE +: PE] : b1[0 +: PE];

  // low-stage image: every result at its own field, mask on the last one
  logic [2*PE-1:0] lo, lo_mask;
  assign lo[2*PE-1 -: 4] = '0;
  assign lo_mask[2*PE-1 -: 4] = '0;
  for (genvar t = 2; t <= LOGPE; t++) begin : g_img
    localparam int W = 1 << t;
    if (t >= 3) begin : g_r
      assign lo[lo_off(PE, t) +: W] = g_st[t].res;
    end else begin : g_z
      assign lo[lo_off(PE, t) +: W] = '0;
    end
    assign lo_mask[lo_off(PE, t) +: W] = {W{32'(stage) + 32'(cnt) - 1 == t}};
  end

  assign out      = high ? {hr, hl ^ hr} : lo;
  assign out_mask = high ? '1 : lo_mask;
endmodule
