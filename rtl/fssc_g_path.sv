// fssc_g_path: the original G module with its Sign and SPC decoders and the
// original combine behind them. It serves G and the operations that decode a
// right child without visiting it: P-R1 (right child Rate-1, hard decisions),
// P-01 (same with a Rate-0 left child), P-RSPC (right child SPC) and P-0SPC.
//
// The P_e lanes compute G (Eq. (2)) on the node's LLR pairs; the left-child
// partial sums come from the beta0 unit, or are forced to 0 (zero_l, the
// 0/beta0 multiplexer). For P- operations the right-child estimate (Sign or
// SPC output) is combined with beta_l into the node's partial sums.
//   * high = 1: one high-stage step. Lane i pairs a[i] with a[i+PE]; beta_l is
//     bank `bank` of the beta0 word. Outputs: `lane` (the right child's half
//     word) or `b_out` = {beta_r, beta_l ^ beta_r} (full word).
//     SPC at high stage is only valid when the node is one word (stage
//     log2(PE)+1): the parity is taken over all P_e lanes.
//   * high = 0: node at stage `stage` (<= log2 PE) of the packed word; the
//     child field (stage-1) or the node's own field (beta) is written.
// Purely combinational.
module fssc_g_path import fssc_pkg::*; #(
  parameter int PE = 64
) (
  input  logic            high,
  input  logic [3:0]      stage,
  input  logic [1:0]      mode,      // 0: G, 1: Sign (P-R1/P-01), 2: SPC (P-RSPC/P-0SPC)
  input  logic            zero_l,
  input  logic            bank,
  input  llr_t            a       [2*PE],
  input  logic [2*PE-1:0] b0,
  output llr_t            lane    [PE],
  output llr_t            lo_data [2*PE],
  output logic [2*PE-1:0] lo_mask,
  output logic [2*PE-1:0] b_out,
  output logic [2*PE-1:0] b_mask
);
  localparam int LOGPE = $clog2(PE);

  llr_t          x [PE], y [PE];
  logic [PE-1:0] bl, valid, br_sign, br_spc, br;

  // operand gather
  always_comb begin
    for (int j = 0; j < PE; j++) begin
      x[j] = a[j];
      y[j] = a[j + PE];
      bl[j] = bank ? b0[PE + j] : b0[j];
      valid[j] = high;
    end
    if (!high)
      for (int s = 3; s <= LOGPE; s++)
        if (32'(stage) == s)
          for (int j = 0; j < (1 << (s - 1)); j++) begin
            x[j]     = a[lo_off(PE, s) + j];
            y[j]     = a[lo_off(PE, s) + j + (1 << (s - 1))];
            bl[j]    = b0[lo_off(PE, s - 1) + j];
            valid[j] = 1'b1;
          end
    if (zero_l) bl = '0;
  end

  always_comb
    for (int j = 0; j < PE; j++) begin
      lane[j]    = g_op(x[j], y[j], bl[j]);
      br_sign[j] = hd(lane[j]);
    end

  fssc_spc #(.W(PE)) u_spc (.a(lane), .valid(valid), .b(br_spc));

  assign br = (mode == 2'd2) ? br_spc : br_sign;

  // outputs
  always_comb begin
    for (int k = 0; k < 2 * PE; k++) begin
      lo_data[k] = '0;
      lo_mask[k] = 1'b0;
    end
    b_out  = '0;
    b_mask = '0;
    if (high) begin
      b_out  = {br, bl ^ br};
      b_mask = '1;
    end else begin
      for (int s = 3; s <= LOGPE; s++)
        if (32'(stage) == s)
          for (int j = 0; j < (1 << (s - 1)); j++) begin
            lo_data[lo_off(PE, s - 1) + j] = lane[j];
            lo_mask[lo_off(PE, s - 1) + j] = 1'b1;
            b_out[lo_off(PE, s) + j]                  = bl[j] ^ br[j];
            b_out[lo_off(PE, s) + j + (1 << (s - 1))] = br[j];
            b_mask[lo_off(PE, s) + j]                  = 1'b1;
            b_mask[lo_off(PE, s) + j + (1 << (s - 1))] = 1'b1;
          end
    end
  end
endmodule
