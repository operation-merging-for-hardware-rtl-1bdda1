// fssc_fg0_unit: merged F-G0 operation, low stage only.
// For the node at stage s (4 <= s <= log2 PE) in the packed alpha word it
// computes the left child's LLRs with F (Eq. (1)) and, in the same step, the
// right grandchild's LLRs with G0 (Eq. (2), beta = 0), as the left child's own
// left child is Rate-0. The left child's LLRs are not needed again, so only
// the stage s-2 field is written. Purely combinational.
module fssc_fg0_unit import fssc_pkg::*; #(
  parameter int PE = 64
) (
  input  logic [3:0]      stage,
  input  llr_t            a       [2*PE],
  output llr_t            lo_data [2*PE],
  output logic [2*PE-1:0] lo_mask
);
  localparam int LOGPE = $clog2(PE);
  llr_t t1 [PE];
  always_comb begin
    for (int k = 0; k < 2 * PE; k++) begin
      lo_data[k] = '0;
      lo_mask[k] = 1'b0;
    end
    for (int k = 0; k < PE; k++) t1[k] = '0;
    for (int s = 4; s <= LOGPE; s++)
      if (32'(stage) == s) begin
        for (int j = 0; j < (1 << (s - 1)); j++)
          t1[j] = f_op(a[lo_off(PE, s) + j], a[lo_off(PE, s) + j + (1 << (s - 1))]);
        for (int j = 0; j < (1 << (s - 2)); j++) begin
          lo_data[lo_off(PE, s - 2) + j] = g_op(t1[j], t1[j + (1 << (s - 2))], 1'b0);
          lo_mask[lo_off(PE, s - 2) + j] = 1'b1;
        end
      end
  end
endmodule
