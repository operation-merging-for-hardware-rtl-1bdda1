// fssc_gf_unit: merged G-F operation, low stage only.
// For the node at stage s (4 <= s <= log2 PE) in the packed alpha word it
// computes the right child's LLRs with G (Eq. (2), left partial sums from the
// stage s-1 field of the beta0 word) and, in the same step, the F of that
// right child (Eq. (1)). Both results are kept (the right child's LLRs are
// needed again for its own G later), so the write mask covers the stage s-1
// and s-2 fields. Purely combinational.
module fssc_gf_unit import fssc_pkg::*; #(
  parameter int PE = 64
) (
  input  logic [3:0]      stage,
  input  llr_t            a       [2*PE],
  input  logic [2*PE-1:0] b0,
  output llr_t            lo_data [2*PE],
  output logic [2*PE-1:0] lo_mask
);
  localparam int LOGPE = $clog2(PE);
  always_comb begin
    for (int k = 0; k < 2 * PE; k++) begin
      lo_data[k] = '0;
      lo_mask[k] = 1'b0;
    end
    for (int s = 4; s <= LOGPE; s++)
      if (32'(stage) == s) begin
        for (int j = 0; j < (1 << (s - 1)); j++) begin
          lo_data[lo_off(PE, s - 1) + j] = g_op(a[lo_off(PE, s) + j],
                                                a[lo_off(PE, s) + j + (1 << (s - 1))],
                                                b0[lo_off(PE, s - 1) + j]);
          lo_mask[lo_off(PE, s - 1) + j] = 1'b1;
        end
        for (int j = 0; j < (1 << (s - 2)); j++) begin
          lo_data[lo_off(PE, s - 2) + j] = f_op(lo_data[lo_off(PE, s - 1) + j],
                                                lo_data[lo_off(PE, s - 1) + j + (1 << (s - 2))]);
          lo_mask[lo_off(PE, s - 2) + j] = 1'b1;
        end
      end
  end
endmodule
