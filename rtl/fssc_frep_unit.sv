// fssc_frep_unit: merged F-Rep operation, low stage only.
// For the node at stage s in the packed alpha word whose left child is a
// repetition node of 8, 16 or 32 bits (s = 4, 5, 6, and s <= log2 PE), it
// computes the left child's LLRs with F (Eq. (1)) and decodes the repetition
// node (Eq. (6)) in the same step. The child's LLRs are not stored; its
// partial sums (all equal to the decision) are written to the stage s-1 field
// of the left-child beta unit. Purely combinational.
module fssc_frep_unit import fssc_pkg::*; #(
  parameter int PE = 64
) (
  input  logic [3:0]      stage,
  input  llr_t            a      [2*PE],
  output logic [2*PE-1:0] b_out,
  output logic [2*PE-1:0] b_mask
);
  localparam int LOGPE = $clog2(PE);
  localparam int SMAX  = (LOGPE < 6) ? LOGPE : 6;

  logic [15:0] dec;
  for (genvar s = 4; s <= SMAX; s++) begin : g_s
    localparam int H = 1 << (s - 1);
    llr_t fl [H];
    always_comb
      for (int j = 0; j < H; j++)
        fl[j] = f_op(a[lo_off(PE, s) + j], a[lo_off(PE, s) + j + H]);
    fssc_rep #(.W(H)) u_rep (.a(fl), .d(dec[s]));
  end
  for (genvar s = 0; s < 16; s++) begin : g_nu
    if (s < 4 || s > SMAX) begin : g_z
      assign dec[s] = 1'b0;
    end
  end

  always_comb begin
    b_out  = '0;
    b_mask = '0;
    for (int s = 4; s <= SMAX; s++)
      if (32'(stage) == s)
        for (int j = 0; j < (1 << (s - 1)); j++) begin
          b_out[lo_off(PE, s - 1) + j]  = dec[s];
          b_mask[lo_off(PE, s - 1) + j] = 1'b1;
        end
  end
endmodule
