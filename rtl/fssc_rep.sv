// fssc_rep: repetition-node decision, Eq. (6).
// A repetition node carries one information bit repeated over all W positions,
// so its maximum-likelihood estimate is the sign of the sum of the W LLRs
// (0 when the sum is >= 0). The sum is kept at full width, so no saturation
// can flip the decision. Purely combinational.
module fssc_rep import fssc_pkg::*; #(
  parameter int W = 8
) (
  input  llr_t a [W],
  output logic d
);
  localparam int SW = QI + $clog2(W) + 1;
  logic signed [SW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < W; i++) sum = sum + SW'(a[i]);
    d = sum[SW-1];
  end
endmodule
