// fssc_ml: exhaustive-search ML decoder for the 4-bit node FFII (u0=u1=0,
// u2,u3 free). The four candidate codewords are x = (u2^u3, u3, u2^u3, u3);
// each is scored with the correlation sum of (1-2x_i)*alpha_i and the best
// one is returned (the first candidate wins a tie). Purely combinational.
module fssc_ml import fssc_pkg::*; (
  input  llr_t       a [4],
  output logic [3:0] b
);
  localparam int SW = QI + 3;
  logic signed [SW-1:0] score [4];
  logic [1:0] best;
  always_comb begin
    for (int c = 0; c < 4; c++) begin
      // candidate c = {u2,u3}: bit0 of the codeword pattern is u2^u3, bit1 is u3
      logic xa, xb;
      xa = c[1] ^ c[0];
      xb = c[0];
      score[c] = (xa ? -SW'(a[0]) : SW'(a[0])) + (xb ? -SW'(a[1]) : SW'(a[1]))
               + (xa ? -SW'(a[2]) : SW'(a[2])) + (xb ? -SW'(a[3]) : SW'(a[3]));
    end
    best = 2'd0;
    for (int c = 1; c < 4; c++)
      if (score[c] > score[best]) best = 2'(c);
    b = {best[0], best[1] ^ best[0], best[0], best[1] ^ best[0]};
  end
endmodule
