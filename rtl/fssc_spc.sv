// fssc_spc: single-parity-check node decoder, Eq. (7)-(10).
// Takes hard decisions on all W LLRs, computes their parity and, when the
// parity is odd, flips the hard decision of the least reliable position
// (smallest |LLR|; the lowest index wins a tie). Lanes with valid=0 are left
// out: they never win the minimum and do not enter the parity, so one W-wide
// instance serves any smaller node size. Purely combinational.
module fssc_spc import fssc_pkg::*; #(
  parameter int W = 8
) (
  input  llr_t       a     [W],
  input  logic [W-1:0] valid,
  output logic [W-1:0] b
);
  logic [W-1:0]       hdv;
  logic               parity;
  logic [QI-1:0]      minv;
  logic [$clog2(W+1)-1:0] minj;
  always_comb begin
    parity = 1'b0;
    minv   = '1;
    minj   = '0;
    for (int i = 0; i < W; i++) begin
      hdv[i] = valid[i] & hd(a[i]);
      parity = parity ^ hdv[i];
      if (valid[i] && {1'b0, mag(a[i])} < minv) begin
        minv = {1'b0, mag(a[i])};
        minj = ($clog2(W+1))'(i);
      end
    end
    b = hdv;
    for (int i = 0; i < W; i++)
      if (minj == ($clog2(W+1))'(i)) b[i] = hdv[i] ^ parity;
  end
endmodule
