// fssc_codeword_ram: holds the estimated codeword, kept apart from the beta
// memory. The decoder writes it one full word (2*PE bits, layout of the root
// stage: word k = bits [k*PE, k*PE+PE) in bank 0 and [N/2+k*PE, ...) in bank 1)
// per cycle during the final combine. The read port returns PE bits of the
// codeword in natural order: half-word h holds codeword bits [h*PE, h*PE+PE).
module fssc_codeword_ram #(
  parameter int PE = 64,
  parameter int N  = 1024
) (
  input  logic            clk,
  input  logic            we,
  input  logic [$clog2(N/(2*PE))-1:0] waddr,
  input  logic [2*PE-1:0] wdata,
  input  logic [$clog2(N/PE)-1:0]     raddr,
  output logic [PE-1:0]   rdata
);
  localparam int NW = N / (2 * PE);
  logic [2*PE-1:0] mem [NW];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  logic [2*PE-1:0] w;
  assign w     = mem[raddr[$clog2(NW)-1:0]];
  assign rdata = raddr[$clog2(NW)] ? w[PE +: PE] : w[0 +: PE];
endmodule
