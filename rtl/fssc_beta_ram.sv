// fssc_beta_ram: partial-sum (beta) memory, two units of identical layout.
// Unit 0 holds the partial sums of left children, unit 1 those of right
// children, so a combine step reads beta_l and beta_r at the same address
// and bank. Both units are read at one common address (combinational read);
// one of them (wsel) is written per cycle with a per-bit mask. Word layout as
// in fssc_mem_pkg; the root stage goes to the codeword memory instead.
module fssc_beta_ram import fssc_mem_pkg::*; #(
  parameter int PE = 64,
  parameter int N  = 1024
) (
  input  logic            clk,
  input  logic            we,
  input  logic            wsel,
  input  logic [$clog2(depth_of(PE, $clog2(N)) + 1)-1:0] waddr,
  input  logic [2*PE-1:0] wdata,
  input  logic [2*PE-1:0] wmask,
  input  logic [$clog2(depth_of(PE, $clog2(N)) + 1)-1:0] raddr,
  output logic [2*PE-1:0] rdata0,
  output logic [2*PE-1:0] rdata1
);
  localparam int DEPTH = depth_of(PE, $clog2(N)) + 1;

  logic [2*PE-1:0] mem0 [DEPTH];
  logic [2*PE-1:0] mem1 [DEPTH];

  always_ff @(posedge clk)
    if (we) begin
      if (wsel) mem1[waddr] <= (mem1[waddr] & ~wmask) | (wdata & wmask);
      else      mem0[waddr] <= (mem0[waddr] & ~wmask) | (wdata & wmask);
    end

  assign rdata0 = mem0[raddr];
  assign rdata1 = mem1[raddr];
endmodule
