// fssc_instr_ram: instruction memory. The instruction sequence is compiled
// offline from the frozen-bit pattern and written once through the load port;
// the controller reads one instruction per step through a combinational port.
module fssc_instr_ram import fssc_pkg::*; #(
  parameter int DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  instr_t                   wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output instr_t                   rdata
);
  instr_t mem [DEPTH];
  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;
  assign rdata = mem[raddr];
endmodule
