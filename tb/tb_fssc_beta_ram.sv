// tb_fssc_beta_ram: random masked writes to either unit and reads of both
// units at a common address, compared with shadow copies.
module tb_fssc_beta_ram;
  import fssc_mem_pkg::*;
  localparam int PE = 64;
  localparam int N = 1024;
  localparam int DEPTH = depth_of(PE, $clog2(N)) + 1;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;
  logic            we, wsel;
  logic [AW-1:0]   waddr, raddr;
  logic [2*PE-1:0] wdata, wmask, rdata0, rdata1;
  fssc_beta_ram #(.PE(PE), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  logic [2*PE-1:0] sh [2][DEPTH];
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [2*PE-1:0] rnd_word();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    we = 0; wsel = 0; waddr = 0; raddr = 0; wdata = '0; wmask = '0;
    for (int u = 0; u < 2; u++)
      for (int w = 0; w < DEPTH; w++) begin
        @(negedge clk);
        we = 1; wsel = 1'(u); waddr = AW'(w); wmask = '1; wdata = rnd_word(); sh[u][w] = wdata;
      end
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      we = 1'($urandom % 3 != 0); wsel = 1'($urandom); waddr = AW'($urandom % DEPTH);
      wdata = rnd_word(); wmask = rnd_word();
      if (we) sh[wsel][waddr] = (sh[wsel][waddr] & ~wmask) | (wdata & wmask);
      @(posedge clk); #1;
      raddr = AW'($urandom % DEPTH);
      #1;
      checks += 2;
      if (rdata0 !== sh[0][raddr]) failures++;
      if (rdata1 !== sh[1][raddr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
