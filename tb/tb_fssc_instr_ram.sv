// tb_fssc_instr_ram: fills the whole instruction memory with random
// instructions, then mixes random writes with random reads and compares every
// read (combinational port) with a shadow copy.
module tb_fssc_instr_ram;
  import fssc_pkg::*;
  localparam int DEPTH = 512;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;
  logic          we;
  logic [AW-1:0] waddr, raddr;
  instr_t        wdata, rdata;
  fssc_instr_ram #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  instr_t shadow [DEPTH];
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic instr_t rnd_instr();
    instr_t i;
    i = instr_t'($urandom);
    i.op = op_e'($urandom % 26);
    return i;
  endfunction

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk);
      we = 1; waddr = AW'(k); wdata = rnd_instr(); shadow[k] = wdata;
    end
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      we = 1'($urandom % 3 == 0);
      waddr = AW'($urandom); wdata = rnd_instr();
      if (we) shadow[waddr] = wdata;
      @(posedge clk); #1;
      raddr = AW'($urandom);
      #1;
      checks++;
      if (rdata !== shadow[raddr]) begin
        failures++;
        if (failures < 5) $display("addr %0d got %h exp %h", raddr, rdata, shadow[raddr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
