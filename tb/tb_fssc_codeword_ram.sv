// tb_fssc_codeword_ram: writes random root-stage words (bank 0 = codeword
// bits k*PE.., bank 1 = N/2 + k*PE..) and checks that every natural-order
// half word read back holds the right codeword bits.
module tb_fssc_codeword_ram;
  localparam int PE = 64;
  localparam int N = 1024;
  localparam int NW = N / (2 * PE);

  logic clk = 0;
  always #5 clk = ~clk;
  logic                    we;
  logic [$clog2(NW)-1:0]   waddr;
  logic [2*PE-1:0]         wdata;
  logic [$clog2(N/PE)-1:0] raddr;
  logic [PE-1:0]           rdata;
  fssc_codeword_ram #(.PE(PE), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  bit cw [N];
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = '0; raddr = 0;
    for (int rep = 0; rep < 50; rep++) begin
      foreach (cw[i]) cw[i] = 1'($urandom);
      for (int k = 0; k < NW; k++) begin
        @(negedge clk);
        we = 1; waddr = k[$clog2(NW)-1:0];
        for (int j = 0; j < PE; j++) begin
          wdata[j]      = cw[k * PE + j];
          wdata[PE + j] = cw[N / 2 + k * PE + j];
        end
      end
      @(negedge clk);
      we = 0;
      for (int h = 0; h < N / PE; h++) begin
        raddr = h[$clog2(N/PE)-1:0];
        #1;
        for (int j = 0; j < PE; j++) begin
          checks++;
          if (rdata[j] !== cw[h * PE + j]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
