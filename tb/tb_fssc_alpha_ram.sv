// tb_fssc_alpha_ram: random channel half-word writes, masked alpha writes and
// reads of both arrays, all compared with shadow copies. Channel reads must
// come back sign extended from QC to QI bits.
module tb_fssc_alpha_ram;
  import fssc_pkg::*;
  import fssc_mem_pkg::*;
  import fssc_tb_pkg::*;
  localparam int PE = 64;
  localparam int N = 1024;
  localparam int DEPTH = depth_of(PE, $clog2(N)) + 1;
  localparam int NCW = N / (2 * PE);
  localparam int AW = $clog2(DEPTH);
  localparam int CW = $clog2(NCW);

  logic clk = 0;
  always #5 clk = ~clk;
  logic            ch_we, ch_wbank, we, rd_ch;
  logic [CW-1:0]   ch_waddr;
  chllr_t          ch_wdata [PE];
  logic [AW-1:0]   waddr, raddr;
  llr_t            wdata [2*PE];
  logic [2*PE-1:0] wmask;
  llr_t            rdata [2*PE];
  fssc_alpha_ram #(.PE(PE), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  int sh_ch [NCW][2*PE];
  int sh_a  [DEPTH][2*PE];
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ch_we = 0; we = 0; rd_ch = 0; ch_wbank = 0; ch_waddr = 0; waddr = 0; raddr = 0; wmask = '0;
    for (int i = 0; i < PE; i++) ch_wdata[i] = '0;
    for (int i = 0; i < 2 * PE; i++) wdata[i] = '0;
    // initialise everything through the write ports
    for (int w = 0; w < NCW; w++)
      for (int b = 0; b < 2; b++) begin
        @(negedge clk);
        ch_we = 1; ch_waddr = CW'(w); ch_wbank = 1'(b);
        for (int i = 0; i < PE; i++) begin
          int v;
          v = int'($urandom % 31) - 15;
          ch_wdata[i] = chllr_t'(v); sh_ch[w][b * PE + i] = v;
        end
      end
    for (int w = 0; w < DEPTH; w++) begin
      @(negedge clk);
      ch_we = 0; we = 1; waddr = AW'(w); wmask = '1;
      for (int i = 0; i < 2 * PE; i++) begin
        int v;
        v = rnd_llr(); wdata[i] = llr_t'(v); sh_a[w][i] = v;
      end
    end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      ch_we = 1'($urandom % 4 == 0); ch_waddr = CW'($urandom); ch_wbank = 1'($urandom);
      for (int i = 0; i < PE; i++) begin
        int v;
        v = int'($urandom % 31) - 15;
        ch_wdata[i] = chllr_t'(v);
        if (ch_we) sh_ch[ch_waddr][ch_wbank * PE + i] = v;
      end
      we = 1'($urandom % 2); waddr = AW'($urandom % DEPTH);
      for (int i = 0; i < 2 * PE; i++) begin
        int v;
        v = rnd_llr(); wdata[i] = llr_t'(v); wmask[i] = 1'($urandom);
        if (we && wmask[i]) sh_a[waddr][i] = v;
      end
      @(posedge clk); #1;
      rd_ch = 1'($urandom);
      raddr = rd_ch ? AW'($urandom % NCW) : AW'($urandom % DEPTH);
      #1;
      for (int i = 0; i < 2 * PE; i++) begin
        int e;
        e = rd_ch ? sh_ch[raddr][i] : sh_a[raddr][i];
        checks++;
        if (int'(rdata[i]) != e) begin
          failures++;
          if (failures < 5) $display("rd_ch=%0d addr %0d lane %0d got %0d exp %0d", rd_ch, raddr, i, rdata[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
