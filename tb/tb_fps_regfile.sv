// tb_fps_regfile: random reads and writes on all ports of the 64 x 64-bit
// Register File against a reference array kept in the test bench, including
// several ports writing one register in the same cycle (highest port wins)
// and reads of a register in the cycle it is written (old value).
module tb_fps_regfile;
  import blas_pkg::*;
  localparam int NR = 12, NW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [5:0] raddr [NR];
  dword_t     rdata [NR];
  logic       we    [NW];
  logic [5:0] waddr [NW];
  dword_t     wdata [NW];
  fps_regfile #(.NR(NR), .NW(NW)) dut (.*);
  dword_t ref_r [64];
  int checks = 0, failures = 0;

  initial begin
    for (int p = 0; p < NW; p++) begin we[p] = 0; waddr[p] = 0; wdata[p] = 0; end
    for (int p = 0; p < NR; p++) raddr[p] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 64; r++) ref_r[r] = '0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int p = 0; p < NR; p++) begin
        checks++;
        if (rdata[p] !== ref_r[raddr[p]]) begin
          failures++;
          if (failures < 5) $display("FAIL port %0d r%0d = %h exp %h", p, raddr[p], rdata[p], ref_r[raddr[p]]);
        end
      end
      for (int p = 0; p < NW; p++) begin
        we[p] = 1'($urandom_range(0, 2) == 0);
        waddr[p] = (t % 5 == 0) ? 6'd7 : 6'($urandom);
        wdata[p] = {$urandom, $urandom};
      end
      for (int p = 0; p < NR; p++) raddr[p] = 6'($urandom);
      for (int p = 0; p < NW; p++) if (we[p]) ref_r[waddr[p]] = wdata[p];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
