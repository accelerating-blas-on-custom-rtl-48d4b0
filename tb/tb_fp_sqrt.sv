// tb_fp_sqrt: random positive binary64 square roots (odd and even exponents)
// checked bit-exactly against the simulator's $sqrt, perfect squares, and the
// special cases -0, +inf, negative and NaN.  A normal root must take exactly
// 55 cycles and busy must stay high while the unit iterates.
module tb_fp_sqrt;
  import blas_pkg::*;
  localparam int N = 300;
  localparam int LAT = 55;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, busy;
  dword_t a, y;
  logic [5:0] in_tag, out_tag;
  int checks = 0, failures = 0;

  fp_sqrt #(.TAG_W(6)) dut (.*);

  task automatic op(dword_t x, dword_t exp, int lat);
    int n;
    logic [5:0] g;
    g = 6'($urandom);
    a <= x; in_valid <= 1'b1; in_tag <= g;
    @(posedge clk);
    in_valid <= 1'b0;
    #1;
    n = 0;
    while (!out_valid) begin
      if (lat > 0 && !busy) begin failures++; $display("FAIL busy low while iterating"); end
      @(posedge clk); #1; n++;
      if (n > 200) break;
    end
    checks++;
    if (y !== exp || n != lat || out_tag != g) begin
      failures++;
      $display("FAIL sqrt(%h) = %h exp %h, %0d cycles", x, y, exp, n);
    end
    @(posedge clk);
  endtask

  initial begin
    in_valid = 0; a = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      dword_t x;
      x = {1'b0, 11'(1023 - 300 + int'($urandom_range(0, 600))), $urandom, 20'($urandom)};
      op(x, $realtobits($sqrt($bitstoreal(x))), LAT);
    end
    for (int k = 1; k < 20; k++) begin
      real r;
      r = real'(k * k * 3);
      op($realtobits(r), $realtobits($sqrt(r)), LAT);
    end
    op(64'h8000_0000_0000_0000, 64'h8000_0000_0000_0000, 0);   // -0
    op(64'h7ff0_0000_0000_0000, 64'h7ff0_0000_0000_0000, 0);   // +inf
    op(64'hc010_0000_0000_0000, QNAN, 0);                      // -4
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
