// tb_fp_div: random binary64 quotients checked bit-exactly against the
// simulator's real division (round-to-nearest-even), plus x/0, 0/0, inf/inf
// and 0/x.  Operations are issued one at a time; busy must hold while the
// divider iterates, and a normal quotient must be ready 55 cycles after the accepting edge.
module tb_fp_div;
  import blas_pkg::*;
  localparam int N = 300;
  localparam int LAT = 55;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, busy;
  dword_t a, b, y;
  logic [5:0] in_tag, out_tag;
  int checks = 0, failures = 0;

  fp_div #(.TAG_W(6)) dut (.*);

  function automatic dword_t rnd(int span);
    logic [10:0] e;
    e = 11'(1023 - span + int'($urandom_range(0, 2 * span)));
    return {1'($urandom), e, $urandom, 20'($urandom)};
  endfunction

  task automatic op(dword_t x, dword_t z, dword_t exp, int lat);
    int n;
    logic [5:0] g;
    g = 6'($urandom);
    a <= x; b <= z; in_valid <= 1'b1; in_tag <= g;
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
      $display("FAIL div %h / %h = %h exp %h, %0d cycles", x, z, y, exp, n);
    end
    @(posedge clk);
  endtask

  initial begin
    in_valid = 0; a = 0; b = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      dword_t x, z;
      x = rnd(300); z = rnd(300);
      op(x, z, $realtobits($bitstoreal(x) / $bitstoreal(z)), LAT);
    end
    op(64'h4000_0000_0000_0000, 64'h0, 64'h7ff0_0000_0000_0000, 0);     // 2/0
    op(64'h0, 64'h0, QNAN, 0);                                          // 0/0
    op(64'h0, 64'hc000_0000_0000_0000, 64'h8000_0000_0000_0000, 0);     // 0/-2
    op(64'h7ff0_0000_0000_0000, 64'h7ff0_0000_0000_0000, QNAN, 0);      // inf/inf
    op(64'h4008_0000_0000_0000, 64'h4008_0000_0000_0000, 64'h3ff0_0000_0000_0000, LAT); // 3/3
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
