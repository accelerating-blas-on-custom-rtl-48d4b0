// tb_fp_add: random binary64 sums and differences checked bit-exactly against
// the simulator's real add/subtract (round-to-nearest-even).  Half the pairs
// have nearly equal exponents to exercise cancellation and renormalisation,
// the rest have distant exponents to exercise alignment and sticky rounding.
// Special values are checked too.  Every result must arrive LAT cycles after
// its issue.
module tb_fp_add;
  import blas_pkg::*;
  localparam int LAT = 5;
  localparam int N   = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, sub;
  dword_t a, b, y;
  logic [5:0] in_tag, out_tag;
  int checks = 0, failures = 0, cyc = 0;

  fp_add #(.LAT(LAT), .TAG_W(6)) dut (.*);

  function automatic dword_t rnd(int base, int span);
    logic [10:0] e;
    e = 11'(base - span + int'($urandom_range(0, 2 * span)));
    return {1'($urandom), e, $urandom, 20'($urandom)};
  endfunction

  dword_t ey [$];
  int     et [$];
  logic [5:0] etag [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      checks++;
      if (ey.size() == 0) begin failures++; $display("unexpected result"); end
      else begin
        dword_t e; int t; logic [5:0] g;
        e = ey.pop_front(); t = et.pop_front(); g = etag.pop_front();
        if (y !== e || cyc - t != LAT || out_tag != g) begin
          failures++;
          $display("FAIL add y=%h exp=%h lat=%0d", y, e, cyc - t);
        end
      end
    end
  end

  task automatic issue(dword_t x, dword_t z, logic s, dword_t exp);
    logic [5:0] g;
    g = 6'($urandom);
    a <= x; b <= z; sub <= s; in_valid <= 1'b1; in_tag <= g;
    ey.push_back(exp); et.push_back(cyc + 1); etag.push_back(g);
    @(posedge clk);
  endtask

  initial begin
    in_valid = 0; a = 0; b = 0; sub = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      dword_t x, z; logic s; real r;
      x = rnd(1023, 100);
      z = (i % 2 == 0) ? rnd(int'(x[62:52]), 2) : rnd(int'(x[62:52]), 70);
      if (i % 7 == 0) z = {~x[63], x[62:4], 4'($urandom)};   // heavy cancellation
      s = 1'($urandom);
      r = s ? $bitstoreal(x) - $bitstoreal(z) : $bitstoreal(x) + $bitstoreal(z);
      issue(x, z, s, $realtobits(r));
    end
    issue(64'h3ff0_0000_0000_0000, 64'h3ff0_0000_0000_0000, 1'b1, 64'h0);       // 1 - 1 = +0
    issue(64'h7ff0_0000_0000_0000, 64'h7ff0_0000_0000_0000, 1'b1, QNAN);        // inf - inf
    issue(64'h7ff0_0000_0000_0000, 64'h3ff0_0000_0000_0000, 1'b0, 64'h7ff0_0000_0000_0000);
    issue(64'h0, 64'h4000_0000_0000_0000, 1'b1, 64'hc000_0000_0000_0000);       // 0 - 2
    issue(64'h7fe0_0000_0000_0000, 64'h7fe0_0000_0000_0000, 1'b0, 64'h7ff0_0000_0000_0000);
    in_valid <= 1'b0;
    repeat (LAT + 3) @(posedge clk);
    if (ey.size() != 0) begin failures++; $display("missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
