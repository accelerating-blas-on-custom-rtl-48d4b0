// tb_fp_mul: random binary64 products checked bit-exactly against the
// simulator's own real multiply (round-to-nearest-even), plus special values
// (zero, infinity, NaN, overflow).  Operands are kept in the normal range so
// that flushing subnormals never matters.  One operation is issued per cycle
// and every result must arrive exactly LAT cycles after its issue.
module tb_fp_mul;
  import blas_pkg::*;
  localparam int LAT = 5;
  localparam int N   = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  dword_t a, b, y;
  logic [5:0] in_tag, out_tag;
  int checks = 0, failures = 0, cyc = 0;

  fp_mul #(.LAT(LAT), .TAG_W(6)) dut (.*);

  function automatic dword_t rnd(int span);
    logic [10:0] e;
    e = 11'(1023 - span + int'($urandom_range(0, 2 * span)));
    return {1'($urandom), e, $urandom, 20'($urandom)};
  endfunction

  dword_t ea [$], eb [$], ey [$];
  int     et [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      checks++;
      if (ey.size() == 0) begin failures++; $display("unexpected result"); end
      else begin
        dword_t e; int t;
        e = ey.pop_front(); t = et.pop_front();
        if (y !== e || cyc - t != LAT) begin
          failures++;
          $display("FAIL mul y=%h exp=%h lat=%0d", y, e, cyc - t);
        end
      end
    end
  end

  task automatic issue(dword_t x, dword_t z, dword_t exp);
    a <= x; b <= z; in_valid <= 1'b1; in_tag <= 6'($urandom);
    ey.push_back(exp); et.push_back(cyc + 1);
    @(posedge clk);
  endtask

  initial begin
    in_valid = 0; a = 0; b = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      dword_t x, z;
      x = rnd(200); z = rnd(200);
      issue(x, z, $realtobits($bitstoreal(x) * $bitstoreal(z)));
    end
    issue(64'h3ff0_0000_0000_0000, 64'h0, 64'h0);                         // 1 * 0
    issue(64'hbff0_0000_0000_0000, 64'h7ff0_0000_0000_0000, 64'hfff0_0000_0000_0000); // -1 * inf
    issue(64'h0, 64'h7ff0_0000_0000_0000, QNAN);                          // 0 * inf
    issue(64'h7fe0_0000_0000_0000, 64'h4000_0000_0000_0000, 64'h7ff0_0000_0000_0000); // overflow
    issue(64'h7ff8_0000_0000_0001, 64'h3ff0_0000_0000_0000, QNAN);        // NaN
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
