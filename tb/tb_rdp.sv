// tb_rdp: drives the Reconfigurable Data-path with one random DOT per cycle in
// all four configurations (DOT1..DOT4) and all +/- settings.  The expected
// value is computed with reals in the same association order as the tree,
// ((a0*b0 +/- a1*b1) + (a2*b2 +/- a3*b3)) with unused lanes left out, and must
// match bit-exactly.  Each result must come out exactly 15 cycles after issue,
// the DOT4 pipeline depth the paper gives, with its tag.
module tb_rdp;
  import blas_pkg::*;
  localparam int N   = 500;
  localparam int LAT = 15;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, sub0, sub1;
  dword_t a [BLK], b [BLK], y;
  logic [1:0] n_m1;
  logic [5:0] in_tag, out_tag;
  int checks = 0, failures = 0, cyc = 0;
  int cfg_seen [4] = '{0, 0, 0, 0};

  rdp dut (.*);

  function automatic dword_t rnd();
    return {1'($urandom), 11'(1023 - 40 + int'($urandom_range(0, 80))), $urandom, 20'($urandom)};
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
          $display("FAIL rdp y=%h exp=%h lat=%0d", y, e, cyc - t);
        end
      end
    end
  end

  initial begin
    in_valid = 0; n_m1 = 0; sub0 = 0; sub1 = 0; in_tag = 0;
    for (int i = 0; i < BLK; i++) begin a[i] = 0; b[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int k = 0; k < N; k++) begin
      real p [BLK];
      real l, r, res;
      logic [1:0] n;
      logic s0, s1;
      logic [5:0] g;
      n = 2'($urandom); s0 = 1'($urandom); s1 = 1'($urandom); g = 6'($urandom);
      cfg_seen[n]++;
      for (int i = 0; i < BLK; i++) begin
        dword_t x, z;
        x = rnd(); z = rnd();
        a[i] <= x; b[i] <= z;
        p[i] = $bitstoreal(x) * $bitstoreal(z);
      end
      case (n)
        2'd0: res = p[0];
        2'd1: res = s0 ? p[0] - p[1] : p[0] + p[1];
        2'd2: begin l = s0 ? p[0] - p[1] : p[0] + p[1]; res = l + p[2]; end
        default: begin
          l = s0 ? p[0] - p[1] : p[0] + p[1];
          r = s1 ? p[2] - p[3] : p[2] + p[3];
          res = l + r;
        end
      endcase
      n_m1 <= n; sub0 <= s0; sub1 <= s1; in_tag <= g; in_valid <= 1'b1;
      ey.push_back($realtobits(res)); et.push_back(cyc + 1); etag.push_back(g);
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (LAT + 3) @(posedge clk);
    if (ey.size() != 0) begin failures++; $display("missing results"); end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (cfg_seen[i] == 0) begin failures++; $display("FAIL DOT%0d never issued", i + 1); end
    end
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
