// fp_add: fully pipelined IEEE-754 binary64 adder/subtractor (the FADD of the
// PE, and each +/- node of the RDP).
//
// y = a + b, or a - b when sub is set.  The operands are ordered by magnitude,
// the smaller significand is aligned with its shifted-out bits kept as a
// sticky bit, the sum or difference is normalised with a leading-zero count
// and rounded to nearest-even.  Subnormals are flushed to zero; an exact zero
// difference is +0.  One operation per cycle, result LAT cycles later, with a
// TAG_W-bit tag carried alongside.  LAT = 5 is this design's choice (the paper
// gives no adder depth; 5 + 5 + 5 gives the 15-stage DOT4 it does give).
module fp_add
  import blas_pkg::*;
#(
  parameter int LAT   = 5,
  parameter int TAG_W = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  dword_t           a,
  input  dword_t           b,
  input  logic             sub,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output dword_t           y,
  output logic [TAG_W-1:0] out_tag
);
  function automatic dword_t fadd(dword_t x, dword_t z);
    dword_t big, sml;
    logic [109:0] mb, ms, r;
    logic [11:0] d;
    logic signed [13:0] e;
    int lz;
    if (is_nan(x) || is_nan(z)) return QNAN;
    if (is_inf(x) && is_inf(z)) return (x[63] == z[63]) ? x : QNAN;
    if (is_inf(x)) return x;
    if (is_inf(z)) return z;
    if (is_zero(x) && is_zero(z)) return {x[63] & z[63], 63'h0};
    if (is_zero(x)) return z;
    if (is_zero(z)) return x;
    if (x[62:0] >= z[62:0]) begin big = x; sml = z; end
    else                    begin big = z; sml = x; end
    d  = 12'(big[62:52]) - 12'(sml[62:52]);
    if (d > 12'd63) d = 12'd63;
    mb = {1'b0, 1'b1, big[51:0], 56'h0};
    ms = {1'b0, 1'b1, sml[51:0], 56'h0} >> d;
    // keep every shifted-out bit of the smaller operand as sticky
    if (({1'b1, sml[51:0], 56'h0} & ~({109{1'b1}} << d)) != '0) ms[0] = 1'b1;
    e  = 14'(big[62:52]);
    if (big[63] == sml[63]) r = mb + ms;
    else                    r = mb - ms;
    if (r == '0) return 64'h0;
    if (r[109]) begin
      r = r >> 1 | 110'(r[0]);
      e = e + 14'sd1;
    end else begin
      lz = 0;
      for (int i = 108; i >= 0; i--) begin
        if (r[i]) break;
        lz++;
      end
      r = r << lz;
      e = e - 14'(lz);
    end
    return round_pack(big[63], e, r[108:56], r[55], |r[54:0]);
  endfunction

  dword_t y_c;
  assign y_c = fadd(a, {b[63] ^ sub, b[62:0]});

  pipe_delay #(.W(64 + TAG_W), .STAGES(LAT)) u_pipe (
    .clk, .rst_n, .in_valid,
    .in_data ({y_c, in_tag}),
    .out_valid,
    .out_data({y, out_tag})
  );
endmodule
