// fp_mul: fully pipelined IEEE-754 binary64 multiplier (the FMUL of the PE).
//
// The 53x53-bit significand product is normalised by at most one place and
// rounded to nearest-even; exponent overflow gives infinity.  Subnormal inputs
// and results are flushed to zero, NaN and infinity follow IEEE-754 (a NaN
// result is the default quiet NaN).  One operation is accepted per cycle and
// its result appears LAT cycles later with out_valid; a TAG_W-bit tag (the
// destination register in the PE) travels with it.
//
// The paper names a fully pipelined double-precision multiplier but gives no
// depth; LAT = 5 is chosen so that the DOT4 data-path (one multiply and two
// add levels, see rdp) has the 15 stages the paper gives.
module fp_mul
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
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output dword_t           y,
  output logic [TAG_W-1:0] out_tag
);
  function automatic dword_t fmul(dword_t x, dword_t z);
    logic s;
    logic [52:0] mx, mz;
    logic [105:0] p;
    logic signed [13:0] e;
    s = x[63] ^ z[63];
    if (is_nan(x) || is_nan(z)) return QNAN;
    if (is_inf(x) || is_inf(z)) begin
      if (is_zero(x) || is_zero(z)) return QNAN;
      return {s, 11'h7ff, 52'h0};
    end
    if (is_zero(x) || is_zero(z)) return {s, 63'h0};
    mx = {1'b1, x[51:0]};
    mz = {1'b1, z[51:0]};
    p  = 106'(mx) * 106'(mz);
    e  = 14'(x[62:52]) + 14'(z[62:52]) - 14'sd1023;
    if (p[105])
      return round_pack(s, e + 14'sd1, p[105:53], p[52], |p[51:0]);
    else
      return round_pack(s, e, p[104:52], p[51], |p[50:0]);
  endfunction

  dword_t y_c;
  assign y_c = fmul(a, b);

  pipe_delay #(.W(64 + TAG_W), .STAGES(LAT)) u_pipe (
    .clk, .rst_n, .in_valid,
    .in_data ({y_c, in_tag}),
    .out_valid,
    .out_data({y, out_tag})
  );
endmodule
