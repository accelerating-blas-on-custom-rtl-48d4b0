// fp_div: IEEE-754 binary64 divider (the FDIV of the PE), y = a / b.
//
// Restoring division, one quotient bit per cycle: the dividend significand is
// pre-shifted so the quotient lies in [1,2), then 54 quotient bits (53 plus a
// guard bit) are produced and a non-zero remainder sets the sticky bit before
// rounding to nearest-even.  Special operands (NaN, infinity, zero, including
// x/0 = infinity and 0/0 = NaN) finish in one cycle.  Subnormals are flushed to
// zero.  The unit holds one operation at a time: in_valid is accepted when
// busy is low, and out_valid is high ITER+1 = 55 cycles after the accepting edge.
//
// The paper lists a divider in the FPU but not how it works or its timing;
// the iterative, non-pipelined structure is this design's choice (division
// is rare in the BLAS kernels the PE targets).
module fp_div
  import blas_pkg::*;
#(
  parameter int TAG_W = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  dword_t           a,
  input  dword_t           b,
  input  logic [TAG_W-1:0] in_tag,
  output logic             busy,
  output logic             out_valid,
  output dword_t           y,
  output logic [TAG_W-1:0] out_tag
);
  localparam int ITER = 54;

  logic               run;
  logic [5:0]         cnt;
  logic [54:0]        rem;
  logic [52:0]        dvs;
  logic [53:0]        q;
  logic               sgn;
  logic signed [13:0] exp_r;

  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; cnt <= '0; rem <= '0; dvs <= '0; q <= '0; sgn <= 1'b0;
      exp_r <= '0; out_valid <= 1'b0; y <= '0; out_tag <= '0;
    end else begin
      out_valid <= 1'b0;
      if (!run && in_valid) begin
        out_tag <= in_tag;
        sgn     <= a[63] ^ b[63];
        if (is_nan(a) || is_nan(b) || (is_inf(a) && is_inf(b)) ||
            (is_zero(a) && is_zero(b))) begin
          y <= QNAN; out_valid <= 1'b1;
        end else if (is_inf(a) || is_zero(b)) begin
          y <= {a[63] ^ b[63], 11'h7ff, 52'h0}; out_valid <= 1'b1;
        end else if (is_zero(a) || is_inf(b)) begin
          y <= {a[63] ^ b[63], 63'h0}; out_valid <= 1'b1;
        end else begin
          run <= 1'b1;
          cnt <= '0;
          q   <= '0;
          dvs <= {1'b1, b[51:0]};
          if ({1'b1, a[51:0]} < {1'b1, b[51:0]}) begin
            rem   <= {1'b0, 1'b1, a[51:0], 1'b0};
            exp_r <= 14'(a[62:52]) - 14'(b[62:52]) + 14'sd1022;
          end else begin
            rem   <= {2'b0, 1'b1, a[51:0]};
            exp_r <= 14'(a[62:52]) - 14'(b[62:52]) + 14'sd1023;
          end
        end
      end else if (run) begin
        if (cnt < 6'(ITER)) begin
          if (rem >= 55'(dvs)) begin
            q   <= {q[52:0], 1'b1};
            rem <= (rem - 55'(dvs)) << 1;
          end else begin
            q   <= {q[52:0], 1'b0};
            rem <= rem << 1;
          end
          cnt <= cnt + 6'd1;
        end else begin
          run       <= 1'b0;
          out_valid <= 1'b1;
          y         <= round_pack(sgn, exp_r, q[53:1], q[0], rem != '0);
        end
      end
    end
  end
endmodule
