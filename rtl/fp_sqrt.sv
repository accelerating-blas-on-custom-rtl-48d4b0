// fp_sqrt: IEEE-754 binary64 square root (the FSQRT of the PE), y = sqrt(a).
//
// Digit-by-digit (restoring) integer square root, one result bit per cycle.
// The significand is doubled when the unbiased exponent is odd, so that the
// radicand X = m * 2^54 gives a 54-bit root R (53 bits plus a guard bit); a
// non-zero final remainder is the sticky bit for rounding to nearest-even.
// sqrt(-0) = -0, sqrt(+inf) = +inf, a negative operand or NaN gives NaN, all
// in one cycle.  Subnormals are flushed to zero.  One operation at a time:
// in_valid is accepted when busy is low, out_valid is high 55 cycles
// after the accepting edge.
//
// The paper lists the square-root unit (it is what turns a DOT into dnrm2)
// but not its structure; the iterative form is this design's choice.
module fp_sqrt
  import blas_pkg::*;
#(
  parameter int TAG_W = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  dword_t           a,
  input  logic [TAG_W-1:0] in_tag,
  output logic             busy,
  output logic             out_valid,
  output dword_t           y,
  output logic [TAG_W-1:0] out_tag
);
  localparam int ITER = 54;

  logic               run;
  logic [5:0]         cnt;
  logic [107:0]       rad;    // radicand, consumed two bits per step from the top
  logic [57:0]        rem;
  logic [53:0]        root;
  logic signed [13:0] exp_r;

  logic [57:0] rem_n, trial;
  always_comb begin
    rem_n = {rem[55:0], rad[107:106]};
    trial = {2'b0, root, 2'b01};
  end

  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; cnt <= '0; rad <= '0; rem <= '0; root <= '0; exp_r <= '0;
      out_valid <= 1'b0; y <= '0; out_tag <= '0;
    end else begin
      out_valid <= 1'b0;
      if (!run && in_valid) begin
        out_tag <= in_tag;
        if (is_nan(a) || (a[63] && !is_zero(a))) begin
          y <= QNAN; out_valid <= 1'b1;
        end else if (is_zero(a) || is_inf(a)) begin
          y <= {a[63], is_inf(a) ? 11'h7ff : 11'h000, 52'h0}; out_valid <= 1'b1;
        end else begin
          run  <= 1'b1;
          cnt  <= '0;
          rem  <= '0;
          root <= '0;
          // unbiased exponent E = e - 1023; result exponent floor(E/2) + 1023
          if (a[52] == 1'b0) begin      // e even -> E odd: double the significand
            rad   <= {1'b1, a[51:0], 55'h0};
            exp_r <= (($signed(14'(a[62:52])) - 14'sd1024) >>> 1) + 14'sd1023;
          end else begin
            rad   <= {1'b0, 1'b1, a[51:0], 54'h0};
            exp_r <= (($signed(14'(a[62:52])) - 14'sd1023) >>> 1) + 14'sd1023;
          end
        end
      end else if (run) begin
        if (cnt < 6'(ITER)) begin
          rad <= rad << 2;
          if (rem_n >= trial) begin
            rem  <= rem_n - trial;
            root <= {root[52:0], 1'b1};
          end else begin
            rem  <= rem_n;
            root <= {root[52:0], 1'b0};
          end
          cnt <= cnt + 6'd1;
        end else begin
          run       <= 1'b0;
          out_valid <= 1'b1;
          y         <= round_pack(1'b0, exp_r, root[53:1], root[0], rem != '0);
        end
      end
    end
  end
endmodule
