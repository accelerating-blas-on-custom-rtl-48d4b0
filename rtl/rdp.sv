// rdp: the Reconfigurable Data-path that executes the DOT instructions.
//
// Four multipliers feed two add/subtract nodes whose results meet in a final
// adder (a binary tree), so one issue computes
//     y = (a0*b0 +/- a1*b1) + (a2*b2 +/- a3*b3).
// The configuration n (DOT1..DOT4) selects how many lanes take part; products
// of unused lanes are replaced by +0, which turns the tree into the MUL/DOT1,
// DOT2 and DOT3 data-paths of the paper (DOT3 = (p0 +/- p1) + p2).  sub0/sub1
// pick subtraction in the left/right +/- node.  The tree is fully pipelined:
// one DOT per cycle, result after MUL_LAT + 2*ADD_LAT = 15 cycles, with a tag
// (destination register) carried along.
//
// From the paper: the tree of 4 multipliers, two +/- nodes and one adder, the
// DOT1..DOT4 configurations and the 15-stage DOT4 pipeline.  The split of the
// 15 stages into 5 + 5 + 5 and the zero-product way of reconfiguring are this
// design's choices.
module rdp
  import blas_pkg::*;
#(
  parameter int MUL_LAT = 5,
  parameter int ADD_LAT = 5,
  parameter int TAG_W   = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  dword_t           a [BLK],
  input  dword_t           b [BLK],
  input  logic [1:0]       n_m1,     // lanes used minus one (0 = DOT1/MUL)
  input  logic             sub0,
  input  logic             sub1,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output dword_t           y,
  output logic [TAG_W-1:0] out_tag
);

  // lane enables and node modes travel with the products
  typedef struct packed {
    logic [BLK-1:0]   en;
    logic             sub0;
    logic             sub1;
    logic [TAG_W-1:0] tag;
  } side_t;

  side_t  side_in, side_m;
  dword_t p  [BLK];
  dword_t pz [BLK];
  logic   mv [BLK];
  logic [BLK+1+TAG_W:0] mtag [BLK];

  always_comb begin
    for (int i = 0; i < BLK; i++) side_in.en[i] = (2'(i) <= n_m1);
    side_in.sub0 = sub0;
    side_in.sub1 = sub1;
    side_in.tag  = in_tag;
  end

  for (genvar i = 0; i < BLK; i++) begin : g_mul
    fp_mul #(.LAT(MUL_LAT), .TAG_W($bits(side_t))) u_mul (
      .clk, .rst_n, .in_valid, .a(a[i]), .b(b[i]), .in_tag(side_in),
      .out_valid(mv[i]), .y(p[i]), .out_tag(mtag[i])
    );
  end

  assign side_m = side_t'(mtag[0]);
  always_comb
    for (int i = 0; i < BLK; i++) pz[i] = side_m.en[i] ? p[i] : 64'h0;

  dword_t s0, s1;
  logic   v0, v1;
  logic [TAG_W-1:0] t0;

  fp_add #(.LAT(ADD_LAT), .TAG_W(TAG_W)) u_add0 (
    .clk, .rst_n, .in_valid(mv[0]), .a(pz[0]), .b(pz[1]), .sub(side_m.sub0),
    .in_tag(side_m.tag), .out_valid(v0), .y(s0), .out_tag(t0)
  );
  fp_add #(.LAT(ADD_LAT), .TAG_W(TAG_W)) u_add1 (
    .clk, .rst_n, .in_valid(mv[1]), .a(pz[2]), .b(pz[3]), .sub(side_m.sub1),
    .in_tag(side_m.tag), .out_valid(v1), .y(s1), .out_tag()
  );
  fp_add #(.LAT(ADD_LAT), .TAG_W(TAG_W)) u_add2 (
    .clk, .rst_n, .in_valid(v0), .a(s0), .b(s1), .sub(1'b0),
    .in_tag(t0), .out_valid, .y, .out_tag
  );

  // both halves of the tree are in lock-step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) v0 == v1);
endmodule
