// fps_regfile: the Register File of the Floating Point Sequencer, 64 registers
// of 64 bits (the paper's size).
//
// Built from flip-flops with NR asynchronous read ports and NW write ports so
// that one cycle can serve a DOT4 (eight operands), a 256-bit local store
// (four registers) and, in the same cycle, the write-backs of every FPU unit
// plus a 256-bit local load (four registers).  Writes take effect at the
// clock edge; when two ports write the same register in one cycle, the
// higher-numbered port wins.  Reset clears every register.
//
// The paper gives the 64 x 64-bit size and the 256-bit path to the Load-Store
// CFU; the port count and the write priority are this design's choices.
module fps_regfile
  import blas_pkg::*;
#(
  parameter int NR = 12,
  parameter int NW = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [5:0] raddr [NR],
  output dword_t     rdata [NR],
  input  logic       we    [NW],
  input  logic [5:0] waddr [NW],
  input  dword_t     wdata [NW]
);
  dword_t regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) regs[r] <= '0;
    end else begin
      for (int p = 0; p < NW; p++)
        if (we[p]) regs[waddr[p]] <= wdata[p];
    end
  end

  always_comb
    for (int p = 0; p < NR; p++) rdata[p] = regs[raddr[p]];
endmodule
