// local_memory: the Local Memory (LM) inside the Load-Store CFU, 256 kbit
// organised as LM_WORDS = 4096 words of 64 bits.
//
// It has two independent synchronous ports.  Port A (64 bits, word address)
// faces the external memory through the global load/store stream.  Port B
// (256 bits, address of a 4-word-aligned quad) faces the Register File of the
// sequencer through the local load/store stream, the 4x bandwidth the paper
// gives for this path.  The memory is four 64-bit banks interleaved on the
// two low address bits, so port B touches all four banks at one row and port
// A one bank.  Reads return data on the cycle after the request and hold it
// until the next read on that port.  If both ports write one word in the same
// cycle, port B's value is kept.
//
// From the paper: 256 kbit size and the 256-bit path towards the FPS.  Banking,
// two ports and the read timing are this design's choices.
module local_memory
  import blas_pkg::*;
#(
  parameter int WORDS = LM_WORDS,
  parameter int AW    = $clog2(WORDS)
) (
  input  logic              clk,
  // port A: 64-bit
  input  logic              a_en,
  input  logic              a_we,
  input  logic [AW-1:0]     a_addr,
  input  dword_t            a_wdata,
  output dword_t            a_rdata,
  // port B: 256-bit, a_addr bits [1:0] are ignored
  input  logic              b_en,
  input  logic              b_we,
  input  logic [AW-1:0]     b_addr,
  input  dword_t            b_wdata [BLK],
  output dword_t            b_rdata [BLK]
);
  localparam int ROWS = WORDS / BLK;

  logic [1:0] a_bank_q;
  dword_t     a_rd [BLK];

  for (genvar k = 0; k < BLK; k++) begin : g_bank
    dword_t mem [ROWS];
    logic   a_hit;
    assign a_hit = a_en && (a_addr[1:0] == 2'(k));
    always_ff @(posedge clk) begin
      if (a_hit && a_we && !(b_en && b_we && b_addr[AW-1:2] == a_addr[AW-1:2]))
        mem[a_addr[AW-1:2]] <= a_wdata;
      if (b_en && b_we)
        mem[b_addr[AW-1:2]] <= b_wdata[k];
      if (a_hit && !a_we) a_rd[k] <= mem[a_addr[AW-1:2]];
      if (b_en && !b_we) b_rdata[k] <= mem[b_addr[AW-1:2]];
    end
  end

  always_ff @(posedge clk)
    if (a_en && !a_we) a_bank_q <= a_addr[1:0];

  assign a_rdata = a_rd[a_bank_q];
endmodule
