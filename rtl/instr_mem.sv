// instr_mem: an instruction memory of DEPTH words of W bits, used three times
// in the PE: for the Floating Point Sequencer and for the global and the local
// load/store streams of the Load-Store CFU.
//
// One synchronous write port loads the program before a run; one synchronous
// read port fetches: rdata holds the word at the address presented on the
// previous clock edge when re_en was high, and keeps its value otherwise.
// The array is not reset (a program is always written before it is run).
//
// The paper gives 16 KB for the sequencer's instruction memory
// (4096 x 32 bits, the default here); the sizes of the two load/store
// instruction memories are not given and are set where they are instantiated.
module instr_mem #(
  parameter int DEPTH = 4096,
  parameter int W     = 32,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re_en,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re_en) rdata <= mem[raddr];
  end
endmodule
