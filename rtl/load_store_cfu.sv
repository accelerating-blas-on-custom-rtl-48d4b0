// load_store_cfu: the Load-Store Custom Function Unit of the PE.
//
// It holds the 256 kbit Local Memory (LM) and two independent instruction
// streams, each with its own instruction memory and decoder: the global
// stream (ls_global_unit) moves words and 4x4 blocks between the external
// memory and the LM through LM port A, and the local stream (ls_local_unit)
// moves 256-bit quads between the LM and the sequencer's Register File
// through LM port B.  Both run at the same time as the Floating Point
// Sequencer, so communication overlaps computation; the streams order
// themselves with token counters (global <-> local here, local <-> sequencer
// exported to the PE top).
//
// Programs are written through prog_* with prog_sel = 0 for the global stream
// (64-bit words) and 1 for the local stream (low 32 bits).  start starts both
// streams; done is high when both have executed HALT.
//
// From the paper (Fig. 16): LM inside the CFU, the two instruction memories
// and decoders, the memory-hierarchy and Register-File sides.  The token
// mechanism and the instruction memory sizes (16 KB each) are this design's.
module load_store_cfu
  import blas_pkg::*;
#(
  parameter int GIMEM_DEPTH = 2048,
  parameter int LIMEM_DEPTH = 4096
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             done,
  input  logic             prog_we,
  input  logic             prog_sel,
  input  logic [11:0]      prog_addr,
  input  logic [63:0]      prog_data,
  // tokens with the sequencer
  input  logic             fps_sig,     // sequencer -> local stream
  input  logic             fps_take,    // sequencer consumes a local-stream token
  output logic             fps_avail,
  // Register File port
  output logic             rf_we,
  output logic [5:0]       rf_wbase,
  output dword_t           rf_wdata [BLK],
  output logic [5:0]       rf_rbase,
  input  dword_t           rf_rdata [BLK],
  // external memory
  output logic             gm_req_valid,
  input  logic             gm_req_ready,
  output logic             gm_req_we,
  output logic [GM_AW-1:0] gm_req_addr,
  output dword_t           gm_req_wdata,
  input  logic             gm_resp_valid,
  input  dword_t           gm_resp_data,
  // counters
  output logic [31:0]      perf_gm_words,
  output logic [31:0]      perf_gm_blocks,
  output logic [31:0]      perf_rf_loads,
  output logic [31:0]      perf_rf_stores,
  output logic [31:0]      perf_local_stall
);
  localparam int LM_AW = $clog2(LM_WORDS);

  logic g_done, l_done;
  logic a_en, a_we, b_en, b_we;
  logic [LM_AW-1:0] a_addr, b_addr;
  dword_t a_wdata, a_rdata;
  dword_t b_wdata [BLK];
  dword_t b_rdata [BLK];
  logic g2l_sig, g2l_take, g2l_avail, l2g_sig, l2g_take, l2g_avail;
  logic f2l_avail, f2l_take, l2f_sig;

  local_memory u_lm (
    .clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata
  );

  ls_global_unit #(.IMEM_DEPTH(GIMEM_DEPTH)) u_glob (
    .clk, .rst_n, .start, .running(), .done(g_done),
    .prog_we(prog_we && !prog_sel), .prog_addr(prog_addr[$clog2(GIMEM_DEPTH)-1:0]),
    .prog_data,
    .l_avail(l2g_avail), .l_take(l2g_take), .l_sig(g2l_sig),
    .lm_en(a_en), .lm_we(a_we), .lm_addr(a_addr), .lm_wdata(a_wdata), .lm_rdata(a_rdata),
    .gm_req_valid, .gm_req_ready, .gm_req_we, .gm_req_addr, .gm_req_wdata,
    .gm_resp_valid, .gm_resp_data,
    .perf_words(perf_gm_words), .perf_blocks(perf_gm_blocks), .perf_busy()
  );

  ls_local_unit #(.IMEM_DEPTH(LIMEM_DEPTH)) u_loc (
    .clk, .rst_n, .start, .running(), .done(l_done),
    .prog_we(prog_we && prog_sel), .prog_addr(prog_addr[$clog2(LIMEM_DEPTH)-1:0]),
    .prog_data(prog_data[31:0]),
    .g_avail(g2l_avail), .g_take(g2l_take), .g_sig(l2g_sig),
    .f_avail(f2l_avail), .f_take(f2l_take), .f_sig(l2f_sig),
    .lm_en(b_en), .lm_we(b_we), .lm_addr(b_addr), .lm_wdata(b_wdata), .lm_rdata(b_rdata),
    .rf_we, .rf_wbase, .rf_wdata, .rf_rbase, .rf_rdata,
    .perf_ld(perf_rf_loads), .perf_st(perf_rf_stores), .perf_stall(perf_local_stall)
  );

  sync_token u_tok_g2l (.clk, .rst_n, .sig(g2l_sig), .take(g2l_take), .avail(g2l_avail));
  sync_token u_tok_l2g (.clk, .rst_n, .sig(l2g_sig), .take(l2g_take), .avail(l2g_avail));
  sync_token u_tok_f2l (.clk, .rst_n, .sig(fps_sig), .take(f2l_take), .avail(f2l_avail));
  sync_token u_tok_l2f (.clk, .rst_n, .sig(l2f_sig), .take(fps_take), .avail(fps_avail));

  assign done = g_done && l_done;
endmodule
