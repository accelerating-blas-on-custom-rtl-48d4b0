// pe_top: the BLAS Processing Element: a Floating Point Sequencer (FPS) with
// its Register File, FPU and Reconfigurable Data-path, and a Load-Store CFU
// with the Local Memory, connected by the 256-bit Register File path and two
// token counters.  The external (global) memory is outside the PE and is
// reached through the gm_* request/response ports.
//
// Use: write the three programs through prog_* (prog_sel 0 = global
// load/store stream, 64-bit words; 1 = local load/store stream; 2 = FPS; the
// last two use prog_data[31:0]), pulse start, wait for done (all three streams
// have halted).  The perf_* outputs count cycles, flops, stalls and traffic
// of the last run.  The PE is the one the paper arrives at after its five
// enhancements: Load-Store CFU with Local Memory, DOT instructions, block
// load/store, 4x bandwidth to the Register File and prefetching (the last is
// a matter of how the programs overlap the streams).
module pe_top
  import blas_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             done,
  input  logic             prog_we,
  input  logic [1:0]       prog_sel,
  input  logic [11:0]      prog_addr,
  input  logic [63:0]      prog_data,
  output logic             gm_req_valid,
  input  logic             gm_req_ready,
  output logic             gm_req_we,
  output logic [GM_AW-1:0] gm_req_addr,
  output dword_t           gm_req_wdata,
  input  logic             gm_resp_valid,
  input  dword_t           gm_resp_data,
  output logic [31:0]      perf_cycles,
  output logic [31:0]      perf_flops,
  output logic [31:0]      perf_fps_stall_data,
  output logic [31:0]      perf_fps_stall_wait,
  output logic [31:0]      perf_fps_loops,
  output logic [31:0]      perf_gm_words,
  output logic [31:0]      perf_gm_blocks,
  output logic [31:0]      perf_rf_loads,
  output logic [31:0]      perf_rf_stores,
  output logic [31:0]      perf_local_stall
);
  logic fps_done, cfu_done;
  logic tok_in_avail, tok_in_take, tok_out_sig;
  logic ls_we;
  logic [5:0] ls_wbase, ls_rbase;
  dword_t ls_wdata [BLK];
  dword_t ls_rdata [BLK];

  fps u_fps (
    .clk, .rst_n, .start, .running(), .done(fps_done),
    .prog_we(prog_we && prog_sel == 2'd2), .prog_addr, .prog_data(prog_data[31:0]),
    .tok_in_avail, .tok_in_take, .tok_out_sig,
    .ls_we, .ls_wbase, .ls_wdata, .ls_rbase, .ls_rdata,
    .perf_cycles(), .perf_flops,
    .perf_stall_data(perf_fps_stall_data), .perf_stall_wait(perf_fps_stall_wait),
    .perf_loops(perf_fps_loops)
  );

  load_store_cfu u_cfu (
    .clk, .rst_n, .start, .done(cfu_done),
    .prog_we(prog_we && prog_sel != 2'd2), .prog_sel(prog_sel[0]), .prog_addr, .prog_data,
    .fps_sig(tok_out_sig), .fps_take(tok_in_take), .fps_avail(tok_in_avail),
    .rf_we(ls_we), .rf_wbase(ls_wbase), .rf_wdata(ls_wdata),
    .rf_rbase(ls_rbase), .rf_rdata(ls_rdata),
    .gm_req_valid, .gm_req_ready, .gm_req_we, .gm_req_addr, .gm_req_wdata,
    .gm_resp_valid, .gm_resp_data,
    .perf_gm_words, .perf_gm_blocks, .perf_rf_loads, .perf_rf_stores, .perf_local_stall
  );

  assign done = fps_done && cfu_done;

  // whole-PE cycle count: from start until every stream has halted
  logic counting;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      counting <= 1'b0; perf_cycles <= '0;
    end else if (start) begin
      counting <= 1'b1; perf_cycles <= '0;
    end else if (counting) begin
      if (done) counting <= 1'b0;
      else perf_cycles <= perf_cycles + 1;
    end
  end
endmodule
