// ls_local_unit: the local load/store stream of the Load-Store CFU, moving
// data between the Local Memory (LM) and the Register File of the Floating
// Point Sequencer over the 256-bit path.
//
// It fetches its own program from a Local Load/Store Instruction Memory and
// executes one instruction at a time, in order:
//   LD  r, a : LM[a..a+3] -> R[r..r+3]   (LM read this cycle, RF write next)
//   ST  r, a : R[r..r+3] -> LM[a..a+3]   (one cycle)
//   WAITG / SIGG : take / give a token from / to the global stream
//   WAITF / SIGF : take / give a token from / to the sequencer
//   HALT
// LD can issue every cycle; an ST right after an LD waits one cycle so it
// sees the loaded registers.  LM addresses of LD/ST are quad-aligned (the two
// low bits are ignored by the LM).
//
// From the paper: the Local Load/Store Instruction Memory and Decoder, the LM
// to Register File path and its 256-bit width.  The instruction set, token
// synchronisation and timing are this design's own.
module ls_local_unit
  import blas_pkg::*;
#(
  parameter int IMEM_DEPTH = 4096,
  parameter int LM_AW      = $clog2(LM_WORDS),
  parameter int IAW        = $clog2(IMEM_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             running,
  output logic             done,
  input  logic             prog_we,
  input  logic [IAW-1:0]   prog_addr,
  input  logic [31:0]      prog_data,
  // tokens
  input  logic             g_avail,
  output logic             g_take,
  output logic             g_sig,
  input  logic             f_avail,
  output logic             f_take,
  output logic             f_sig,
  // LM port (256-bit)
  output logic             lm_en,
  output logic             lm_we,
  output logic [LM_AW-1:0] lm_addr,
  output dword_t           lm_wdata [BLK],
  input  dword_t           lm_rdata [BLK],
  // Register File port (256-bit)
  output logic             rf_we,
  output logic [5:0]       rf_wbase,
  output dword_t           rf_wdata [BLK],
  output logic [5:0]       rf_rbase,
  input  dword_t           rf_rdata [BLK],
  // counters (cleared at start)
  output logic [31:0]      perf_ld,
  output logic [31:0]      perf_st,
  output logic [31:0]      perf_stall
);
  logic [IAW-1:0]  pc, pc_next, raddr;
  logic            ivalid, issue, can;
  logic [31:0]     iword;
  ls_local_instr_t ins;
  logic            ld_q;
  logic [5:0]      ld_base_q;

  instr_mem #(.DEPTH(IMEM_DEPTH), .W(32)) u_imem (
    .clk, .we(prog_we), .waddr(prog_addr), .wdata(prog_data),
    .re_en(1'b1), .raddr, .rdata(iword)
  );
  assign ins = ls_local_instr_t'(iword);

  always_comb begin
    case (ins.op)
      L_WAITG: can = g_avail;
      L_WAITF: can = f_avail;
      L_ST:    can = !ld_q;
      default: can = 1'b1;
    endcase
  end
  assign issue   = running && ivalid && can;
  assign pc_next = issue ? pc + 1'b1 : pc;
  assign raddr   = start ? '0 : pc_next;

  assign g_take = issue && ins.op == L_WAITG;
  assign g_sig  = issue && ins.op == L_SIGG;
  assign f_take = issue && ins.op == L_WAITF;
  assign f_sig  = issue && ins.op == L_SIGF;

  assign lm_en    = issue && (ins.op == L_LD || ins.op == L_ST);
  assign lm_we    = ins.op == L_ST;
  assign lm_addr  = ins.lma[LM_AW-1:0];
  assign rf_rbase = ins.rg;
  assign lm_wdata = rf_rdata;
  assign rf_we    = ld_q;
  assign rf_wbase = ld_base_q;
  assign rf_wdata = lm_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; ivalid <= 1'b0; running <= 1'b0; done <= 1'b0;
      ld_q <= 1'b0; ld_base_q <= '0;
      perf_ld <= '0; perf_st <= '0; perf_stall <= '0;
    end else if (start) begin
      pc <= '0; ivalid <= 1'b0; running <= 1'b1; done <= 1'b0; ld_q <= 1'b0;
      perf_ld <= '0; perf_st <= '0; perf_stall <= '0;
    end else begin
      ld_q      <= issue && ins.op == L_LD;
      ld_base_q <= ins.rg;
      if (running) begin
        pc     <= pc_next;
        ivalid <= 1'b1;
        if (issue && ins.op == L_LD) perf_ld <= perf_ld + 1;
        if (issue && ins.op == L_ST) perf_st <= perf_st + 1;
        if (ivalid && !issue) perf_stall <= perf_stall + 1;
        if (issue && ins.op == L_HALT) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end
endmodule
