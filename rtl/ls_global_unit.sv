// ls_global_unit: the global load/store stream of the Load-Store CFU, moving
// data between the external (global) memory and the Local Memory (LM).
//
// It fetches 64-bit instructions from a Global Load/Store Instruction Memory
// and executes them one at a time:
//   LD  a, g    : one word, external g -> LM a.  A request is sent and the
//                 unit waits for its response: a full handshake per word.
//   ST  a, g    : one word, LM a -> external g (posted write).
//   LDB a, g, s : a 4x4 block whose rows start s words apart in external
//                 memory -> 16 consecutive LM words from a.  All 16 requests
//                 are sent back to back and the responses stream into LM, so
//                 the block costs one round trip instead of sixteen.
//   STB a, g, s : the reverse, one posted write per cycle.
//   WAIT / SIG  : take / give a token from / to the local stream.  HALT.
// External memory interface: a request channel (valid/ready, write enable,
// word address, data) and a response channel that returns read data in
// request order, any number of cycles later (no ready: the unit always
// accepts a response).
//
// From the paper: the Global Load/Store Instruction Memory and Decoder, the
// path between the memory hierarchy and the LM, and the Block Data Load /
// Block Data Store instructions with a 4x4 block.  The encoding, the external
// memory protocol and the token synchronisation are this design's own.
module ls_global_unit
  import blas_pkg::*;
#(
  parameter int IMEM_DEPTH = 2048,
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
  input  logic [63:0]      prog_data,
  // tokens with the local stream
  input  logic             l_avail,
  output logic             l_take,
  output logic             l_sig,
  // LM port (64-bit)
  output logic             lm_en,
  output logic             lm_we,
  output logic [LM_AW-1:0] lm_addr,
  output dword_t           lm_wdata,
  input  dword_t           lm_rdata,
  // external memory
  output logic             gm_req_valid,
  input  logic             gm_req_ready,
  output logic             gm_req_we,
  output logic [GM_AW-1:0] gm_req_addr,
  output dword_t           gm_req_wdata,
  input  logic             gm_resp_valid,
  input  dword_t           gm_resp_data,
  // counters (cleared at start)
  output logic [31:0]      perf_words,
  output logic [31:0]      perf_blocks,
  output logic [31:0]      perf_busy
);
  localparam int BW = BLK * BLK;   // words per block

  logic [IAW-1:0]   pc, pc_next, raddr;
  logic             ivalid, adv;
  logic [63:0]      iword;
  ls_global_instr_t ins;

  instr_mem #(.DEPTH(IMEM_DEPTH), .W(64)) u_imem (
    .clk, .we(prog_we), .waddr(prog_addr), .wdata(prog_data),
    .re_en(1'b1), .raddr, .rdata(iword)
  );
  assign ins = ls_global_instr_t'(iword);

  logic       act, st_ph;
  logic [4:0] req_cnt, resp_cnt, total;
  logic       is_ld, is_st, is_mem, req_fire;

  assign is_ld  = ins.op == G_LD  || ins.op == G_LDB;
  assign is_st  = ins.op == G_ST  || ins.op == G_STB;
  assign is_mem = is_ld || is_st;

  // external address of word k of the current instruction
  function automatic logic [GM_AW-1:0] gaddr(ls_global_instr_t i, logic [4:0] k);
    return i.gma[GM_AW-1:0] + GM_AW'(k[3:2]) * GM_AW'(i.stride) + GM_AW'(k[1:0]);
  endfunction

  always_comb begin
    gm_req_valid = 1'b0;
    gm_req_we    = is_st;
    gm_req_addr  = gaddr(ins, req_cnt);
    gm_req_wdata = lm_rdata;
    lm_en = 1'b0; lm_we = 1'b0; lm_wdata = gm_resp_data;
    lm_addr = ins.lma[LM_AW-1:0] + LM_AW'(req_cnt);
    adv = 1'b0;
    l_take = 1'b0;
    l_sig  = 1'b0;
    if (running && ivalid) begin
      if (act && is_ld) begin
        gm_req_valid = req_cnt < total;
        if (gm_resp_valid) begin
          lm_en = 1'b1; lm_we = 1'b1;
          lm_addr = ins.lma[LM_AW-1:0] + LM_AW'(resp_cnt);
          if (resp_cnt + 5'd1 == total) adv = 1'b1;
        end
      end else if (act && is_st) begin
        if (!st_ph) begin
          lm_en = 1'b1;
        end else begin
          gm_req_valid = 1'b1;
          if (gm_req_ready) begin
            if (req_cnt + 5'd1 == total) adv = 1'b1;
            else begin
              lm_en = 1'b1;
              lm_addr = ins.lma[LM_AW-1:0] + LM_AW'(req_cnt + 5'd1);
            end
          end
        end
      end else if (!act) begin
        case (ins.op)
          G_WAIT: begin l_take = l_avail; adv = l_avail; end
          G_SIG:  begin l_sig = 1'b1; adv = 1'b1; end
          G_NOP, G_HALT: adv = 1'b1;
          default: ;   // memory ops start below
        endcase
      end
    end
    req_fire = gm_req_valid && gm_req_ready;
  end

  assign pc_next = adv ? pc + 1'b1 : pc;
  assign raddr   = start ? '0 : pc_next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; ivalid <= 1'b0; running <= 1'b0; done <= 1'b0;
      act <= 1'b0; st_ph <= 1'b0; req_cnt <= '0; resp_cnt <= '0; total <= '0;
      perf_words <= '0; perf_blocks <= '0; perf_busy <= '0;
    end else if (start) begin
      pc <= '0; ivalid <= 1'b0; running <= 1'b1; done <= 1'b0;
      act <= 1'b0; st_ph <= 1'b0;
      perf_words <= '0; perf_blocks <= '0; perf_busy <= '0;
    end else if (running) begin
      pc     <= pc_next;
      ivalid <= 1'b1;
      perf_busy <= perf_busy + 1;
      if (ivalid && !act && is_mem) begin
        act      <= 1'b1;
        st_ph    <= 1'b0;
        req_cnt  <= '0;
        resp_cnt <= '0;
        total    <= (ins.op == G_LDB || ins.op == G_STB) ? 5'(BW) : 5'd1;
        if (ins.op == G_LDB || ins.op == G_STB) perf_blocks <= perf_blocks + 1;
      end
      if (act && is_st && !st_ph) st_ph <= 1'b1;
      if (req_fire) begin
        req_cnt    <= req_cnt + 5'd1;
        perf_words <= perf_words + 1;
      end
      if (act && is_ld && gm_resp_valid) resp_cnt <= resp_cnt + 5'd1;
      if (adv && act) begin
        act   <= 1'b0;
        st_ph <= 1'b0;
      end
      if (adv && ins.op == G_HALT) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  a_no_stray_resp: assert property (@(posedge clk) disable iff (!rst_n)
    gm_resp_valid |-> (act && is_ld && resp_cnt < req_cnt));
endmodule
