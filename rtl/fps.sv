// fps: the Floating Point Sequencer of the PE.
//
// An in-order, single-issue sequencer: an Instruction Memory (16 KB), a
// decoder, a scoreboard and the Floating Point Unit (FADD, FMUL, FDIV, FSQRT)
// plus the Reconfigurable Data-path (RDP) for DOT instructions, around a
// 64 x 64-bit Register File.  At most one instruction issues per cycle; it
// reads its operands from the Register File at issue, so a DOT4 takes eight
// operands in one cycle.  Each register has a pending bit, set when an
// instruction that writes it issues and cleared when the result is written
// back; an instruction stalls while a source or its destination is pending
// or while its unit (iterative FDIV/FSQRT) is busy.  FADD, FMUL and the RDP
// are fully pipelined (5, 5 and 15 cycles), so independent work overlaps.
//
// The Load-Store CFU writes and reads the Register File through a 256-bit
// port (four consecutive registers per cycle).  The two run concurrently and
// order themselves with tokens: WAIT stalls until the CFU has signalled (data
// has arrived) and consumes the token, SIG sends a token to the CFU (its
// "drain" form first waits until no result is outstanding).  REP repeats the
// following block of instructions, so one copy of a GEMM block program serves
// every block.  HALT waits for all results and stops the sequencer.
//
// Timing: start (one-cycle pulse) fetches address 0; the first instruction
// issues two cycles later, then one per cycle when nothing stalls.  The
// instruction memory is written through prog_* while the sequencer is idle.
//
// From the paper: the blocks (Instruction Memory, Decoder, Register File of 64
// registers, FPU of multiplier, adder, divider and square root, the RDP with a
// 15-stage DOT4) and the 256-bit path to the Load-Store CFU.  The instruction
// set and encoding (see blas_pkg), the scoreboard, the token synchronisation
// and the REP loop are this design's own.
module fps
  import blas_pkg::*;
#(
  parameter int IMEM_DEPTH = 4096,
  parameter int MUL_LAT    = 5,
  parameter int ADD_LAT    = 5,
  parameter int IAW        = $clog2(IMEM_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           running,
  output logic           done,
  // program load
  input  logic           prog_we,
  input  logic [IAW-1:0] prog_addr,
  input  logic [31:0]    prog_data,
  // token channel with the local load/store stream
  input  logic           tok_in_avail,
  output logic           tok_in_take,
  output logic           tok_out_sig,
  // 256-bit Register File port of the Load-Store CFU
  input  logic           ls_we,
  input  logic [5:0]     ls_wbase,
  input  dword_t         ls_wdata [BLK],
  input  logic [5:0]     ls_rbase,
  output dword_t         ls_rdata [BLK],
  // performance counters (cleared at start)
  output logic [31:0]    perf_cycles,
  output logic [31:0]    perf_flops,
  output logic [31:0]    perf_stall_data,
  output logic [31:0]    perf_stall_wait,
  output logic [31:0]    perf_loops
);
  localparam int NR = 2 * BLK + BLK;   // a lanes, b lanes, CFU store
  localparam int NW = 5 + BLK;         // add, mul, rdp, div, sqrt, CFU load

  // ---------------------------------------------------------------- fetch
  logic [IAW-1:0] pc, pc_next, raddr;
  logic           ivalid, issue;
  logic [31:0]    iword;
  fps_instr_t     ins;

  instr_mem #(.DEPTH(IMEM_DEPTH), .W(32)) u_imem (
    .clk, .we(prog_we), .waddr(prog_addr), .wdata(prog_data),
    .re_en(1'b1), .raddr, .rdata(iword)
  );
  assign ins = fps_instr_t'(iword);

  // ---------------------------------------------------------------- decode
  logic [5:0] a_addr [BLK];
  logic [5:0] b_addr [BLK];
  logic [BLK-1:0] a_use, b_use;
  logic       writes_rd;
  always_comb begin
    for (int i = 0; i < BLK; i++) begin
      a_addr[i] = ins.ra + 6'(ins.astr4 ? 4 * i : i);
      b_addr[i] = ins.rb + 6'(ins.bstr4 ? 4 * i : i);
    end
    a_use = '0;
    b_use = '0;
    writes_rd = 1'b0;
    case (ins.op)
      F_ADD, F_SUB, F_MUL, F_DIV: begin a_use = 4'b0001; b_use = 4'b0001; writes_rd = 1'b1; end
      F_SQRT: begin a_use = 4'b0001; writes_rd = 1'b1; end
      F_DOT: begin
        for (int i = 0; i < BLK; i++) a_use[i] = (2'(i) <= ins.dotn);
        b_use = a_use;
        writes_rd = 1'b1;
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- register file
  logic [5:0] rf_raddr [NR];
  dword_t     rf_rdata [NR];
  logic       rf_we    [NW];
  logic [5:0] rf_waddr [NW];
  dword_t     rf_wdata [NW];

  fps_regfile #(.NR(NR), .NW(NW)) u_rf (
    .clk, .rst_n, .raddr(rf_raddr), .rdata(rf_rdata),
    .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata)
  );

  dword_t opa [BLK];
  dword_t opb [BLK];
  always_comb begin
    for (int i = 0; i < BLK; i++) begin
      rf_raddr[i]       = a_addr[i];
      rf_raddr[BLK + i] = b_addr[i];
      rf_raddr[2*BLK + i] = ls_rbase + 6'(i);
      opa[i] = rf_rdata[i];
      opb[i] = rf_rdata[BLK + i];
      ls_rdata[i] = rf_rdata[2*BLK + i];
    end
  end

  // ---------------------------------------------------------------- units
  logic   add_v, mul_v, rdp_v, div_v, sqrt_v;
  logic   add_ov, mul_ov, rdp_ov, div_ov, sqrt_ov;
  dword_t add_y, mul_y, rdp_y, div_y, sqrt_y;
  logic [5:0] add_t, mul_t, rdp_t, div_t, sqrt_t;
  logic   div_busy, sqrt_busy;

  assign add_v  = issue && (ins.op == F_ADD || ins.op == F_SUB);
  assign mul_v  = issue && ins.op == F_MUL;
  assign rdp_v  = issue && ins.op == F_DOT;
  assign div_v  = issue && ins.op == F_DIV;
  assign sqrt_v = issue && ins.op == F_SQRT;

  fp_add #(.LAT(ADD_LAT), .TAG_W(6)) u_fadd (
    .clk, .rst_n, .in_valid(add_v), .a(opa[0]), .b(opb[0]), .sub(ins.op == F_SUB),
    .in_tag(ins.rd), .out_valid(add_ov), .y(add_y), .out_tag(add_t)
  );
  fp_mul #(.LAT(MUL_LAT), .TAG_W(6)) u_fmul (
    .clk, .rst_n, .in_valid(mul_v), .a(opa[0]), .b(opb[0]),
    .in_tag(ins.rd), .out_valid(mul_ov), .y(mul_y), .out_tag(mul_t)
  );
  rdp #(.MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT), .TAG_W(6)) u_rdp (
    .clk, .rst_n, .in_valid(rdp_v), .a(opa), .b(opb), .n_m1(ins.dotn),
    .sub0(ins.sub0), .sub1(ins.sub1), .in_tag(ins.rd),
    .out_valid(rdp_ov), .y(rdp_y), .out_tag(rdp_t)
  );
  fp_div #(.TAG_W(6)) u_fdiv (
    .clk, .rst_n, .in_valid(div_v), .a(opa[0]), .b(opb[0]), .in_tag(ins.rd),
    .busy(div_busy), .out_valid(div_ov), .y(div_y), .out_tag(div_t)
  );
  fp_sqrt #(.TAG_W(6)) u_fsqrt (
    .clk, .rst_n, .in_valid(sqrt_v), .a(opa[0]), .in_tag(ins.rd),
    .busy(sqrt_busy), .out_valid(sqrt_ov), .y(sqrt_y), .out_tag(sqrt_t)
  );

  // write-back ports
  always_comb begin
    rf_we[0] = add_ov;  rf_waddr[0] = add_t;  rf_wdata[0] = add_y;
    rf_we[1] = mul_ov;  rf_waddr[1] = mul_t;  rf_wdata[1] = mul_y;
    rf_we[2] = rdp_ov;  rf_waddr[2] = rdp_t;  rf_wdata[2] = rdp_y;
    rf_we[3] = div_ov;  rf_waddr[3] = div_t;  rf_wdata[3] = div_y;
    rf_we[4] = sqrt_ov; rf_waddr[4] = sqrt_t; rf_wdata[4] = sqrt_y;
    for (int i = 0; i < BLK; i++) begin
      rf_we[5 + i]    = ls_we;
      rf_waddr[5 + i] = ls_wbase + 6'(i);
      rf_wdata[5 + i] = ls_wdata[i];
    end
  end

  // ---------------------------------------------------------------- scoreboard
  logic [NREGS-1:0] pending, set_mask, clr_mask;
  logic hazard, unit_busy, drained, can_issue;

  always_comb begin
    hazard = 1'b0;
    for (int i = 0; i < BLK; i++) begin
      if (a_use[i] && pending[a_addr[i]]) hazard = 1'b1;
      if (b_use[i] && pending[b_addr[i]]) hazard = 1'b1;
    end
    if (writes_rd && pending[ins.rd]) hazard = 1'b1;
    unit_busy = (ins.op == F_DIV && div_busy) || (ins.op == F_SQRT && sqrt_busy);
    drained   = (pending == '0) && !div_busy && !sqrt_busy;
    case (ins.op)
      F_WAIT:  can_issue = tok_in_avail;
      F_SIG:   can_issue = !iword[26] || drained;
      F_HALT:  can_issue = drained;
      default: can_issue = !hazard && !unit_busy;
    endcase
    set_mask = '0;
    if (issue && writes_rd) set_mask[ins.rd] = 1'b1;
    clr_mask = '0;
    for (int p = 0; p < 5; p++) if (rf_we[p]) clr_mask[rf_waddr[p]] = 1'b1;
  end

  assign issue       = running && ivalid && can_issue;
  assign tok_in_take = issue && ins.op == F_WAIT;
  assign tok_out_sig = issue && ins.op == F_SIG;

  // ---------------------------------------------------------------- loop / pc
  logic [IAW-1:0] loop_start, loop_end;
  logic [11:0]    loop_left;
  logic           loop_on;
  logic [11:0]    rep_cnt, rep_len;
  assign rep_cnt = iword[26:15];
  assign rep_len = iword[14:3];

  logic take_loop;
  assign take_loop = issue && loop_on && pc == loop_end && loop_left != '0 && ins.op != F_REP;

  always_comb begin
    pc_next = pc;
    if (issue) pc_next = take_loop ? loop_start : pc + 1'b1;
    raddr = start ? '0 : pc_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; ivalid <= 1'b0; running <= 1'b0; done <= 1'b0; pending <= '0;
      loop_start <= '0; loop_end <= '0; loop_left <= '0; loop_on <= 1'b0;
      perf_cycles <= '0; perf_flops <= '0; perf_stall_data <= '0;
      perf_stall_wait <= '0; perf_loops <= '0;
    end else if (start) begin
      pc <= '0; ivalid <= 1'b0; running <= 1'b1; done <= 1'b0; pending <= '0;
      loop_on <= 1'b0;
      perf_cycles <= '0; perf_flops <= '0; perf_stall_data <= '0;
      perf_stall_wait <= '0; perf_loops <= '0;
    end else if (running) begin
      pc      <= pc_next;
      ivalid  <= 1'b1;
      pending <= (pending & ~clr_mask) | set_mask;
      perf_cycles <= perf_cycles + 1;
      if (issue) perf_flops <= perf_flops + fps_flops(ins);
      if (ivalid && !issue) begin
        if (ins.op == F_WAIT) perf_stall_wait <= perf_stall_wait + 1;
        else                  perf_stall_data <= perf_stall_data + 1;
      end
      if (issue && ins.op == F_REP) begin
        loop_start <= pc + 1'b1;
        loop_end   <= pc + IAW'(rep_len);
        loop_left  <= (rep_cnt == '0) ? '0 : rep_cnt - 1'b1;
        loop_on    <= (rep_cnt > 12'd1) && (rep_len != '0);
      end else if (issue && loop_on && pc == loop_end) begin
        if (loop_left != '0) begin
          loop_left  <= loop_left - 1'b1;
          perf_loops <= perf_loops + 1;
        end else loop_on <= 1'b0;
      end
      if (issue && ins.op == F_HALT) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  // a result is never written back to a register that is not pending
  a_wb_pending: assert property (@(posedge clk) disable iff (!rst_n)
    (add_ov |-> pending[add_t]) and (rdp_ov |-> pending[rdp_t]) and (mul_ov |-> pending[mul_t]));
endmodule
