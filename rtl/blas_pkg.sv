// blas_pkg: types, instruction encodings and IEEE-754 helpers shared by the
// BLAS processing element (PE).
//
// The PE has three instruction streams: the Floating Point Sequencer (FPS),
// the global load/store stream (external memory <-> Local Memory) and the
// local load/store stream (Local Memory <-> Register File).  The paper gives
// none of their encodings; the formats below are this design's own.
//
// FPS instruction, 32 bits:
//   [31:27] opcode  [26:21] rd  [20:15] ra  [14:9] rb
//   DOT:  [8:7] n-1 (DOT1..DOT4)  [6] left +/- node subtracts
//         [5] right +/- node subtracts  [4] a stride 4 (else 1)  [3] b stride 4
//   REP:  [26:15] repeat count  [14:3] body length (instructions after REP)
//   SIG:  [26] drain: wait until no result is outstanding before signalling
// Local L/S instruction, 32 bits:  [31:28] opcode  [27:22] reg  [11:0] LM word address
// Global L/S instruction, 64 bits: [63:60] opcode  [59:48] LM word address
//   [47:24] external-memory word address  [23:12] row stride of a 4x4 block
package blas_pkg;

  typedef logic [63:0] dword_t;   // one IEEE-754 binary64 value

  localparam int NREGS     = 64;  // paper: 64 registers of 64 bits
  localparam int BLK       = 4;   // paper: 4x4 block, DOT4, 256-bit transfers
  localparam int LM_WORDS  = 4096; // paper: 256 kbit Local Memory = 4096 x 64 bit
  localparam int GM_AW     = 24;  // external memory word address width (assumed)

  typedef enum logic [4:0] {
    F_NOP  = 5'd0,
    F_ADD  = 5'd1,
    F_SUB  = 5'd2,
    F_MUL  = 5'd3,
    F_DIV  = 5'd4,
    F_SQRT = 5'd5,
    F_DOT  = 5'd6,
    F_WAIT = 5'd7,   // wait for (consume) a token from the local L/S stream
    F_SIG  = 5'd8,   // send a token to the local L/S stream
    F_REP  = 5'd9,   // hardware loop over the next body-length instructions
    F_HALT = 5'd10
  } fps_op_e;

  typedef enum logic [3:0] {
    L_NOP   = 4'd0,
    L_LD    = 4'd1,  // LM[a..a+3] -> R[r..r+3] (256 bit)
    L_ST    = 4'd2,  // R[r..r+3] -> LM[a..a+3] (256 bit)
    L_WAITG = 4'd3,  // consume token from global stream
    L_SIGG  = 4'd4,  // send token to global stream
    L_WAITF = 4'd5,  // consume token from FPS
    L_SIGF  = 4'd6,  // send token to FPS
    L_HALT  = 4'd7
  } ls_local_op_e;

  typedef enum logic [3:0] {
    G_NOP  = 4'd0,
    G_LD   = 4'd1,   // one word, external -> LM, waits for the response
    G_ST   = 4'd2,   // one word, LM -> external
    G_LDB  = 4'd3,   // 4x4 block, external -> LM, 16 pipelined requests
    G_STB  = 4'd4,   // 4x4 block, LM -> external
    G_WAIT = 4'd5,   // consume token from local stream
    G_SIG  = 4'd6,   // send token to local stream
    G_HALT = 4'd7
  } ls_global_op_e;

  typedef struct packed {
    fps_op_e    op;
    logic [5:0] rd;
    logic [5:0] ra;
    logic [5:0] rb;
    logic [1:0] dotn;   // n-1
    logic       sub0;
    logic       sub1;
    logic       astr4;
    logic       bstr4;
    logic [2:0] rsvd;
  } fps_instr_t;

  typedef struct packed {
    ls_local_op_e op;
    logic [5:0]   rg;
    logic [9:0]   rsvd;
    logic [11:0]  lma;
  } ls_local_instr_t;

  typedef struct packed {
    ls_global_op_e op;
    logic [11:0]   lma;
    logic [23:0]   gma;
    logic [11:0]   stride;
    logic [11:0]   rsvd;
  } ls_global_instr_t;

  // Flops of one FPS instruction, for the performance counters.
  function automatic int unsigned fps_flops(fps_instr_t i);
    case (i.op)
      F_ADD, F_SUB, F_MUL, F_DIV, F_SQRT: return 1;
      F_DOT: return 2 * (int'(i.dotn) + 1) - 1;
      default: return 0;
    endcase
  endfunction

  // IEEE-754 binary64 fields
  function automatic logic is_nan(dword_t x);
    return (x[62:52] == 11'h7ff) && (x[51:0] != '0);
  endfunction
  function automatic logic is_inf(dword_t x);
    return (x[62:52] == 11'h7ff) && (x[51:0] == '0);
  endfunction
  // Subnormals are treated as zero throughout (flush to zero).
  function automatic logic is_zero(dword_t x);
    return x[62:52] == 11'h000;
  endfunction

  localparam dword_t QNAN = 64'h7ff8_0000_0000_0000;

  // Round to nearest even and pack.  mant: 53-bit significand with the hidden
  // one at bit 52; g: guard bit; st: sticky; e: biased exponent (signed, wide).
  function automatic dword_t round_pack(logic s, logic signed [13:0] e,
                                        logic [52:0] mant, logic g, logic st);
    logic [53:0] r;
    logic signed [13:0] ee;
    r  = {1'b0, mant} + {53'h0, g & (st | mant[0])};
    ee = e;
    if (r[53]) begin
      r  = r >> 1;
      ee = ee + 14'sd1;
    end
    if (ee >= 14'sd2047)   return {s, 11'h7ff, 52'h0};   // overflow -> inf
    else if (ee <= 14'sd0) return {s, 63'h0};            // underflow -> zero
    else                   return {s, ee[10:0], r[51:0]};
  endfunction

endpackage
