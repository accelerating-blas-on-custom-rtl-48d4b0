// gemm_prog_pkg: builds the three programs that make the PE compute the
// double-precision GEMM  C = A*B + C  for n x n row-major matrices (n a
// multiple of 4) held in external memory at A = 0, B = n*n, C = 2*n*n.
//
// Blocking: C is computed one 4x4 block at a time.  For block (i,j) the
// local stream loads C(i,j) into r32..r47 and then, for each k, A(i,k) into
// r0..r15 and B(k,j) into r16..r31 and gives the sequencer a token.  The
// sequencer waits for it, issues 16 DOT4 (row of A times column of B, the
// column read with stride 4) into r48..r63, signals that A and B may be
// overwritten (the DOTs have read their operands), and then adds the 16 dot
// products into C.  The local stream's loads of the next A and B blocks thus
// overlap the adds and the DOT pipeline drain: this is the prefetching of the
// next iteration.  After the last k the sequencer signals again once every
// result is written, and the local stream stores C(i,j) back to the Local
// Memory.  The sequencer program is one block body run K*K times by REP.
// The global stream brings B and then, block row by block row, A and C into
// the Local Memory with block loads (optionally the first C block word by
// word), handing each row over to the local stream with a token; as the
// local stream finishes a row of C it gives a token back and the global
// stream writes that row to external memory with block stores.
package gemm_prog_pkg;
  import blas_pkg::*;

  function automatic logic [63:0] g_ins(ls_global_op_e op, int lma, int gma, int stride);
    ls_global_instr_t i;
    i = '0; i.op = op; i.lma = 12'(lma); i.gma = 24'(gma); i.stride = 12'(stride);
    return i;
  endfunction
  function automatic logic [31:0] l_ins(ls_local_op_e op, int rg, int lma);
    ls_local_instr_t i;
    i = '0; i.op = op; i.rg = 6'(rg); i.lma = 12'(lma);
    return i;
  endfunction
  function automatic logic [31:0] f_ins(fps_op_e op, int rd, int ra, int rb);
    fps_instr_t i;
    i = '0; i.op = op; i.rd = 6'(rd); i.ra = 6'(ra); i.rb = 6'(rb);
    return i;
  endfunction

  // LM word address of a block
  function automatic int lm_a(int K, int bi, int bk); return 16 * (bi * K + bk); endfunction
  function automatic int lm_b(int K, int bk, int bj); return 16 * K * K + 16 * (bk * K + bj); endfunction
  function automatic int lm_c(int K, int bi, int bj); return 32 * K * K + 16 * (bi * K + bj); endfunction

  function automatic void build(int n, bit word_c0,
                                ref logic [63:0] gp [$], ref logic [31:0] lp [$],
                                ref logic [31:0] fp [$]);
    int K;
    K = n / 4;
    gp = {}; lp = {}; fp = {};
    // ---- global stream: all of B, then per block row i the blocks A(i,*)
    // and C(i,*) followed by a token, so the local stream can start on row
    // 0 while later rows are still arriving; then, per row, wait for the
    // local stream's token and store C(i,*)
    for (int bk = 0; bk < K; bk++)
      for (int bj = 0; bj < K; bj++)
        gp.push_back(g_ins(G_LDB, lm_b(K, bk, bj), n * n + bk * 4 * n + bj * 4, n));
    for (int bi = 0; bi < K; bi++) begin
      for (int bk = 0; bk < K; bk++)
        gp.push_back(g_ins(G_LDB, lm_a(K, bi, bk), bi * 4 * n + bk * 4, n));
      for (int bj = 0; bj < K; bj++)
        if (word_c0 && bi == 0 && bj == 0)
          for (int w = 0; w < 16; w++)
            gp.push_back(g_ins(G_LD, lm_c(K, 0, 0) + w, 2 * n * n + (w / 4) * n + w % 4, 0));
        else
          gp.push_back(g_ins(G_LDB, lm_c(K, bi, bj), 2 * n * n + bi * 4 * n + bj * 4, n));
      gp.push_back(g_ins(G_SIG, 0, 0, 0));
    end
    for (int bi = 0; bi < K; bi++) begin
      gp.push_back(g_ins(G_WAIT, 0, 0, 0));
      for (int bj = 0; bj < K; bj++)
        gp.push_back(g_ins(G_STB, lm_c(K, bi, bj), 2 * n * n + bi * 4 * n + bj * 4, n));
    end
    gp.push_back(g_ins(G_HALT, 0, 0, 0));
    // ---- local stream
    for (int bi = 0; bi < K; bi++) begin
      lp.push_back(l_ins(L_WAITG, 0, 0));
      for (int bj = 0; bj < K; bj++) begin
        for (int r = 0; r < 4; r++) lp.push_back(l_ins(L_LD, 32 + 4 * r, lm_c(K, bi, bj) + 4 * r));
        for (int bk = 0; bk < K; bk++) begin
          for (int r = 0; r < 4; r++) lp.push_back(l_ins(L_LD, 4 * r, lm_a(K, bi, bk) + 4 * r));
          for (int r = 0; r < 4; r++) lp.push_back(l_ins(L_LD, 16 + 4 * r, lm_b(K, bk, bj) + 4 * r));
          lp.push_back(l_ins(L_SIGF, 0, 0));
          lp.push_back(l_ins(L_WAITF, 0, 0));
        end
        lp.push_back(l_ins(L_WAITF, 0, 0));
        for (int r = 0; r < 4; r++) lp.push_back(l_ins(L_ST, 32 + 4 * r, lm_c(K, bi, bj) + 4 * r));
      end
      lp.push_back(l_ins(L_SIGG, 0, 0));
    end
    lp.push_back(l_ins(L_HALT, 0, 0));
    // ---- sequencer
    fp.push_back({F_REP, 12'(K * K), 12'(K * 34 + 1), 3'b0});
    for (int bk = 0; bk < K; bk++) begin
      fps_instr_t d;
      fp.push_back(f_ins(F_WAIT, 0, 0, 0));
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          d = '0; d.op = F_DOT; d.rd = 6'(48 + 4 * i + j); d.ra = 6'(4 * i);
          d.rb = 6'(16 + j); d.dotn = 2'd3; d.bstr4 = 1'b1;
          fp.push_back(d);
        end
      fp.push_back({F_SIG, 1'b0, 26'b0});
      for (int e = 0; e < 16; e++) fp.push_back(f_ins(F_ADD, 32 + e, 32 + e, 48 + e));
    end
    fp.push_back({F_SIG, 1'b1, 26'b0});
    fp.push_back(f_ins(F_HALT, 0, 0, 0));
  endfunction
endpackage
