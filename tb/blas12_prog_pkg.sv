// blas12_prog_pkg: builds the three PE programs for the Level-2 and Level-1
// kernels DGEMV (y = A*x + y, A n x n row-major) and DDOT (r = x . y).
//
// Both kernels stream operands through the Register File in "steps" that
// use one of D register buffers in turn.  The local stream loads the
// operands of step s into buffer s mod D and gives the sequencer a token; the
// sequencer waits for it, issues the DOT4s of the step, and gives a token
// back as soon as they have issued (they read their operands at issue), so
// the local stream may refill that buffer.  Before loading step s the local
// stream makes sure it has taken every token up to the one returned for
// step s - D: up to D steps of operands are in flight ahead of the
// arithmetic (prefetching).  The sequencer programs are fully unrolled.
//
// DGEMV, external memory: A at 0, x at n*n, y at n*n + n.  LM: A as 4x4
// blocks, block (bi,bk) at 16*(bi*K+bk), x at 16*K*K, y at 16*K*K + 4*K.
// The global stream brings x and y first and then A one block row at a
// time, handing each row to the local stream with a token, so loading A
// overlaps the computation on the rows already present.
// Registers: A buffers r0..15 / r16..31, x buffers r32..35 / r36..39,
// three dot-product buffers r40..51, y of even / odd block rows r52..55 /
// r56..59.  Each step is one 4x4 block of A: 4 DOT4 (row . x quad) and,
// two steps later in the sequencer's program (software pipelining, so the
// adds do not wait for the 15-cycle DOT pipeline), 4 ADD into y.  After the
// adds of a block row's last step the sequencer gives a draining token and
// the local stream stores that row's y.
//
// DDOT, external memory: x at 0, y at n.  LM: x at 0, y at 4*K.  Each step
// is one quad of x and of y (buffers r0..15 and r16..31, D = 4), one DOT4;
// steps rotate over four accumulators r40..43 (the first four steps write
// them directly, later ones through r32..36 and an ADD issued four steps
// later), which are finally summed as (r40 + r41) + (r42 + r43) into r46 and
// stored with r44..47.
//
// Vectors are moved with 4x4 block transfers of stride 4 (16 contiguous
// words) and single-word transfers for the rest.
package blas12_prog_pkg;
  import blas_pkg::*;
  import gemm_prog_pkg::*;

  // global-stream transfer of a contiguous vector segment
  function automatic void g_vec(ref logic [63:0] gp [$], input bit store, int lma, int gma, int len);
    int w;
    w = 0;
    for (; w + 16 <= len; w += 16)
      gp.push_back(g_ins(store ? G_STB : G_LDB, lma + w, gma + w, 4));
    for (; w < len; w++)
      gp.push_back(g_ins(store ? G_ST : G_LD, lma + w, gma + w, 0));
  endfunction

  // local stream: take sequencer tokens until `need` have been taken
  function automatic void l_take(ref logic [31:0] lp [$], ref int taken, input int need);
    while (taken < need) begin
      lp.push_back(l_ins(L_WAITF, 0, 0));
      taken++;
    end
  endfunction

  function automatic logic [31:0] f_dot4(int rd, int ra, int rb);
    fps_instr_t d;
    d = '0; d.op = F_DOT; d.rd = 6'(rd); d.ra = 6'(ra); d.rb = 6'(rb); d.dotn = 2'd3;
    return d;
  endfunction

  function automatic void build_gemv(int n, ref logic [63:0] gp [$], ref logic [31:0] lp [$],
                                     ref logic [31:0] fp [$]);
    localparam int L = 2;   // sequencer: adds of step s issue after the DOTs of s+L
    int K, S, LX, LY, ntok, taken;
    int tok_step [], tok_row [];   // token number given after step s / after row r
    int store_after [];            // row whose y the local stream stores after step s
    K = n / 4; S = K * K; LX = 16 * K * K; LY = LX + 4 * K;
    gp = {}; lp = {}; fp = {};
    tok_step = new[S]; tok_row = new[K]; store_after = new[S];
    // global: x and y, then A one block row at a time with a token after
    // each row, so the computation starts after the first row; at the end
    // wait for the local stream and store y
    g_vec(gp, 1'b0, LX, n * n, n);
    g_vec(gp, 1'b0, LY, n * n + n, n);
    for (int bi = 0; bi < K; bi++) begin
      for (int bk = 0; bk < K; bk++)
        gp.push_back(g_ins(G_LDB, lm_a(K, bi, bk), bi * 4 * n + bk * 4, n));
      gp.push_back(g_ins(G_SIG, 0, 0, 0));
    end
    gp.push_back(g_ins(G_WAIT, 0, 0, 0));
    g_vec(gp, 1'b1, LY, n * n + n, n);
    gp.push_back(g_ins(G_HALT, 0, 0, 0));
    // sequencer, software-pipelined: iteration t issues the DOTs of step t
    // and the adds of step t-L.  Buffers: A/x by s mod 2, dot products by
    // s mod 3, y by row mod 2.
    ntok = 0;
    for (int t = 0; t < S + L; t++) begin
      if (t < S) begin
        fp.push_back(f_ins(F_WAIT, 0, 0, 0));
        for (int i = 0; i < 4; i++)
          fp.push_back(f_dot4(40 + 4 * (t % 3) + i, 16 * (t % 2) + 4 * i, 32 + 4 * (t % 2)));
        fp.push_back({F_SIG, 1'b0, 26'b0});
        tok_step[t] = ++ntok;
      end
      if (t >= L) begin
        int q, r;
        q = t - L; r = q / K;
        for (int i = 0; i < 4; i++)
          fp.push_back(f_ins(F_ADD, 52 + 4 * (r % 2) + i, 52 + 4 * (r % 2) + i,
                             40 + 4 * (q % 3) + i));
        if (q % K == K - 1) begin
          fp.push_back({F_SIG, 1'b1, 26'b0});
          tok_row[r] = ++ntok;
        end
      end
    end
    fp.push_back(f_ins(F_HALT, 0, 0, 0));
    // local: the drain token of row r follows the token of step last(r)+L,
    // so the store of row r is placed after that step has been handed over
    foreach (store_after[q]) store_after[q] = -1;
    for (int r = 0; r < K; r++)
      if (r * K + K - 1 + L < S) store_after[r * K + K - 1 + L] = r;
    taken = 0;
    for (int q = 0; q < S; q++) begin
      if (q % K == 0) begin   // wait for the row of A; y of the new row
        lp.push_back(l_ins(L_WAITG, 0, 0));
        lp.push_back(l_ins(L_LD, 52 + 4 * ((q / K) % 2), LY + 4 * (q / K)));
      end
      if (q >= 2) l_take(lp, taken, tok_step[q - 2]);
      for (int r = 0; r < 4; r++)
        lp.push_back(l_ins(L_LD, 16 * (q % 2) + 4 * r, lm_a(K, q / K, q % K) + 4 * r));
      lp.push_back(l_ins(L_LD, 32 + 4 * (q % 2), LX + 4 * (q % K)));
      lp.push_back(l_ins(L_SIGF, 0, 0));
      if (store_after[q] >= 0) begin
        l_take(lp, taken, tok_row[store_after[q]]);
        lp.push_back(l_ins(L_ST, 52 + 4 * (store_after[q] % 2), LY + 4 * store_after[q]));
      end
    end
    for (int r = 0; r < K; r++)
      if (r * K + K - 1 + L >= S) begin
        l_take(lp, taken, tok_row[r]);
        lp.push_back(l_ins(L_ST, 52 + 4 * (r % 2), LY + 4 * r));
      end
    lp.push_back(l_ins(L_SIGG, 0, 0));
    lp.push_back(l_ins(L_HALT, 0, 0));
  endfunction

  function automatic void build_ddot(int n, ref logic [63:0] gp [$], ref logic [31:0] lp [$],
                                     ref logic [31:0] fp [$]);
    localparam int L = 4;   // sequencer: the add of step s issues after the DOT of s+L
    int K, LYV, taken;
    K = n / 4; LYV = 4 * K;
    gp = {}; lp = {}; fp = {};
    g_vec(gp, 1'b0, 0, 0, n);
    g_vec(gp, 1'b0, LYV, n, n);
    gp.push_back(g_ins(G_SIG, 0, 0, 0));
    gp.push_back(g_ins(G_WAIT, 0, 0, 0));
    gp.push_back(g_ins(G_ST, 8 * K + 2, 2 * n, 0));
    gp.push_back(g_ins(G_HALT, 0, 0, 0));
    // local: step s uses operand buffer s mod 4; its token is number s+1
    lp.push_back(l_ins(L_WAITG, 0, 0));
    taken = 0;
    for (int s = 0; s < K; s++) begin
      if (s >= 4) l_take(lp, taken, s - 3);
      lp.push_back(l_ins(L_LD, 4 * (s % 4), 4 * s));
      lp.push_back(l_ins(L_LD, 16 + 4 * (s % 4), LYV + 4 * s));
      lp.push_back(l_ins(L_SIGF, 0, 0));
    end
    l_take(lp, taken, K + 1);            // the draining token after the sum
    lp.push_back(l_ins(L_ST, 44, 8 * K));
    lp.push_back(l_ins(L_SIGG, 0, 0));
    lp.push_back(l_ins(L_HALT, 0, 0));
    // sequencer: steps 0..3 write the accumulators r40..43 directly; later
    // steps write a dot-product buffer r32..36 (s mod 5) that is added into
    // accumulator s mod 4 L iterations later
    for (int t = 0; t < K + L; t++) begin
      if (t < K) begin
        fp.push_back(f_ins(F_WAIT, 0, 0, 0));
        fp.push_back(f_dot4(t < 4 ? 40 + t : 32 + t % 5, 4 * (t % 4), 16 + 4 * (t % 4)));
        fp.push_back({F_SIG, 1'b0, 26'b0});
      end
      if (t >= L && t - L >= 4 && t - L < K)
        fp.push_back(f_ins(F_ADD, 40 + (t - L) % 4, 40 + (t - L) % 4, 32 + (t - L) % 5));
    end
    // accumulators never written (K < 4) are still zero from reset
    fp.push_back(f_ins(F_ADD, 44, 40, 41));
    fp.push_back(f_ins(F_ADD, 45, 42, 43));
    fp.push_back(f_ins(F_ADD, 46, 44, 45));
    fp.push_back({F_SIG, 1'b1, 26'b0});
    fp.push_back(f_ins(F_HALT, 0, 0, 0));
  endfunction
endpackage
