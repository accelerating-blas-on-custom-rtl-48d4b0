// tb_pe_gemv: end-to-end DGEMV, y = A*x + y, on the PE with every parameter
// at its default, for the matrix sizes 20, 40 and 60 (n x n, row-major, A at
// external word 0, x at n*n, y at n*n + n).  Larger sizes do not fit: A
// alone needs n*n words of the 4096-word Local Memory.  The programs come
// from blas12_prog_pkg (4x4 blocks of A, software-pipelined DOT4/ADD,
// double-buffered prefetch of A and x).  For each size the PE is reset,
// programmed and run, and y in the external-memory model (20-cycle read
// delay) is compared bit-exactly with a reference computed here with reals
// in the same order: each DOT4 as (p0 + p1) + (p2 + p3), the dot products of
// a row added into y in column-block order.  It checks the flop count,
// requires block transfers, single-word transfers, sequencer waits and
// local-stream waits (prefetch running ahead) to happen, and reports cycles
// and the fraction of the peak of 7 flops per cycle.
module tb_pe_gemv;
  import blas_pkg::*;
  import gemm_prog_pkg::*;
  import blas12_prog_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, prog_we;
  logic [1:0] prog_sel;
  logic [11:0] prog_addr;
  logic [63:0] prog_data;
  logic gm_req_valid, gm_req_ready, gm_req_we, gm_resp_valid;
  logic [GM_AW-1:0] gm_req_addr;
  dword_t gm_req_wdata, gm_resp_data;
  logic [31:0] perf_cycles, perf_flops, perf_fps_stall_data, perf_fps_stall_wait,
               perf_fps_loops, perf_gm_words, perf_gm_blocks, perf_rf_loads,
               perf_rf_stores, perf_local_stall;

  pe_top dut (.*);

  gm_model #(.DEPTH(4096), .LAT(20), .STALL_PCT(0)) u_gm (
    .clk, .rst_n, .req_valid(gm_req_valid), .req_ready(gm_req_ready),
    .req_we(gm_req_we), .req_addr(gm_req_addr), .req_wdata(gm_req_wdata),
    .resp_valid(gm_resp_valid), .resp_data(gm_resp_data)
  );

  int checks = 0, failures = 0;
  logic [63:0] gp [$];
  logic [31:0] lp [$], fp [$];

  task automatic write_prog(int sel, int idx, logic [63:0] w);
    prog_we <= 1'b1; prog_sel <= 2'(sel); prog_addr <= 12'(idx); prog_data <= w;
    @(posedge clk);
  endtask

  task automatic mech(string name, int count);
    checks++;
    $display("  %-34s %0d", name, count);
    if (count == 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
  endtask

  // reset the PE, load the three programs, run them to completion
  task automatic run_programs();
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    if (gp.size() > 2048 || lp.size() > 4096 || fp.size() > 4096) begin
      failures++;
      $display("FAIL program does not fit: %0d / %0d / %0d", gp.size(), lp.size(), fp.size());
    end
    foreach (gp[k]) write_prog(0, k, gp[k]);
    foreach (lp[k]) write_prog(1, k, {32'h0, lp[k]});
    foreach (fp[k]) write_prog(2, k, {32'h0, fp[k]});
    prog_we <= 1'b0;
    @(posedge clk);
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    #1;
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask

  function automatic real rnd(real scale);
    return (real'($urandom_range(0, 2000)) - 1000.0) / scale;
  endfunction

  task automatic check_word(string what, int idx, logic [63:0] got, real exp, ref int bad);
    checks++;
    if (got !== $realtobits(exp)) begin
      failures++;
      if (bad++ < 5) $display("FAIL %s[%0d] = %h expected %h", what, idx, got, $realtobits(exp));
    end
  endtask

  task automatic run_gemv(int n);
    real A [], x [], y [];
    int bad;
    A = new[n * n]; x = new[n]; y = new[n];
    foreach (A[k]) begin A[k] = rnd(64.0); u_gm.mem[k] = $realtobits(A[k]); end
    foreach (x[k]) begin x[k] = rnd(128.0); u_gm.mem[n * n + k] = $realtobits(x[k]); end
    foreach (y[k]) begin y[k] = rnd(32.0); u_gm.mem[n * n + n + k] = $realtobits(y[k]); end
    build_gemv(n, gp, lp, fp);
    run_programs();
    for (int i = 0; i < n; i++)
      for (int bk = 0; bk < n / 4; bk++) begin
        real t;
        t = (A[i * n + 4 * bk] * x[4 * bk] + A[i * n + 4 * bk + 1] * x[4 * bk + 1]) +
            (A[i * n + 4 * bk + 2] * x[4 * bk + 2] + A[i * n + 4 * bk + 3] * x[4 * bk + 3]);
        y[i] = y[i] + t;
      end
    bad = 0;
    for (int i = 0; i < n; i++) check_word("y", i, u_gm.mem[n * n + n + i], y[i], bad);
    checks++;
    if (perf_flops != 2 * n * n) begin failures++; $display("FAIL flops %0d", perf_flops); end
    $display("DGEMV %0dx%0d: %0d cycles, %0d flops, CPF %f, %0.1f%% of peak FPC 7",
             n, n, perf_cycles, perf_flops, real'(perf_cycles) / real'(perf_flops),
             100.0 * real'(perf_flops) / real'(perf_cycles) / 7.0);
    mech("block loads/stores (4x4)", perf_gm_blocks);
    mech("single-word loads/stores", perf_gm_words);
    mech("sequencer RAW/drain stall cycles", perf_fps_stall_data);
    mech("sequencer WAIT stall cycles", perf_fps_stall_wait);
    mech("local stream wait cycles (prefetch)", perf_local_stall);
    mech("256-bit RF loads", perf_rf_loads);
    mech("256-bit RF stores", perf_rf_stores);
  endtask

  initial begin
    start = 0; prog_we = 0; prog_sel = 0; prog_addr = 0; prog_data = 0;
    run_gemv(20);
    run_gemv(40);
    run_gemv(60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
