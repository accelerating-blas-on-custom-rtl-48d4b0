// tb_pe_top: end-to-end DGEMM on the whole PE, C = A*B + C with N x N random
// matrices in an external-memory model with a 20-cycle pipelined read delay
// that also refuses requests at random (STALL_PCT).  The three programs come
// from gemm_prog_pkg.  The result in external memory is compared bit-exactly
// with C computed here with reals in the same order of operations (each DOT4
// as a balanced tree, the four-element dot products added into C in k order).
// It also counts, and requires at least once, each mechanism the PE has:
// block loads and stores, single-word loads, read-after-write stalls in the
// sequencer, sequencer waits on the Load-Store CFU, local-stream waits on the
// sequencer (prefetch ahead of use), REP loop iterations and external-memory
// back-pressure.  It reports cycles and cycles per flop (CPF).
module tb_pe_top;
  import blas_pkg::*;
  import gemm_prog_pkg::*;

  localparam int N         = 8;
  localparam int STALL_PCT = 20;
  localparam bit WORD_C0   = 1'b1;

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

  gm_model #(.DEPTH(4096), .LAT(20), .STALL_PCT(STALL_PCT)) u_gm (
    .clk, .rst_n, .req_valid(gm_req_valid), .req_ready(gm_req_ready),
    .req_we(gm_req_we), .req_addr(gm_req_addr), .req_wdata(gm_req_wdata),
    .resp_valid(gm_resp_valid), .resp_data(gm_resp_data)
  );

  int checks = 0, failures = 0;
  int backpressure = 0;
  always @(posedge clk) if (rst_n && gm_req_valid && !gm_req_ready) backpressure++;

  logic [63:0] gp [$];
  logic [31:0] lp [$], fp [$];
  real A [N][N], B [N][N], C [N][N];

  task automatic write_prog(int sel, int idx, logic [63:0] w);
    prog_we <= 1'b1; prog_sel <= 2'(sel); prog_addr <= 12'(idx); prog_data <= w;
    @(posedge clk);
  endtask

  task automatic mech(string name, int count);
    checks++;
    $display("  %-34s %0d", name, count);
    if (count == 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
  endtask

  initial begin
    int bad;
    start = 0; prog_we = 0; prog_sel = 0; prog_addr = 0; prog_data = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        A[i][j] = (real'($urandom_range(0, 2000)) - 1000.0) / 64.0;
        B[i][j] = (real'($urandom_range(0, 2000)) - 1000.0) / 128.0;
        C[i][j] = (real'($urandom_range(0, 2000)) - 1000.0) / 32.0;
        u_gm.mem[i * N + j]         = $realtobits(A[i][j]);
        u_gm.mem[N * N + i * N + j] = $realtobits(B[i][j]);
        u_gm.mem[2 * N * N + i * N + j] = $realtobits(C[i][j]);
      end
    build(N, WORD_C0, gp, lp, fp);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    foreach (gp[k]) write_prog(0, k, gp[k]);
    foreach (lp[k]) write_prog(1, k, {32'h0, lp[k]});
    foreach (fp[k]) write_prog(2, k, {32'h0, fp[k]});
    prog_we <= 1'b0;
    @(posedge clk);
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    #1;
    while (!done) @(posedge clk);
    @(negedge clk);

    // reference: same order of operations as the hardware
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        real c, t;
        c = C[i][j];
        for (int bk = 0; bk < N / 4; bk++) begin
          t = (A[i][4*bk] * B[4*bk][j] + A[i][4*bk+1] * B[4*bk+1][j]) +
              (A[i][4*bk+2] * B[4*bk+2][j] + A[i][4*bk+3] * B[4*bk+3][j]);
          c = c + t;
        end
        C[i][j] = c;
      end
    bad = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        checks++;
        if (u_gm.mem[2 * N * N + i * N + j] !== $realtobits(C[i][j])) begin
          failures++;
          if (bad++ < 5) $display("FAIL C[%0d][%0d] = %h expected %h", i, j,
                                  u_gm.mem[2 * N * N + i * N + j], $realtobits(C[i][j]));
        end
      end
    checks++;
    if (perf_flops != 2 * N * N * N - N * N + N * N) begin
      failures++; $display("FAIL flops %0d", perf_flops);
    end
    $display("DGEMM %0dx%0d: %0d cycles, %0d flops, CPF %f, %0.1f%% of peak FPC 7",
             N, N, perf_cycles, perf_flops, real'(perf_cycles) / real'(perf_flops),
             100.0 * real'(perf_flops) / real'(perf_cycles) / 7.0);
    $display("mechanisms:");
    mech("block loads/stores (4x4)", perf_gm_blocks);
    mech("single-word external accesses", (perf_gm_words > 16 * perf_gm_blocks) ? perf_gm_words - 16 * perf_gm_blocks : 0);
    mech("sequencer RAW/drain stall cycles", perf_fps_stall_data);
    mech("sequencer WAIT stall cycles", perf_fps_stall_wait);
    mech("local stream wait cycles (prefetch)", perf_local_stall);
    mech("REP loop back-edges", perf_fps_loops);
    mech("256-bit RF loads", perf_rf_loads);
    mech("256-bit RF stores", perf_rf_stores);
    if (STALL_PCT > 0) mech("external memory back-pressure", backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
