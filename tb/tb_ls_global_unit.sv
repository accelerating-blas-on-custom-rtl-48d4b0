// tb_ls_global_unit: runs global load/store programs against the external
// memory model (20-cycle read delay) and a Local Memory model kept in the test
// bench.  Checks that:
//  - LDB gathers a 4x4 block with a row stride into 16 consecutive LM words,
//    LD moves single words, ST and STB write words and blocks back out;
//  - SIG emits a token and WAIT stalls until one is offered;
//  - timing: four block loads finish within 4 x (16 + 20 + 4) cycles while 64
//    single-word loads need at least 64 x 21 (one round trip per word), which
//    is the handshake saving of the block instructions.
module tb_ls_global_unit;
  import blas_pkg::*;
  import gemm_prog_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, running, done, prog_we, l_avail, l_take, l_sig;
  logic [10:0] prog_addr;
  logic [63:0] prog_data;
  logic lm_en, lm_we;
  logic [11:0] lm_addr;
  dword_t lm_wdata, lm_rdata;
  logic gm_req_valid, gm_req_ready, gm_req_we, gm_resp_valid;
  logic [GM_AW-1:0] gm_req_addr;
  dword_t gm_req_wdata, gm_resp_data;
  logic [31:0] perf_words, perf_blocks, perf_busy;

  ls_global_unit dut (.*);
  gm_model #(.DEPTH(4096), .LAT(20)) u_gm (
    .clk, .rst_n, .req_valid(gm_req_valid), .req_ready(gm_req_ready),
    .req_we(gm_req_we), .req_addr(gm_req_addr), .req_wdata(gm_req_wdata),
    .resp_valid(gm_resp_valid), .resp_data(gm_resp_data)
  );

  // Local Memory model: synchronous read
  dword_t lm [4096];
  always @(posedge clk) begin
    if (lm_en && lm_we) lm[lm_addr] <= lm_wdata;
    if (lm_en && !lm_we) lm_rdata <= lm[lm_addr];
  end

  int checks = 0, failures = 0, sigs = 0;
  always @(posedge clk) if (rst_n && l_sig) sigs++;

  logic [63:0] prog [$];

  task automatic run_prog(int limit);
    foreach (prog[k]) begin
      prog_we <= 1'b1; prog_addr <= 11'(k); prog_data <= prog[k]; @(posedge clk);
    end
    prog_we <= 1'b0;
    start <= 1'b1; @(posedge clk); start <= 1'b0; #1;
    for (int n = 0; n < limit && !done; n++) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int t_blk, t_word;
    start = 0; prog_we = 0; prog_addr = 0; prog_data = 0; l_avail = 0;
    for (int i = 0; i < 4096; i++) begin u_gm.mem[i] = {32'hfeed, 32'(i)}; lm[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // program 1: block load with stride 10, word load, word store, block store, tokens
    prog = {};
    prog.push_back(g_ins(G_LDB, 100, 200, 10));
    prog.push_back(g_ins(G_LD, 300, 777, 0));
    prog.push_back(g_ins(G_SIG, 0, 0, 0));
    prog.push_back(g_ins(G_WAIT, 0, 0, 0));
    prog.push_back(g_ins(G_ST, 300, 1000, 0));
    prog.push_back(g_ins(G_STB, 100, 2000, 8));
    prog.push_back(g_ins(G_HALT, 0, 0, 0));
    foreach (prog[k]) begin
      prog_we <= 1'b1; prog_addr <= 11'(k); prog_data <= prog[k]; @(posedge clk);
    end
    prog_we <= 1'b0;
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    repeat (300) @(posedge clk);
    chk(!done && sigs == 1, "WAIT must stall until a token arrives, SIG must fire once");
    l_avail <= 1'b1;
    while (!l_take) @(posedge clk);
    @(posedge clk);
    l_avail <= 1'b0;
    for (int n = 0; n < 500 && !done; n++) @(posedge clk);
    @(negedge clk);
    chk(done, "program 1 finished");
    for (int k = 0; k < 16; k++) begin
      chk(lm[100 + k] == {32'hfeed, 32'(200 + (k / 4) * 10 + k % 4)}, $sformatf("LDB word %0d", k));
      chk(u_gm.mem[2000 + (k / 4) * 8 + k % 4] == lm[100 + k], $sformatf("STB word %0d", k));
    end
    chk(lm[300] == {32'hfeed, 32'd777}, "LD word");
    chk(u_gm.mem[1000] == {32'hfeed, 32'd777}, "ST word");
    chk(perf_blocks == 2 && perf_words == 34, "traffic counters");

    // program 2: four block loads
    prog = {};
    for (int b = 0; b < 4; b++) prog.push_back(g_ins(G_LDB, 16 * b, 40 * b, 4));
    prog.push_back(g_ins(G_HALT, 0, 0, 0));
    run_prog(2000);
    t_blk = perf_busy;
    // program 3: the same 64 words one at a time
    prog = {};
    for (int b = 0; b < 4; b++)
      for (int k = 0; k < 16; k++) prog.push_back(g_ins(G_LD, 16 * b + k, 40 * b + k, 0));
    prog.push_back(g_ins(G_HALT, 0, 0, 0));
    run_prog(5000);
    t_word = perf_busy;
    $display("64 words: %0d cycles with block loads, %0d with word loads", t_blk, t_word);
    chk(t_blk <= 4 * (16 + 20 + 4), "block load time");
    chk(t_word >= 64 * 21, "word loads pay a round trip each");
    for (int k = 0; k < 64; k++) chk(lm[k] == {32'hfeed, 32'(40 * (k / 16) + k % 16)}, "word load data");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
