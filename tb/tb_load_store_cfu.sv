// tb_load_store_cfu: the Load-Store CFU alone, with the external memory model
// and a Register File model standing in for the sequencer.  The global stream
// block-loads two 4x4 blocks into the Local Memory and signals the local
// stream, which loads them into registers r0..r31, signals the "sequencer",
// waits for its token, stores r32..r47 (set by the test bench meanwhile) into
// the Local Memory and signals back; the global stream then block-stores that
// block to external memory.  Checks the register contents, the data that
// comes back out, the token hand-overs and done.
module tb_load_store_cfu;
  import blas_pkg::*;
  import gemm_prog_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, prog_we, prog_sel, fps_sig, fps_take, fps_avail;
  logic [11:0] prog_addr;
  logic [63:0] prog_data;
  logic rf_we;
  logic [5:0] rf_wbase, rf_rbase;
  dword_t rf_wdata [BLK], rf_rdata [BLK];
  logic gm_req_valid, gm_req_ready, gm_req_we, gm_resp_valid;
  logic [GM_AW-1:0] gm_req_addr;
  dword_t gm_req_wdata, gm_resp_data;
  logic [31:0] perf_gm_words, perf_gm_blocks, perf_rf_loads, perf_rf_stores, perf_local_stall;

  load_store_cfu dut (.*);
  gm_model #(.DEPTH(4096), .LAT(20), .STALL_PCT(25)) u_gm (
    .clk, .rst_n, .req_valid(gm_req_valid), .req_ready(gm_req_ready),
    .req_we(gm_req_we), .req_addr(gm_req_addr), .req_wdata(gm_req_wdata),
    .resp_valid(gm_resp_valid), .resp_data(gm_resp_data)
  );

  dword_t rf [64];
  always @(posedge clk) if (rf_we) for (int k = 0; k < BLK; k++) rf[rf_wbase + 6'(k)] <= rf_wdata[k];
  always_comb for (int k = 0; k < BLK; k++) rf_rdata[k] = rf[rf_rbase + 6'(k)];

  int checks = 0, failures = 0;
  logic [63:0] gp [$];
  logic [31:0] lp [$];

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    start = 0; prog_we = 0; prog_sel = 0; prog_addr = 0; prog_data = 0; fps_sig = 0; fps_take = 0;
    for (int i = 0; i < 4096; i++) u_gm.mem[i] = {32'hc0de, 32'(i)};
    for (int i = 0; i < 64; i++) rf[i] = '0;
    gp = {};
    gp.push_back(g_ins(G_LDB, 0, 100, 12));
    gp.push_back(g_ins(G_LDB, 16, 500, 12));
    gp.push_back(g_ins(G_SIG, 0, 0, 0));
    gp.push_back(g_ins(G_WAIT, 0, 0, 0));
    gp.push_back(g_ins(G_STB, 32, 3000, 4));
    gp.push_back(g_ins(G_HALT, 0, 0, 0));
    lp = {};
    lp.push_back(l_ins(L_WAITG, 0, 0));
    for (int q = 0; q < 8; q++) lp.push_back(l_ins(L_LD, 4 * q, 4 * q));
    lp.push_back(l_ins(L_SIGF, 0, 0));
    lp.push_back(l_ins(L_WAITF, 0, 0));
    for (int q = 0; q < 4; q++) lp.push_back(l_ins(L_ST, 32 + 4 * q, 32 + 4 * q));
    lp.push_back(l_ins(L_SIGG, 0, 0));
    lp.push_back(l_ins(L_HALT, 0, 0));
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    foreach (gp[k]) begin prog_we <= 1; prog_sel <= 0; prog_addr <= 12'(k); prog_data <= gp[k]; @(posedge clk); end
    foreach (lp[k]) begin prog_we <= 1; prog_sel <= 1; prog_addr <= 12'(k); prog_data <= {32'h0, lp[k]}; @(posedge clk); end
    prog_we <= 0;
    start <= 1; @(posedge clk); start <= 0;
    // act as the sequencer: wait for the token, check the registers, answer
    for (int n = 0; n < 2000 && !fps_avail; n++) @(posedge clk);
    chk(fps_avail, "token to the sequencer");
    @(negedge clk);
    for (int r = 0; r < 16; r++) begin
      chk(rf[r] == {32'hc0de, 32'(100 + (r / 4) * 12 + r % 4)}, $sformatf("r%0d from block 0", r));
      chk(rf[16 + r] == {32'hc0de, 32'(500 + (r / 4) * 12 + r % 4)}, $sformatf("r%0d from block 1", 16 + r));
    end
    for (int r = 32; r < 48; r++) rf[r] = {32'h5555, 32'(r)};
    fps_take = 1; @(negedge clk); fps_take = 0;
    fps_sig = 1; @(negedge clk); fps_sig = 0;
    for (int n = 0; n < 2000 && !done; n++) @(posedge clk);
    @(negedge clk);
    chk(done, "both streams halted");
    for (int k = 0; k < 16; k++)
      chk(u_gm.mem[3000 + (k / 4) * 4 + k % 4] == {32'h5555, 32'(32 + k)}, $sformatf("stored word %0d", k));
    chk(perf_gm_blocks == 3 && perf_rf_loads == 8 && perf_rf_stores == 4, "counters");
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
