// tb_ls_local_unit: runs local load/store programs against a Local Memory
// model (one-cycle read) and a Register File model (64 registers) kept in the
// test bench.  Checks that LD moves four LM words into four registers and ST
// moves four registers into four LM words, that back-to-back LDs issue one per
// cycle (16 quads in at most 16 + 4 cycles), that an ST right after an LD sees
// the loaded values, and that WAITG / WAITF stall until a token is offered
// while SIGG / SIGF emit one.
module tb_ls_local_unit;
  import blas_pkg::*;
  import gemm_prog_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, running, done, prog_we;
  logic g_avail, g_take, g_sig, f_avail, f_take, f_sig;
  logic [11:0] prog_addr;
  logic [31:0] prog_data;
  logic lm_en, lm_we, rf_we;
  logic [11:0] lm_addr;
  dword_t lm_wdata [BLK], lm_rdata [BLK], rf_wdata [BLK], rf_rdata [BLK];
  logic [5:0] rf_wbase, rf_rbase;
  logic [31:0] perf_ld, perf_st, perf_stall;

  ls_local_unit dut (.*);

  dword_t lm [4096];
  dword_t rf [64];
  always @(posedge clk) begin
    for (int k = 0; k < BLK; k++) begin
      if (lm_en && lm_we) lm[{lm_addr[11:2], 2'(k)}] <= lm_wdata[k];
      if (lm_en && !lm_we) lm_rdata[k] <= lm[{lm_addr[11:2], 2'(k)}];
      if (rf_we) rf[rf_wbase + 6'(k)] <= rf_wdata[k];
    end
  end
  always_comb for (int k = 0; k < BLK; k++) rf_rdata[k] = rf[rf_rbase + 6'(k)];

  int checks = 0, failures = 0, gs = 0, fs = 0;
  always @(posedge clk) if (rst_n) begin gs += int'(g_sig); fs += int'(f_sig); end
  logic [31:0] prog [$];

  task automatic load_prog();
    foreach (prog[k]) begin
      prog_we <= 1'b1; prog_addr <= 12'(k); prog_data <= prog[k]; @(posedge clk);
    end
    prog_we <= 1'b0;
  endtask
  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    start = 0; prog_we = 0; prog_addr = 0; prog_data = 0; g_avail = 0; f_avail = 0;
    for (int i = 0; i < 4096; i++) lm[i] = {32'hbeef, 32'(i)};
    for (int i = 0; i < 64; i++) rf[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // program 1: 16 back-to-back quad loads fill all 64 registers
    prog = {};
    for (int q = 0; q < 16; q++) prog.push_back(l_ins(L_LD, 4 * q, 64 * q));
    prog.push_back(l_ins(L_HALT, 0, 0));
    load_prog();
    start <= 1'b1; @(posedge clk); start <= 1'b0; #1;
    for (int n = 0; n < 100 && !done; n++) @(posedge clk);
    @(negedge clk);
    chk(done && perf_stall == 0 && perf_ld == 16, "16 LDs issue one per cycle");
    for (int r = 0; r < 64; r++) chk(rf[r] == {32'hbeef, 32'(64 * (r / 4) + r % 4)}, $sformatf("LD r%0d", r));

    // program 2: LD then ST at once, token waits
    prog = {};
    prog.push_back(l_ins(L_WAITG, 0, 0));
    prog.push_back(l_ins(L_LD, 8, 2000));
    prog.push_back(l_ins(L_ST, 8, 3000));     // must see the loaded values
    prog.push_back(l_ins(L_SIGF, 0, 0));
    prog.push_back(l_ins(L_WAITF, 0, 0));
    prog.push_back(l_ins(L_ST, 60, 3004));
    prog.push_back(l_ins(L_SIGG, 0, 0));
    prog.push_back(l_ins(L_HALT, 0, 0));
    load_prog();
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    repeat (50) @(posedge clk);
    chk(perf_ld == 0 && !done, "WAITG stalls");
    g_avail <= 1'b1;
    while (!g_take) @(posedge clk);
    @(posedge clk); g_avail <= 1'b0;
    repeat (50) @(posedge clk);
    chk(fs == 1 && !done && perf_st == 1, "SIGF sent, WAITF stalls");
    f_avail <= 1'b1;
    while (!f_take) @(posedge clk);
    @(posedge clk); f_avail <= 1'b0;
    for (int n = 0; n < 50 && !done; n++) @(posedge clk);
    @(negedge clk);
    chk(done && gs == 1, "program 2 finished, SIGG sent");
    for (int k = 0; k < 4; k++) begin
      chk(lm[3000 + k] == {32'hbeef, 32'(2000 + k)}, "ST after LD");
      chk(lm[3004 + k] == rf[60 + k], "ST r60");
    end
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
