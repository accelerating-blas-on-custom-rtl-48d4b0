// tb_fps: runs small programs on the Floating Point Sequencer.  The test
// bench plays the Load-Store CFU: it fills registers through the 256-bit
// port, answers the token channel and reads results back through the store
// port.  Checked against values computed here with reals:
//  - ADD, SUB, MUL, DIV, SQRT and DOT1..DOT4 (with +/- and stride-4 operands);
//  - a chain of dependent instructions (read-after-write stalls);
//  - a REP loop that accumulates a DOT4 result eight times;
//  - WAIT stalls until the test bench sends a token, SIG tokens come out;
//  - throughput: 32 independent DOT4s issue one per cycle, so the program
//    ends within 32 + 15 pipeline cycles plus a few cycles of fetch and halt.
module tb_fps;
  import blas_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, running, done, prog_we, tok_in_avail, tok_in_take, tok_out_sig;
  logic [11:0] prog_addr;
  logic [31:0] prog_data;
  logic ls_we;
  logic [5:0] ls_wbase, ls_rbase;
  dword_t ls_wdata [BLK], ls_rdata [BLK];
  logic [31:0] perf_cycles, perf_flops, perf_stall_data, perf_stall_wait, perf_loops;

  fps dut (.*);

  int checks = 0, failures = 0;
  int sig_count = 0;
  always @(posedge clk) if (rst_n && tok_out_sig) sig_count++;

  // --- instruction builders
  function automatic logic [31:0] f3(fps_op_e op, int rd, int ra, int rb);
    fps_instr_t i;
    i = '0; i.op = op; i.rd = 6'(rd); i.ra = 6'(ra); i.rb = 6'(rb);
    return i;
  endfunction
  function automatic logic [31:0] fdot(int n, int rd, int ra, int rb, bit s0, bit s1, bit as4, bit bs4);
    fps_instr_t i;
    i = '0; i.op = F_DOT; i.rd = 6'(rd); i.ra = 6'(ra); i.rb = 6'(rb);
    i.dotn = 2'(n - 1); i.sub0 = s0; i.sub1 = s1; i.astr4 = as4; i.bstr4 = bs4;
    return i;
  endfunction
  function automatic logic [31:0] frep(int cnt, int len);
    return {F_REP, 12'(cnt), 12'(len), 3'b0};
  endfunction
  function automatic logic [31:0] fsig(bit drain);
    return {F_SIG, drain, 26'b0};
  endfunction

  logic [31:0] prog [$];
  real R [64];

  task automatic load_prog();
    foreach (prog[k]) begin
      prog_we <= 1'b1; prog_addr <= 12'(k); prog_data <= prog[k];
      @(posedge clk);
    end
    prog_we <= 1'b0;
  endtask

  task automatic set_regs();   // write R[] into the register file, 4 per cycle
    for (int r = 0; r < 64; r += 4) begin
      ls_we <= 1'b1; ls_wbase <= 6'(r);
      for (int i = 0; i < 4; i++) ls_wdata[i] <= $realtobits(R[r + i]);
      @(posedge clk);
    end
    ls_we <= 1'b0;
  endtask

  task automatic check_reg(int r, real exp, string what);
    dword_t got;
    ls_rbase = 6'(r & ~3);
    #1;
    got = ls_rdata[r & 3];
    checks++;
    if (got !== $realtobits(exp)) begin
      failures++;
      $display("FAIL %s: r%0d = %h expected %h (%f)", what, r, got, $realtobits(exp), exp);
    end
  endtask

  task automatic run_to_done(int limit);
    int n;
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    #1;
    n = 0;
    while (!done && n < limit) begin @(posedge clk); n++; end
    @(negedge clk);
  endtask

  real acc, e;
  int  wait_start;

  initial begin
    start = 0; prog_we = 0; prog_addr = 0; prog_data = 0; tok_in_avail = 0;
    ls_we = 0; ls_wbase = 0; ls_rbase = 0;
    for (int i = 0; i < 4; i++) ls_wdata[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ---------- program 1: arithmetic, dependencies, loop, tokens
    for (int r = 0; r < 64; r++) R[r] = real'(r + 1) * 0.37 - 5.0;
    set_regs();
    prog = {};
    prog.push_back(f3(F_ADD, 40, 0, 1));
    prog.push_back(f3(F_SUB, 41, 2, 3));
    prog.push_back(f3(F_MUL, 42, 40, 41));     // RAW on r40, r41
    prog.push_back(f3(F_DIV, 43, 42, 5));      // RAW on r42
    prog.push_back(f3(F_SQRT, 44, 60, 0));
    prog.push_back(fdot(1, 45, 8, 12, 0, 0, 0, 0));
    prog.push_back(fdot(2, 46, 8, 12, 1, 0, 0, 0));
    prog.push_back(fdot(3, 47, 8, 12, 0, 0, 0, 1));
    prog.push_back(fdot(4, 48, 16, 20, 0, 1, 1, 1));
    prog.push_back(f3(F_WAIT, 0, 0, 0));
    prog.push_back(fsig(0));
    prog.push_back(f3(F_ADD, 49, 30, 30));     // r49 = 2*r30, then loop adds
    prog.push_back(frep(8, 2));
    prog.push_back(fdot(4, 50, 24, 28, 0, 0, 0, 0));
    prog.push_back(f3(F_ADD, 49, 49, 50));
    prog.push_back(fsig(1));
    prog.push_back(f3(F_HALT, 0, 0, 0));
    load_prog();
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    // the sequencer must stall on WAIT until a token is offered
    repeat (200) @(posedge clk);
    checks++;
    if (done || perf_stall_wait == 0) begin failures++; $display("FAIL WAIT did not stall"); end
    tok_in_avail <= 1'b1;
    while (!tok_in_take) @(posedge clk);
    @(posedge clk);
    tok_in_avail <= 1'b0;
    for (int n = 0; n < 2000 && !done; n++) @(posedge clk);
    @(negedge clk);
    checks++;
    if (!done) begin failures++; $display("FAIL program 1 did not finish"); end
    check_reg(40, R[0] + R[1], "ADD");
    check_reg(41, R[2] - R[3], "SUB");
    check_reg(42, (R[0] + R[1]) * (R[2] - R[3]), "MUL");
    check_reg(43, ((R[0] + R[1]) * (R[2] - R[3])) / R[5], "DIV");
    check_reg(44, $sqrt(R[60]), "SQRT");
    check_reg(45, R[8] * R[12], "DOT1");
    check_reg(46, R[8] * R[12] - R[9] * R[13], "DOT2 sub");
    check_reg(47, (R[8] * R[12] + R[9] * R[16]) + R[10] * R[20], "DOT3 stride");
    check_reg(48, (R[16] * R[20] + R[20] * R[24]) + (R[24] * R[28] - R[28] * R[32]), "DOT4 stride sub");
    e = (R[24] * R[28] + R[25] * R[29]) + (R[26] * R[30] + R[27] * R[31]);
    acc = R[30] + R[30];
    for (int k = 0; k < 8; k++) acc = acc + e;
    check_reg(49, acc, "REP loop accumulate");
    checks++;
    if (sig_count != 2 || perf_loops != 7) begin
      failures++; $display("FAIL sig_count=%0d loops=%0d", sig_count, perf_loops);
    end
    checks++;
    if (perf_flops != 1 + 1 + 1 + 1 + 1 + 1 + 3 + 5 + 7 + 1 + 8 * (7 + 1)) begin
      failures++; $display("FAIL flop count %0d", perf_flops);
    end
    checks++;
    if (perf_stall_data == 0) begin failures++; $display("FAIL no RAW stall seen"); end

    // ---------- program 2: DOT4 throughput, one per cycle
    prog = {};
    for (int k = 0; k < 32; k++) prog.push_back(fdot(4, 32 + k, 0, 16, 0, 0, 0, 1));
    prog.push_back(f3(F_HALT, 0, 0, 0));
    load_prog();
    for (int r = 0; r < 64; r++) R[r] = real'((r * 7) % 13) - 6.5;
    set_regs();
    run_to_done(500);
    checks++;
    if (!done || perf_cycles > 32 + 15 + 4 || perf_cycles < 32 + 15) begin
      failures++; $display("FAIL DOT4 throughput: %0d cycles", perf_cycles);
    end
    e = (R[0] * R[16] + R[1] * R[20]) + (R[2] * R[24] + R[3] * R[28]);
    check_reg(63, e, "DOT4 stream");
    $display("DOT4 stream of 32: %0d cycles, %0d flops", perf_cycles, perf_flops);

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
