// tb_instr_mem: writes a full 4096 x 32-bit instruction memory (16 KB) with a
// pattern, then reads it back in random order and checks that rdata shows the
// word addressed on the previous edge and holds when re_en is low.
module tb_instr_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re_en;
  logic [11:0] waddr, raddr;
  logic [31:0] wdata, rdata;
  instr_mem #(.DEPTH(4096), .W(32)) dut (.*);
  int checks = 0, failures = 0;
  function automatic logic [31:0] pat(int a); return 32'(a) * 32'h9e37_79b9 ^ 32'h5a5a_0f0f; endfunction
  initial begin
    logic [31:0] held;
    we = 0; re_en = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk); we = 1; waddr = 12'(a); wdata = pat(a);
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      int a;
      a = $urandom_range(0, 4095);
      raddr = 12'(a); re_en = 1;
      @(negedge clk);
      checks++;
      if (rdata !== pat(a)) begin failures++; $display("FAIL addr %0d", a); end
      if (t % 10 == 0) begin
        held = rdata; re_en = 0; raddr = 12'($urandom);
        @(negedge clk);
        checks++;
        if (rdata !== held) begin failures++; $display("FAIL hold"); end
      end
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
