// tb_local_memory: random traffic on both ports of the 4096-word Local
// Memory (64-bit port A, 256-bit port B) against a reference array: a read
// returns the value on the next cycle, data written by one port is seen by
// the other, and a same-word write from both ports keeps port B's value.
// Finally every word is written through port A and read back through port B.
module tb_local_memory;
  import blas_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en, a_we, b_en, b_we;
  logic [11:0] a_addr, b_addr;
  dword_t a_wdata, a_rdata;
  dword_t b_wdata [BLK], b_rdata [BLK];
  local_memory dut (.*);
  dword_t ref_m [4096];
  int checks = 0, failures = 0;
  initial begin
    dword_t ea; dword_t eb [BLK]; logic pa, pb;
    a_en = 0; a_we = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0;
    for (int k = 0; k < BLK; k++) b_wdata[k] = 0;
    // fill through port B
    for (int q = 0; q < 1024; q++) begin
      @(negedge clk);
      b_en = 1; b_we = 1; b_addr = 12'(4 * q);
      for (int k = 0; k < BLK; k++) begin b_wdata[k] = {$urandom, $urandom}; ref_m[4*q+k] = b_wdata[k]; end
    end
    @(negedge clk); b_en = 0;
    pa = 0; pb = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      if (pa) begin checks++; if (a_rdata !== ea) begin failures++; $display("FAIL A read"); end end
      if (pb) for (int k = 0; k < BLK; k++) begin
        checks++; if (b_rdata[k] !== eb[k]) begin failures++; $display("FAIL B read"); end
      end
      a_en = 1'($urandom); a_we = 1'($urandom); a_addr = 12'($urandom); a_wdata = {$urandom, $urandom};
      b_en = 1'($urandom); b_we = 1'($urandom); b_addr = 12'($urandom) & 12'hffc;
      if (t % 9 == 0) begin b_addr = a_addr & 12'hffc; end
      for (int k = 0; k < BLK; k++) b_wdata[k] = {$urandom, $urandom};
      pa = a_en && !a_we; pb = b_en && !b_we;
      if (pa) ea = ref_m[a_addr];
      if (pb) for (int k = 0; k < BLK; k++) eb[k] = ref_m[b_addr + 12'(k)];
      if (a_en && a_we) ref_m[a_addr] = a_wdata;
      if (b_en && b_we) for (int k = 0; k < BLK; k++) ref_m[b_addr + 12'(k)] = b_wdata[k];
    end
    @(negedge clk); a_en = 0; b_en = 0;
    for (int w = 0; w < 4096; w++) begin
      @(negedge clk); a_en = 1; a_we = 1; a_addr = 12'(w); a_wdata = {32'(w), ~32'(w)};
    end
    @(negedge clk); a_en = 0;
    for (int q = 0; q < 1024; q++) begin
      b_en = 1; b_we = 0; b_addr = 12'(4 * q);
      @(negedge clk);
      for (int k = 0; k < BLK; k++) begin
        checks++;
        if (b_rdata[k] !== {32'(4*q+k), ~32'(4*q+k)}) begin failures++; $display("FAIL A->B word %0d", 4*q+k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
