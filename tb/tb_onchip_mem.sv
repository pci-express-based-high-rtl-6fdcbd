// tb_onchip_mem: self-checking test of onchip_mem (8 pages of 8 kB).
// Writes a distinct word to every address of the first and last page and a sample of the
// others, reads them back, and checks the one-cycle read latency and that `rdata` holds
// its value while `re` is low.
module tb_onchip_mem;
  import pcie40_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 0, re = 0;
  logic [10:0] waddr = 0, raddr = 0;
  logic [DW-1:0] wdata = 0, rdata;

  onchip_mem dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [DW-1:0] pat(int a);
    return {8{32'(a) ^ 32'h5A5A_0000}};
  endfunction

  int addrs[$];
  initial begin
    for (int a = 0; a < 256; a++) addrs.push_back(a);
    for (int a = 256; a < 1792; a += 37) addrs.push_back(a);
    for (int a = 1792; a < 2048; a++) addrs.push_back(a);
    foreach (addrs[i]) begin
      @(negedge clk); we = 1; waddr = 11'(addrs[i]); wdata = pat(addrs[i]);
    end
    @(negedge clk); we = 0;
    foreach (addrs[i]) begin
      @(negedge clk); re = 1; raddr = 11'(addrs[i]);
      @(negedge clk); re = 0;
      check(rdata == pat(addrs[i]), $sformatf("addr %0d", addrs[i]));
      raddr = 11'(addrs[i] ^ 1);
      @(negedge clk);
      check(rdata == pat(addrs[i]), "rdata holds while re is low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
