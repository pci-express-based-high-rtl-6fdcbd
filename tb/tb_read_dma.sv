// tb_read_dma: self-checking test of read_dma.
// A host-memory model answers each read request with the table entry at that address
// after a random delay. Five entries are fetched from table address 0x1000; the test
// checks the request addresses (base + 8*i), that the entries come out in order, that
// no request is issued while `sp_room` is low, and that `busy` ends with the last entry.
module tb_read_dma;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, rq_valid, rq_ready = 1, cpl_valid = 0, sp_valid, sp_room = 1, busy;
  logic [63:0] tbl_addr = 64'h1000, rq_addr, cpl_data = 0, sp_addr;
  logic [31:0] count = 5;

  read_dma dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] entry(logic [63:0] a);
    return 64'h0000_0040_0000_0000 + (a - 64'h1000) * 64'h2_0000; // super page addresses
  endfunction

  int nreq = 0, nsp = 0;
  logic [63:0] reqq[$];
  // host model: take requests at the clock edge, answer after a random delay
  always @(posedge clk) if (!rst && rq_valid && rq_ready) begin
    check(rq_addr == 64'h1000 + 64'(nreq) * 8, $sformatf("request %0d address %h", nreq, rq_addr));
    check(sp_room, "request only with room");
    nreq++;
    reqq.push_back(rq_addr);
  end
  initial begin
    forever begin
      @(negedge clk);
      if (reqq.size() > 0) begin
        logic [63:0] a;
        a = reqq.pop_front();
        repeat ($urandom % 5) @(negedge clk);
        cpl_valid = 1; cpl_data = entry(a);
        @(negedge clk); cpl_valid = 0;
      end
    end
  end

  always @(posedge clk) if (!rst && sp_valid) begin
    check(sp_addr == entry(64'h1000 + 64'(nsp) * 8), $sformatf("entry %0d", nsp));
    nsp++;
  end

  initial begin
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    start = 1; @(negedge clk); start = 0;
    check(busy, "busy after start");
    wait (nsp == 2);
    @(negedge clk); sp_room = 0;
    repeat (30) @(negedge clk);
    check(nreq <= 3, $sformatf("requests held while no room: %0d", nreq));
    sp_room = 1;
    wait (nsp == 5);
    repeat (3) @(negedge clk);
    check(!busy, "idle after last entry");
    check(nreq == 5, "five requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
