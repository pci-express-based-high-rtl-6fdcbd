// tb_slc_fifo: self-checking test of slc_fifo.
// Software side: pushes a 6-word packet (KLM-sized) and a 100-word packet (ARICH-sized)
// and starts each with the send bit; the link side accepts words with random stalls and
// the test checks that exactly the pushed words come out in order and that nothing is
// sent before the send bit. Link side: returns four words, which software reads back
// through the RX window; reading an empty RX FIFO returns 0. The clear bit empties both.
module tb_slc_fifo;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic acc_we = 0, acc_re = 0, tx_valid, tx_ready = 0, rx_valid = 0;
  logic [1:0] acc_addr = 0;
  logic [31:0] acc_wdata = 0, acc_rdata, tx_data, rx_data = 0;

  slc_fifo dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(logic [1:0] a, logic [31:0] d);
    @(negedge clk); acc_we = 1; acc_addr = a; acc_wdata = d;
    @(negedge clk); acc_we = 0;
  endtask

  task automatic rd(logic [1:0] a, output logic [31:0] d);
    @(negedge clk); acc_addr = a; #1 d = acc_rdata; acc_re = 1;
    @(negedge clk); acc_re = 0;
  endtask

  int nout = 0;
  logic [31:0] expq[$];
  always @(posedge clk) if (!rst && tx_valid && tx_ready) begin
    if (expq.size() == 0) check(0, "unexpected word");
    else check(tx_data == expq.pop_front(), $sformatf("tx word %0d", nout));
    nout++;
  end
  always @(negedge clk) tx_ready = ($urandom % 4) != 0;

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    for (int i = 0; i < 6; i++) begin wr(0, 32'h1000 + i); expq.push_back(32'h1000 + i); end
    repeat (10) @(negedge clk);
    check(nout == 0, "nothing sent before the send bit");
    rd(0, d); check(d == 6, $sformatf("TX level 6, got %0d", d));
    wr(3, 1);
    repeat (30) @(negedge clk);
    check(nout == 6 && expq.size() == 0, "6-word packet sent");
    rd(3, d); check(d[0] == 0, "send finished");
    for (int i = 0; i < 100; i++) begin wr(0, 32'hA000 + i); expq.push_back(32'hA000 + i); end
    wr(3, 1);
    repeat (300) @(negedge clk);
    check(nout == 106 && expq.size() == 0, "100-word packet sent");
    // receive
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); rx_valid = 1; rx_data = 32'hBEEF_0000 + i;
    end
    @(negedge clk); rx_valid = 0;
    rd(2, d); check(d[31:16] == 4, $sformatf("RX level 4, got %0d", d[31:16]));
    for (int i = 0; i < 4; i++) begin rd(1, d); check(d == 32'hBEEF_0000 + i, $sformatf("rx word %0d", i)); end
    rd(1, d); check(d == 0, "empty RX reads 0");
    // clear
    wr(0, 1); wr(0, 2);
    wr(3, 2);
    rd(2, d); check(d == 0, "clear empties both FIFOs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
