// tb_reg_bank: self-checking test of reg_bank with four links.
// Writes and reads back the control, mask, pattern and descriptor-table registers; checks
// the ID word, the control outputs, the self-clearing pulses (soft reset, clear sticky,
// table start), a status word, the per-link fragment and CRC error counters and the
// per-link fragment and word counters after pulses on their inputs, and that slow-control window accesses reach the right link
// (one-hot write/read strobes, address, data) and return that link's read data.
module tb_reg_bank;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 4;

  logic we = 0, re = 0, rvalid;
  logic [11:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  logic soft_rst, sel_pattern, pg_enable, sw_busy, clr_sticky, tbl_start;
  logic [N-1:0] link_mask, frag_err = 0, crc_err = 0, frag_in = 0, word_in = 0, slc_we, slc_re;
  logic [31:0] pg_period, tbl_count;
  logic [15:0] pg_size;
  logic [63:0] tbl_addr;
  logic [31:0] status [4];
  logic [1:0] slc_addr;
  logic [31:0] slc_wdata;
  logic [31:0] slc_rdata [N];

  reg_bank #(.NLINKS(N), .NSTAT(4)) dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d;
    @(negedge clk); we = 0;
  endtask
  task automatic rd(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); re = 1; addr = a;
    @(negedge clk); re = 0;
    check(rvalid, "rvalid one cycle after re");
    d = rdata;
  endtask

  initial begin
    logic [31:0] d;
    for (int i = 0; i < 4; i++) status[i] = 32'h5000 + i;
    for (int i = 0; i < N; i++) slc_rdata[i] = 32'hC0DE_0000 + i;
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    rd(12'h000, d); check(d == {16'hB240, 16'(N)}, "ID");
    wr(12'h002, 32'h0000_000B); rd(12'h002, d); check(d == 32'hB && link_mask == 4'hB, "link mask");
    wr(12'h004, 1234); wr(12'h005, 256);
    check(pg_period == 1234 && pg_size == 256, "pattern registers");
    wr(12'h008, 32'h1234_5678); wr(12'h009, 32'h9); wr(12'h00A, 7);
    check(tbl_addr == 64'h9_1234_5678 && tbl_count == 7, "table registers");
    @(negedge clk); we = 1; addr = 12'h00B; wdata = 1; @(negedge clk); we = 0;
    check(tbl_start, "start pulse"); @(negedge clk); check(!tbl_start, "start self-clears");
    @(negedge clk); we = 1; addr = 12'h001; wdata = 32'h1F; @(negedge clk); we = 0;
    check(soft_rst && clr_sticky && sel_pattern && pg_enable && sw_busy, "control bits");
    @(negedge clk); check(!soft_rst && !clr_sticky && sel_pattern, "pulses self-clear, levels stay");
    rd(12'h022, d); check(d == 32'h5002, "status word 2");
    frag_err = 4'b0010; crc_err = 4'b1000; @(negedge clk); @(negedge clk); frag_err = 0; crc_err = 0;
    rd(12'h101, d); check(d == 2, $sformatf("frag error counter link 1 = %0d", d));
    rd(12'h100, d); check(d == 0, "frag error counter link 0");
    rd(12'h143, d); check(d == 2, "CRC error counter link 3");
    // link 2: 5 words, 3 fragments; link 0: 7 words, no fragment
    for (int i = 0; i < 7; i++) begin
      @(negedge clk); word_in = (i < 5) ? 4'b0101 : 4'b0001; frag_in = (i < 3) ? 4'b0100 : 4'b0000;
    end
    @(negedge clk); word_in = 0; frag_in = 0;
    rd(12'h182, d); check(d == 3, $sformatf("fragment counter link 2 = %0d", d));
    rd(12'h180, d); check(d == 0, "fragment counter link 0");
    rd(12'h1C2, d); check(d == 5, $sformatf("word counter link 2 = %0d", d));
    rd(12'h1C0, d); check(d == 7, $sformatf("word counter link 0 = %0d", d));
    rd(12'h1C1, d); check(d == 0, "word counter link 1");
    // slow-control window of link 2, sub-address 3
    @(negedge clk); we = 1; addr = 12'h200 + 12'(2*4 + 3); wdata = 32'h77;
    #1 check(slc_we == 4'b0100 && slc_addr == 2'd3 && slc_wdata == 32'h77, "slow-control write strobe to link 2");
    @(negedge clk); we = 0;
    rd(12'h200 + 12'(3*4 + 1), d); check(d == 32'hC0DE_0003, "slow-control read of link 3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
