// tb_link_buffer: self-checking test of link_buffer.
// Sends fragments of 10, 8 and 0 payload words, a fragment with a bad header, one with
// a wrong trailer count and one larger than the data FIFO (overflow), then drains the
// buffer and compares status entries and packed 256-bit beats with values computed here.
// Also checks that busy rises when the FIFO fills. DEPTH is reduced to 8 beats.
module tb_link_buffer;
  import pcie40_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_sof = 0, in_eof = 0;
  logic [31:0] in_data = 0;
  logic st_valid, st_pop = 0, d_valid, d_pop = 0, busy, ovf_pulse, frag_done, frag_err;
  frag_status_t st;
  logic [DW-1:0] d_data;
  int ovf_seen = 0, busy_seen = 0, err_seen = 0;

  link_buffer #(.DEPTH(8), .NFRAG(8), .BUSY_MARGIN(2)) dut (.*);

  always @(posedge clk) begin
    if (ovf_pulse && !rst) ovf_seen++;
    if (busy && !rst) busy_seen++;
    if (frag_err && !rst) err_seen++;
  end

  function automatic logic [31:0] pw(int tag, int i);
    return 32'((tag << 16) | i);
  endfunction

  task automatic word(logic [31:0] d, logic s, logic e);
    @(negedge clk);
    in_valid = 1; in_data = d; in_sof = s; in_eof = e;
  endtask

  task automatic send(int tag, int n, bit bad_hdr, int cnt_delta);
    word(bad_hdr ? {8'h11, 24'(tag)} : {FRAG_HDR_MAGIC, 24'(tag)}, 1, 0);
    for (int i = 0; i < n; i++) word(pw(tag, i), 0, 0);
    word({FRAG_TRL_MAGIC, 8'h00, 16'(n + cnt_delta)}, 0, 1);
    @(negedge clk); in_valid = 0; in_sof = 0; in_eof = 0;
    repeat (3) @(posedge clk);
  endtask

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // read one fragment: status then nbeats data beats; compare with tag/n
  task automatic drain(int tag, int n, int exp_beats, bit e_hdr, bit e_len, bit e_ovf);
    frag_status_t s;
    wait (st_valid); @(negedge clk);
    s = st;
    check(s.tag == 24'(tag), $sformatf("tag %0d got %0d", tag, s.tag));
    check(s.nwords == 16'(n), $sformatf("nwords %0d got %0d", n, s.nwords));
    check(s.nbeats == 16'(exp_beats), $sformatf("nbeats %0d got %0d", exp_beats, s.nbeats));
    check(s.hdr_err == e_hdr && s.len_err == e_len && s.ovf == e_ovf && !s.trl_err,
          $sformatf("flags tag %0d: h%0b l%0b o%0b t%0b", tag, s.hdr_err, s.len_err, s.ovf, s.trl_err));
    for (int b = 0; b < int'(s.nbeats); b++) begin
      logic [DW-1:0] exp;
      exp = '0;
      for (int k = 0; k < WPB; k++) if (b*WPB + k < n) exp[k*LW +: LW] = pw(tag, b*WPB + k);
      wait (d_valid); @(negedge clk);
      check(d_data == exp, $sformatf("beat %0d of tag %0d", b, tag));
      d_pop = 1; @(negedge clk); d_pop = 0;
    end
    st_pop = 1; @(negedge clk); st_pop = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst <= 0; @(posedge clk);
    send(1, 10, 0, 0);
    send(2, 8, 0, 0);
    send(3, 0, 0, 0);
    send(4, 3, 1, 0);
    send(5, 5, 0, 1);
    drain(1, 10, 2, 0, 0, 0);
    drain(2, 8, 1, 0, 0, 0);
    drain(3, 0, 0, 0, 0, 0);
    drain(4, 3, 1, 1, 0, 0);
    drain(5, 5, 1, 0, 1, 0);
    // overflow: 80 words = 10 beats into an 8-beat FIFO
    send(6, 80, 0, 0);
    check(busy_seen > 0, "busy raised when nearly full");
    check(ovf_seen > 0, "overflow pulse seen");
    drain(6, 80, 9, 0, 0, 1);
    check(err_seen == 3, $sformatf("error pulses 3 got %0d", err_seen));
    repeat (3) @(posedge clk);
    check(!st_valid && !d_valid, "empty at end");
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
