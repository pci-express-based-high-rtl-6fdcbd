// tb_pattern_gen: self-checking test of pattern_gen.
// Period 20 cycles, 4-beat events, always-ready sink: every beat's content is compared with
// the pattern computed here, events must be 20 cycles apart and none back-pressured.
// Then the sink stalls for a while: triggers queue up (back-pressure counted), the queue
// overflows (lost triggers counted), and every trigger is accounted for as sent or lost.
module tb_pattern_gen;
  import pcie40_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable = 0, ext_trig = 0, o_valid, o_ready = 1;
  logic [31:0] period = 20;
  logic [15:0] size_beats = 4;
  beat_t o_beat;
  logic [31:0] trig_count, bp_count, lost_count, ev_count;

  pattern_gen #(.PEND_MAX(3)) dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  int ev = 0, beat = 0, cyc = 0, last_sop = -1, gaps_ok = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst && o_valid && o_ready) begin
      logic [DW-1:0] e;
      e = '0;
      if (beat == 0) begin
        e[31:0] = PG_HDR_MAGIC; e[63:32] = ev; e[95:64] = 32'(size_beats);
        if (last_sop >= 0 && ev < 5) check(cyc - last_sop == 20, $sformatf("event spacing %0d", cyc - last_sop));
        last_sop = cyc;
      end else
        for (int k = 0; k < 8; k++) e[k*32 +: 32] = {16'(ev), 16'(beat*8 + k)};
      check(o_beat.data == e && o_beat.sop == (beat == 0) && o_beat.eop == (beat == 3),
            $sformatf("event %0d beat %0d", ev, beat));
      if (beat == 3) begin beat = 0; ev++; end else beat++;
    end
  end

  initial begin
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    enable = 1;
    wait (ev == 6);
    check(bp_count == 0 && lost_count == 0, "no back-pressure at low rate");
    // stall the sink for 200 cycles: 10 triggers, 1 in progress + 3 queued, rest lost
    @(negedge clk); o_ready = 0;
    repeat (200) @(negedge clk);
    check(bp_count > 0, $sformatf("back-pressured triggers %0d", bp_count));
    check(lost_count > 0, $sformatf("lost triggers %0d", lost_count));
    o_ready = 1; enable = 0;
    repeat (100) @(negedge clk);
    check(trig_count == ev_count + lost_count, $sformatf("trig %0d = sent %0d + lost %0d", trig_count, ev_count, lost_count));
    check(ev_count == 32'(ev), "event counter matches events seen");
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
