// tb_user_logic_ctrl: self-checking test of user_logic_ctrl.
// Two source models send 3-beat events (event builder data tagged 'hE..., pattern data
// tagged 'hF...). The test forces the FIFO full for some cycles inside one event and checks
// the back-pressure cycle and event counters, switches the source in the middle of an
// event and checks that the switch only takes effect after that event's eop, and checks
// that every written beat comes from the selected source in order.
module tb_user_logic_ctrl;
  import pcie40_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sel_pattern = 0, eb_valid, eb_ready, pg_valid, pg_ready, wr_en, fifo_full = 0;
  beat_t eb_beat, pg_beat, wr_beat;
  logic [31:0] bp_cycles, bp_events, events;

  user_logic_ctrl dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // sources: continuous 3-beat events, beat index counts on each accepted beat
  int eb_i = 0, pg_i = 0;
  always_comb begin
    eb_valid = 1; eb_beat = '0;
    eb_beat.data[31:0] = 32'hE000_0000 | 32'(eb_i);
    eb_beat.sop = (eb_i % 3 == 0); eb_beat.eop = (eb_i % 3 == 2);
    pg_valid = 1; pg_beat = '0;
    pg_beat.data[31:0] = 32'hF000_0000 | 32'(pg_i);
    pg_beat.sop = (pg_i % 3 == 0); pg_beat.eop = (pg_i % 3 == 2);
  end
  always @(posedge clk) if (!rst) begin
    if (eb_valid && eb_ready) eb_i <= eb_i + 1;
    if (pg_valid && pg_ready) pg_i <= pg_i + 1;
  end

  // sink model: what was written, in order
  int exp_eb = 0, exp_pg = 0, nwr = 0, src_switch_at = -1;
  logic cur_pg = 0;
  always @(posedge clk) if (!rst && wr_en) begin
    if (wr_beat.data[31:28] == 4'hE) begin
      check(wr_beat.data[27:0] == 28'(exp_eb), "event builder beats in order"); exp_eb++;
      check(!cur_pg || wr_beat.sop, "switch back only at sop");
      cur_pg = 0;
    end else begin
      check(wr_beat.data[27:0] == 28'(exp_pg), "pattern beats in order"); exp_pg++;
      if (!cur_pg) begin
        check(wr_beat.sop, "switch to pattern only at sop");
        check(exp_eb % 3 == 0, "event builder event completed before switch");
      end
      cur_pg = 1;
    end
    nwr++;
  end

  initial begin
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    // one event in, stall 5 cycles in the middle of event 1
    repeat (4) @(negedge clk);
    fifo_full = 1; repeat (5) @(negedge clk); fifo_full = 0;
    repeat (6) @(negedge clk);
    check(bp_cycles == 5, $sformatf("bp_cycles %0d", bp_cycles));
    check(bp_events == 1, $sformatf("bp_events %0d", bp_events));
    // switch in mid event
    wait (eb_i % 3 == 1); @(negedge clk); sel_pattern = 1;
    repeat (20) @(negedge clk);
    check(exp_pg > 0, "pattern source used");
    sel_pattern = 0;
    repeat (20) @(negedge clk);
    check(events == 32'((exp_eb + exp_pg) / 3), $sformatf("events %0d", events));
    check(nwr == exp_eb + exp_pg, "no beat lost");
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
