// pattern_gen: data source of the throughput test, standing in for the front-end links.
//
// A pulse trigger fires every `period` cycles while `enable` is high (or on `ext_trig`).
// Each trigger requests one event of `size_beats` 256-bit beats (8 kB = 256 beats):
//   beat 0 : [31:0] PG_HDR_MAGIC, [63:32] event number, [95:64] size in beats
//   beat b : 32-bit word k = {event number[15:0], (8*b + k)[15:0]}
// with sop on beat 0 and eop on the last beat. Events are sent while `o_ready` is high.
// Triggers that arrive while an event is still being sent or waiting are queued (up to
// PEND_MAX) and counted as back-pressured (`bp_count`); a trigger that finds the queue
// full is lost (`lost_count`). These counters give the back-pressure fraction and event
// loss that the throughput measurement reports.
// Following the published readout: a pattern generator with pulse trigger replaces the
// front-end data for the throughput test. Data pattern, header layout and the queue are
// this design's choice.
module pattern_gen
  import pcie40_pkg::*;
#(
  parameter int unsigned PEND_MAX = 15
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        enable,
  input  logic [31:0] period,      // cycles between pulse triggers (>= 1)
  input  logic [15:0] size_beats,  // event size in 256-bit beats (>= 1)
  input  logic        ext_trig,
  output logic        o_valid,
  output beat_t       o_beat,
  input  logic        o_ready,
  output logic [31:0] trig_count,
  output logic [31:0] bp_count,
  output logic [31:0] lost_count,
  output logic [31:0] ev_count
);
  logic [31:0] tcnt;
  logic        trig;
  logic [$clog2(PEND_MAX+1)-1:0] pend;
  logic        active;
  logic [15:0] beat;
  logic [15:0] size_l;
  logic [31:0] evnum;
  logic        fire, last;

  assign trig = ext_trig || (enable && tcnt == 32'd0);
  assign fire = o_valid && o_ready;
  assign last = (beat == size_l - 16'd1);

  always_comb begin
    o_valid = active;
    o_beat  = '0;
    o_beat.sop = (beat == 16'd0);
    o_beat.eop = last;
    if (beat == 16'd0) begin
      o_beat.data[31:0]  = PG_HDR_MAGIC;
      o_beat.data[63:32] = evnum;
      o_beat.data[95:64] = 32'(size_l);
    end else begin
      for (int k = 0; k < WPB; k++)
        o_beat.data[k*LW +: LW] = {evnum[15:0], 16'(beat*16'(WPB) + 16'(k))};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      tcnt       <= '0;
      pend       <= '0;
      active     <= 1'b0;
      beat       <= '0;
      size_l     <= 16'd1;
      evnum      <= '0;
      trig_count <= '0;
      bp_count   <= '0;
      lost_count <= '0;
      ev_count   <= '0;
    end else begin
      if (enable) tcnt <= (tcnt >= period - 32'd1) ? 32'd0 : tcnt + 32'd1;
      else        tcnt <= 32'd1;   // first trigger one period after enable
      // event in progress
      if (fire) begin
        if (last) begin
          active   <= 1'b0;
          beat     <= '0;
          evnum    <= evnum + 1'b1;
          ev_count <= ev_count + 1'b1;
        end else begin
          beat <= beat + 1'b1;
        end
      end
      // start the next queued event
      begin
        logic idle_next;
        logic [$clog2(PEND_MAX+1)-1:0] p;
        idle_next = !active || (fire && last);
        p = pend;
        if (trig) begin
          trig_count <= trig_count + 1'b1;
          if (active || pend != 0) bp_count <= bp_count + 1'b1;
          if (p == ($clog2(PEND_MAX+1))'(PEND_MAX)) lost_count <= lost_count + 1'b1;
          else p = p + 1'b1;
        end
        if (idle_next && p != 0) begin
          p = p - 1'b1;
          active <= 1'b1;
          beat   <= '0;
          size_l <= (size_beats == 16'd0) ? 16'd1 : size_beats;
        end
        pend <= p;
      end
    end
  end
endmodule
