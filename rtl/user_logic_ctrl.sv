// user_logic_ctrl: writes built events into the DMA FIFO and monitors back-pressure.
//
// Two sources can feed the DMA FIFO: the event builder (normal readout) and the pattern
// generator (throughput test); `sel_pattern` picks one, as the multiplexer in front of
// the data-flow controller does. The selection is taken only between events, so an event
// is never cut. A beat is passed when the selected source is valid and the FIFO is not
// full; the source's `ready` is the FIFO's not-full, so a full FIFO stalls the source,
// which fills the link buffers and finally raises busy to the trigger system.
// `bp_cycles` counts cycles in which the selected source had a beat but the FIFO was full;
// `bp_events` counts events that met at least one such cycle; `events` counts events
// written. Back-pressure monitoring is described with the readout; the counter set is
// this design's choice. Zero added latency (combinational pass-through of the beat).
module user_logic_ctrl
  import pcie40_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        sel_pattern,
  // event builder
  input  logic        eb_valid,
  input  beat_t       eb_beat,
  output logic        eb_ready,
  // pattern generator
  input  logic        pg_valid,
  input  beat_t       pg_beat,
  output logic        pg_ready,
  // DMA FIFO write side
  output logic        wr_en,
  output beat_t       wr_beat,
  input  logic        fifo_full,
  // monitoring
  output logic [31:0] bp_cycles,
  output logic [31:0] bp_events,
  output logic [31:0] events
);
  logic sel;        // source of the event in progress
  logic in_event;   // between sop and eop of the current source
  logic ev_bp;      // current event met back-pressure
  logic sel_now, s_valid, stall;
  beat_t s_beat;

  // between events the requested source is used at once; inside an event it is held
  assign sel_now  = in_event ? sel : sel_pattern;
  assign s_valid  = sel_now ? pg_valid : eb_valid;
  assign s_beat   = sel_now ? pg_beat  : eb_beat;
  assign wr_en    = s_valid && !fifo_full;
  assign wr_beat  = s_beat;
  assign eb_ready = !sel_now && !fifo_full;
  assign pg_ready =  sel_now && !fifo_full;
  assign stall    = s_valid && fifo_full;

  always_ff @(posedge clk) begin
    if (rst) begin
      sel       <= 1'b0;
      in_event  <= 1'b0;
      ev_bp     <= 1'b0;
      bp_cycles <= '0;
      bp_events <= '0;
      events    <= '0;
    end else begin
      sel <= sel_now;
      if (stall) begin
        bp_cycles <= bp_cycles + 1'b1;
        ev_bp     <= 1'b1;
      end
      if (wr_en) begin
        in_event <= !s_beat.eop;
        if (s_beat.eop) begin
          events <= events + 1'b1;
          if (ev_bp || stall) bp_events <= bp_events + 1'b1;
          ev_bp <= 1'b0;
        end
      end
    end
  end

  a_sop_first: assert property (@(posedge clk) disable iff (rst) (wr_en && !in_event) |-> s_beat.sop);
endmodule
