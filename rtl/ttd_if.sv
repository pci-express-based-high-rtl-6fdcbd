// ttd_if: trigger and busy side of the interface to the timing and trigger distribution.
//
// One b2tt link serves all links of the board. The decoded trigger arrives as a one-cycle
// pulse `trig`; it is counted (`trig_count`, the event number the front ends will use).
// The busy returned to the trigger system is the OR of: every enabled link buffer's busy,
// the DMA FIFO's almost-full, and a software busy bit; it is registered (one cycle of
// latency). The links that have been busy, and the links that delivered a fragment with
// an error, are kept in sticky vectors that software reads and clears (`clr_sticky`),
// so the cause of a busy or an error can be traced to its link. `busy_cycles` counts
// cycles with busy high and `trig_while_busy` counts triggers that came anyway.
// Following the published readout: one b2tt link for all links, busy handshake, link
// errors and busy collected for the trigger system. The b2tt serial coding itself is not
// part of this module; the sticky vectors and counters are this design's choice.
module ttd_if #(
  parameter int unsigned NLINKS = 48
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              trig,
  input  logic [NLINKS-1:0] link_mask,
  input  logic [NLINKS-1:0] link_busy,
  input  logic [NLINKS-1:0] link_err,      // pulses
  input  logic              dma_busy,
  input  logic              sw_busy,
  input  logic              clr_sticky,
  output logic              busy,
  output logic [31:0]       trig_count,
  output logic [31:0]       busy_cycles,
  output logic [31:0]       trig_while_busy,
  output logic [NLINKS-1:0] busy_links,
  output logic [NLINKS-1:0] err_links
);
  logic busy_next;
  assign busy_next = sw_busy || dma_busy || |(link_busy & link_mask);

  always_ff @(posedge clk) begin
    if (rst) begin
      busy            <= 1'b0;
      trig_count      <= '0;
      busy_cycles     <= '0;
      trig_while_busy <= '0;
      busy_links      <= '0;
      err_links       <= '0;
    end else begin
      busy <= busy_next;
      if (busy) busy_cycles <= busy_cycles + 1'b1;
      if (trig) begin
        trig_count <= trig_count + 1'b1;
        if (busy) trig_while_busy <= trig_while_busy + 1'b1;
      end
      if (clr_sticky) begin
        busy_links <= '0;
        err_links  <= '0;
      end else begin
        busy_links <= busy_links | (link_busy & link_mask);
        err_links  <= err_links  | (link_err  & link_mask);
      end
    end
  end
endmodule
