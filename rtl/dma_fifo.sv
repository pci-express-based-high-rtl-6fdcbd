// dma_fifo: the 32 kB data FIFO between the user logic and the DMA block.
//
// It holds DEPTH beats of 256 bits plus sop/eop flags (1024 beats = 32 kB by default),
// written by user_logic_ctrl and read first-word-fall-through by fifo_ctrl. The array is
// read synchronously into an output register (block-RAM style). Besides the fill level it
// reports how many complete events it holds (`events`: eop beats written minus eop beats
// read), which fifo_ctrl uses to decide when a partly filled page may be closed.
// The 32 kB size follows the published readout; the event count is this design's choice.
// A write when `full` is dropped (the writer checks `full`). Synchronous active-high reset.
module dma_fifo
  import pcie40_pkg::*;
#(
  parameter int unsigned DEPTH = DMA_FIFO_BYTES / BEAT_BYTES
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr_en,
  input  beat_t                    wr_beat,
  output logic                     full,
  input  logic                     rd_pop,
  output logic                     rd_valid,
  output beat_t                    rd_beat,
  output logic [$clog2(DEPTH+1):0] level,
  output logic [15:0]              events
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH+1) + 1;

  beat_t          mem [DEPTH];
  logic [AW-1:0]  wptr, rptr;
  logic [CW-1:0]  mcount;
  logic           do_wr, do_pop, load;

  assign full   = (mcount == CW'(DEPTH));
  assign do_wr  = wr_en && !full;
  assign do_pop = rd_pop && rd_valid;
  assign load   = (mcount != '0) && (!rd_valid || do_pop);
  assign level  = mcount + CW'(rd_valid);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_beat;
    if (load)  rd_beat   <= mem[rptr];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr     <= '0;
      rptr     <= '0;
      mcount   <= '0;
      rd_valid <= 1'b0;
      events   <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (load)  rptr <= rptr + 1'b1;
      mcount <= mcount + CW'(do_wr) - CW'(load);
      if (load)        rd_valid <= 1'b1;
      else if (do_pop) rd_valid <= 1'b0;
      events <= events + 16'(do_wr && wr_beat.eop) - 16'(do_pop && rd_beat.eop);
    end
  end

  a_pow2: assert property (@(posedge clk) (DEPTH & (DEPTH - 1)) == 0);
endmodule
