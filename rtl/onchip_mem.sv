// onchip_mem: the on-chip page memory between the DMA FIFO and the write DMA engine.
//
// NPAGES pages of 8 kB, 256 bits wide (256 beats per page). One write port (fifo_ctrl)
// and one read port (write_dma), both in the system clock. The read is synchronous:
// `rdata` shows the word addressed when `re` was high, one cycle later, and keeps it
// while `re` stays low, so the reader can use it as its output register.
// Width and page size follow the published readout; the number of pages (8, 64 kB) is
// this design's choice. Contents are not reset.
module onchip_mem
  import pcie40_pkg::*;
#(
  parameter int unsigned NPAGES = 8
) (
  input  logic                                    clk,
  input  logic                                    we,
  input  logic [$clog2(NPAGES*PAGE_BEATS)-1:0]    waddr,
  input  logic [DW-1:0]                           wdata,
  input  logic                                    re,
  input  logic [$clog2(NPAGES*PAGE_BEATS)-1:0]    raddr,
  output logic [DW-1:0]                           rdata
);
  logic [DW-1:0] mem [NPAGES*PAGE_BEATS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
