// fifo_ctrl: fills pages of the on-chip memory from the DMA FIFO.
//
// It takes the lowest-numbered free page, copies one DMA-FIFO beat per cycle into it and
// closes the page when it is full (256 beats = 8 kB) or, if an event has ended and the
// FIFO has stayed empty for FLUSH_IDLE cycles, early with fewer beats; the rest of that
// page is then unused (the "gap" in the host super page). A closed page is offered to the
// descriptor controller (`fp_*`, valid/ready) with its number of valid beats, and stays
// reserved until the descriptor controller hands it back on `free_*` after the write DMA
// engine has copied it. With no free page the FIFO is not read, so the DMA FIFO fills and
// back-pressure reaches the user logic. Events may span pages; sop/eop are not stored.
// Following the published readout: FIFO controller between DMA FIFO and 8 kB pages, pages
// freed after transfer. Page choice, early close and FLUSH_IDLE are this design's choice.
// The sop flag of the incoming beat is not needed here (pages are closed on eop), so
// lint reports that bit of rd_beat as unused.
module fifo_ctrl
  import pcie40_pkg::*;
#(
  parameter int unsigned NPAGES     = 8,
  parameter int unsigned FLUSH_IDLE = 16
) (
  input  logic                                  clk,
  input  logic                                  rst,
  // DMA FIFO read side
  input  logic                                  rd_valid,
  input  beat_t                                 rd_beat,
  output logic                                  rd_pop,
  // on-chip memory write port
  output logic                                  mem_we,
  output logic [$clog2(NPAGES*PAGE_BEATS)-1:0]  mem_waddr,
  output logic [DW-1:0]                         mem_wdata,
  // full pages to the descriptor controller
  output logic                                  fp_valid,
  output logic [$clog2(NPAGES)-1:0]             fp_page,
  output logic [15:0]                           fp_beats,
  input  logic                                  fp_ready,
  // pages given back after their transfer
  input  logic                                  free_valid,
  input  logic [$clog2(NPAGES)-1:0]             free_page,
  // monitoring
  output logic [31:0]                           pages_closed,
  output logic [31:0]                           pages_flushed   // closed before full
);
  localparam int unsigned PW = $clog2(NPAGES);
  localparam int unsigned BW = $clog2(PAGE_BEATS);

  typedef enum logic [1:0] {S_ALLOC, S_FILL, S_CLOSE} state_t;
  state_t state;

  logic [NPAGES-1:0] used;
  logic [PW-1:0]     cur;
  logic [BW:0]       wptr;        // beats written into the current page
  logic              last_eop;    // last beat written ended an event
  logic [$clog2(FLUSH_IDLE+1):0] idle;
  logic              have_free;
  logic [PW-1:0]     first_free;

  always_comb begin
    have_free  = 1'b0;
    first_free = '0;
    for (int p = NPAGES - 1; p >= 0; p--)
      if (!used[p]) begin
        have_free  = 1'b1;
        first_free = PW'(p);
      end
  end

  assign rd_pop    = (state == S_FILL) && rd_valid;
  assign mem_we    = rd_pop;
  assign mem_waddr = {cur, wptr[BW-1:0]};
  assign mem_wdata = rd_beat.data;
  assign fp_valid  = (state == S_CLOSE);
  assign fp_page   = cur;
  assign fp_beats  = 16'(wptr);

  always_ff @(posedge clk) begin
    if (rst) begin
      state         <= S_ALLOC;
      used          <= '0;
      cur           <= '0;
      wptr          <= '0;
      last_eop      <= 1'b0;
      idle          <= '0;
      pages_closed  <= '0;
      pages_flushed <= '0;
    end else begin
      unique case (state)
        S_ALLOC: if (have_free) begin
          cur        <= first_free;
          used[first_free] <= 1'b1;
          wptr       <= '0;
          idle       <= '0;
          state      <= S_FILL;
        end
        S_FILL: begin
          if (rd_valid) begin
            wptr     <= wptr + 1'b1;
            last_eop <= rd_beat.eop;
            idle     <= '0;
            if (wptr == (BW+1)'(PAGE_BEATS - 1)) state <= S_CLOSE;
          end else if (wptr != '0 && last_eop) begin
            idle <= idle + 1'b1;
            if (idle == ($clog2(FLUSH_IDLE+1)+1)'(FLUSH_IDLE - 1)) begin
              state         <= S_CLOSE;
              pages_flushed <= pages_flushed + 1'b1;
            end
          end
        end
        S_CLOSE: if (fp_ready) begin
          pages_closed <= pages_closed + 1'b1;
          state        <= S_ALLOC;
        end
        default: state <= S_ALLOC;
      endcase
      // a page comes back (never the one being filled)
      if (free_valid) used[free_page] <= 1'b0;
    end
  end

  a_free_used: assert property (@(posedge clk) disable iff (rst) free_valid |-> used[free_page]);
endmodule
