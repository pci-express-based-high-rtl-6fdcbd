// write_dma: copies one on-chip memory page to host memory per descriptor.
//
// A descriptor (`desc_valid`/`desc_ready`) gives the byte address of the data in the
// on-chip memory, the host bus address and the size in bytes (a multiple of 32). The
// engine reads the memory one 256-bit beat per cycle and presents each beat on the
// host-write port with its own host address (`hw_addr` = dst + 32*beat) and `hw_last` on
// the final beat. The memory's synchronous read register is the output stage: a new read
// is issued only when the output is empty or being accepted, so with `hw_ready` held high
// the engine sends one beat per cycle, and a size of S bytes finishes S/32 + 1 cycles
// after the descriptor is taken. `done` pulses when the last beat is accepted.
// Following the published readout: the Write DMA engine moves data from the Avalon-MM
// side to the PCIe side one descriptor at a time. The plain host-write port (instead of
// the vendor's Avalon-MM/PCIe transaction interface) is this design's choice.
module write_dma
  import pcie40_pkg::*;
#(
  parameter int unsigned NPAGES = 8
) (
  input  logic                                  clk,
  input  logic                                  rst,
  input  logic                                  desc_valid,
  input  dma_desc_t                             desc,
  output logic                                  desc_ready,
  // on-chip memory read port
  output logic                                  mem_re,
  output logic [$clog2(NPAGES*PAGE_BEATS)-1:0]  mem_raddr,
  input  logic [DW-1:0]                         mem_rdata,
  // host memory writes
  output logic                                  hw_valid,
  output logic [63:0]                           hw_addr,
  output logic [DW-1:0]                         hw_data,
  output logic                                  hw_last,
  input  logic                                  hw_ready,
  output logic                                  done
);
  localparam int unsigned AW = $clog2(NPAGES*PAGE_BEATS);

  logic        busy;
  logic [AW-1:0] src;
  logic [63:0] dst;
  logic [31:0] rem;        // beats still to read
  logic        out_valid;
  logic        out_last;

  assign desc_ready = !busy;
  assign mem_re     = busy && rem != 0 && (!out_valid || hw_ready);
  assign mem_raddr  = src;
  assign hw_valid   = out_valid;
  assign hw_data    = mem_rdata;
  assign hw_last    = out_last;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      src       <= '0;
      dst       <= '0;
      rem       <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      hw_addr   <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (desc_valid && !busy) begin
        busy <= 1'b1;
        src  <= AW'(desc.src / BEAT_BYTES);
        dst  <= desc.dst;
        rem  <= desc.size / BEAT_BYTES;
      end
      if (mem_re) begin
        src       <= src + 1'b1;
        dst       <= dst + 64'(BEAT_BYTES);
        rem       <= rem - 1'b1;
        hw_addr   <= dst;
        out_valid <= 1'b1;
        out_last  <= (rem == 32'd1);
      end else if (hw_ready) begin
        out_valid <= 1'b0;
      end
      if (out_valid && hw_ready && out_last) begin
        busy     <= 1'b0;
        done     <= 1'b1;
        out_last <= 1'b0;
      end
    end
  end

  a_size_aligned: assert property (@(posedge clk) disable iff (rst)
    (desc_valid && !busy) |-> (desc.size[4:0] == 5'd0 && desc.size != 0));
endmodule
