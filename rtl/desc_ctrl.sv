// desc_ctrl: the external DMA descriptor controller.
//
// Software writes the host address and the number of entries of the descriptor table and
// pulses `start`; the controller then has read_dma fetch the table, whose entries are the
// bus addresses of free 1 MB host super pages, and keeps them in a queue of SPQ_DEPTH.
// For each full (or early-closed) on-chip page offered by fifo_ctrl it builds one
// descriptor: source = page * 8 kB in the on-chip memory, destination = current super
// page + 8 kB * page slot, size = valid beats * 32 bytes. It hands one descriptor at a
// time to write_dma, waits for `wr_done`, gives the page back to fifo_ctrl (`free_*`) and
// sends a status record upstream (`st_valid`, dma_status_t: destination, size, running
// page number). After 128 pages the super page is used up and the next one is taken from
// the queue, without software intervention. With no free super page left the controller
// waits (`nosp_cycles` counts those cycles) and back-pressure builds up behind it.
// Following the published readout: descriptor table of free super pages fetched by the
// Read DMA engine, 128 pages of 8 kB per super page, one descriptor at a time, status
// sent upstream. Queue depth and status layout are this design's choice.
module desc_ctrl
  import pcie40_pkg::*;
#(
  parameter int unsigned NPAGES    = 8,
  parameter int unsigned SPQ_DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst,
  // registers written by software
  input  logic [63:0]                tbl_addr,
  input  logic [31:0]                tbl_count,
  input  logic                       start,
  // read_dma control and its free super pages
  output logic                       rd_start,
  output logic [63:0]                rd_addr,
  output logic [31:0]                rd_count,
  input  logic                       sp_valid,
  input  logic [63:0]                sp_addr,
  output logic                       sp_room,
  // full pages from fifo_ctrl, freed pages back
  input  logic                       fp_valid,
  input  logic [$clog2(NPAGES)-1:0]  fp_page,
  input  logic [15:0]                fp_beats,
  output logic                       fp_ready,
  output logic                       free_valid,
  output logic [$clog2(NPAGES)-1:0]  free_page,
  // write_dma
  output logic                       wr_valid,
  output dma_desc_t                  wr_desc,
  input  logic                       wr_ready,
  input  logic                       wr_done,
  // status upstream and monitoring
  output logic                       st_valid,
  output dma_status_t                st_data,
  output logic [31:0]                sp_used,
  output logic [31:0]                nosp_cycles
);
  localparam int unsigned PW = $clog2(NPAGES);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_t;
  state_t state;

  logic        have_sp;
  logic [63:0] sp_base;
  logic [7:0]  slot;          // page slot inside the super page (0..127)
  logic [31:0] seq;
  logic [PW-1:0] page;
  logic [31:0] size;

  logic              q_valid, q_full, q_pop;
  logic [63:0]       q_dout;
  logic [$clog2(SPQ_DEPTH+2):0] q_count;

  sync_fifo #(.W(64), .DEPTH(SPQ_DEPTH)) u_spq (
    .clk, .rst, .push(sp_valid), .din(sp_addr), .pop(q_pop),
    .dout(q_dout), .valid(q_valid), .full(q_full), .count(q_count));

  // room for one more entry besides anything already in flight (one read outstanding)
  assign sp_room  = (q_count < ($clog2(SPQ_DEPTH+2)+1)'(SPQ_DEPTH - 1));
  assign rd_start = start;
  assign rd_addr  = tbl_addr;
  assign rd_count = tbl_count;

  assign q_pop    = (state == S_IDLE) && fp_valid && !have_sp && q_valid;
  assign fp_ready = (state == S_IDLE) && fp_valid && have_sp;
  assign wr_valid = (state == S_ISSUE);
  always_comb begin
    wr_desc      = '0;
    wr_desc.src  = 32'(page) * PAGE_BYTES;
    wr_desc.dst  = sp_base + 64'(slot) * 64'(PAGE_BYTES);
    wr_desc.size = size;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      have_sp     <= 1'b0;
      sp_base     <= '0;
      slot        <= '0;
      seq         <= '0;
      page        <= '0;
      size        <= '0;
      free_valid  <= 1'b0;
      free_page   <= '0;
      st_valid    <= 1'b0;
      st_data     <= '0;
      sp_used     <= '0;
      nosp_cycles <= '0;
    end else begin
      free_valid <= 1'b0;
      st_valid   <= 1'b0;
      unique case (state)
        S_IDLE: if (fp_valid) begin
          if (!have_sp) begin
            if (q_valid) begin
              have_sp <= 1'b1;
              sp_base <= q_dout;
              slot    <= '0;
            end else begin
              nosp_cycles <= nosp_cycles + 1'b1;
            end
          end else begin
            page  <= fp_page;
            size  <= 32'(fp_beats) * BEAT_BYTES;
            state <= S_ISSUE;
          end
        end
        S_ISSUE: if (wr_ready) state <= S_WAIT;
        S_WAIT: if (wr_done) begin
          free_valid     <= 1'b1;
          free_page      <= page;
          st_valid       <= 1'b1;
          st_data.dst    <= wr_desc.dst;
          st_data.size   <= size;
          st_data.seq    <= seq;
          seq            <= seq + 1'b1;
          if (slot == 8'(SP_PAGES - 1)) begin
            have_sp <= 1'b0;
            sp_used <= sp_used + 1'b1;
          end
          slot  <= slot + 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_spq_overflow: assert property (@(posedge clk) disable iff (rst) sp_valid |-> !q_full);
endmodule
