// pcie40_top: Belle II readout firmware of the PCIe40 board, front-end links to host DMA.
//
// Data path (one 127 MHz clock domain, 256-bit beats after the link buffers):
//   Belle2link receivers --> link_buffer x NLINKS --> event_builder --+
//                                        pattern_gen (throughput test) --+--> user_logic_ctrl
//   --> dma_fifo (32 kB) --> fifo_ctrl --> onchip_mem (8 kB pages) --> write_dma --> host
//   desc_ctrl takes the free host super pages fetched by read_dma, builds one descriptor
//   per filled page and frees the page after write_dma has copied it.
// Control: reg_bank (host registers), one slc_fifo per link for slow control, ttd_if for
// trigger counting and the busy returned to the trigger system.
//
// The serial parts are outside this module, which offers their decoded signals as ports:
// the Belle2link receivers deliver 32-bit words with start/end-of-fragment flags and a CRC
// error pulse; the Belle2link slow-control transmitter/receiver take and give 32-bit words;
// the b2tt decoder gives a trigger pulse and takes busy; the PCIe hard IP is replaced by a
// register port (BAR0), a host memory read port (request + in-order completion) and a
// host memory write port (one beat with its own address per transfer), plus a DMA status
// record port. Reset is synchronous and active high; the soft-reset register bit resets
// the data path but not the registers.
// The block structure follows the published PCIe40 firmware; the widths of the internal
// streams, the fragment and event formats and all buffer depths not published are this
// design's choices, described in each block.
module pcie40_top
  import pcie40_pkg::*;
#(
  parameter int unsigned NLINKS     = NLINKS_DEF,
  parameter int unsigned LINK_DEPTH = 256,   // beats per link buffer (8 kB)
  parameter int unsigned NPAGES     = 8      // 8 kB pages of on-chip memory
) (
  input  logic              clk,
  input  logic              rst,
  // Belle2link receivers (event data)
  input  logic [NLINKS-1:0] lk_valid,
  input  logic [LW-1:0]     lk_data [NLINKS],
  input  logic [NLINKS-1:0] lk_sof,
  input  logic [NLINKS-1:0] lk_eof,
  input  logic [NLINKS-1:0] lk_crc_err,
  // Belle2link slow control
  output logic [NLINKS-1:0] slc_tx_valid,
  output logic [31:0]       slc_tx_data [NLINKS],
  input  logic [NLINKS-1:0] slc_tx_ready,
  input  logic [NLINKS-1:0] slc_rx_valid,
  input  logic [31:0]       slc_rx_data [NLINKS],
  // b2tt
  input  logic              trig,
  output logic              busy,
  // host registers
  input  logic              reg_we,
  input  logic              reg_re,
  input  logic [11:0]       reg_addr,
  input  logic [31:0]       reg_wdata,
  output logic [31:0]       reg_rdata,
  output logic              reg_rvalid,
  // host memory reads (descriptor table)
  output logic              rq_valid,
  output logic [63:0]       rq_addr,
  input  logic              rq_ready,
  input  logic              cpl_valid,
  input  logic [63:0]       cpl_data,
  // host memory writes (event data)
  output logic              hw_valid,
  output logic [63:0]       hw_addr,
  output logic [DW-1:0]     hw_data,
  output logic              hw_last,
  input  logic              hw_ready,
  // DMA status upstream
  output logic              dma_st_valid,
  output dma_status_t       dma_st
);
  localparam int unsigned NSTAT = 21;
  localparam int unsigned MAW   = $clog2(NPAGES*PAGE_BEATS);
  localparam int unsigned PW    = $clog2(NPAGES);
  localparam int unsigned DF_DEPTH = DMA_FIFO_BYTES / BEAT_BYTES;

  // ---- registers ----------------------------------------------------------------------
  logic              soft_rst, drst;
  logic              sel_pattern, pg_enable, sw_busy, clr_sticky, tbl_start;
  logic [NLINKS-1:0] link_mask;
  logic [31:0]       pg_period, tbl_count;
  logic [15:0]       pg_size;
  logic [63:0]       tbl_addr;
  logic [31:0]       status [NSTAT];
  logic [NLINKS-1:0] slc_we, slc_re;
  logic [1:0]        slc_addr;
  logic [31:0]       slc_wdata;
  logic [31:0]       slc_rdata [NLINKS];

  assign drst = rst || soft_rst;

  // ---- link buffers -------------------------------------------------------------------
  logic [NLINKS-1:0] st_valid, st_pop, d_valid, d_pop, lb_busy, lb_ovf, lb_done, lb_err;
  frag_status_t      st [NLINKS];
  logic [DW-1:0]     d_data [NLINKS];

  for (genvar l = 0; l < NLINKS; l++) begin : g_link
    link_buffer #(.DEPTH(LINK_DEPTH)) u_lb (
      .clk, .rst(drst),
      .in_valid(lk_valid[l]), .in_data(lk_data[l]), .in_sof(lk_sof[l]), .in_eof(lk_eof[l]),
      .st_valid(st_valid[l]), .st(st[l]), .st_pop(st_pop[l]),
      .d_valid(d_valid[l]), .d_data(d_data[l]), .d_pop(d_pop[l]),
      .busy(lb_busy[l]), .ovf_pulse(lb_ovf[l]), .frag_done(lb_done[l]), .frag_err(lb_err[l]));

    slc_fifo u_slc (
      .clk, .rst(drst),
      .acc_we(slc_we[l]), .acc_re(slc_re[l]), .acc_addr(slc_addr), .acc_wdata(slc_wdata),
      .acc_rdata(slc_rdata[l]),
      .tx_valid(slc_tx_valid[l]), .tx_data(slc_tx_data[l]), .tx_ready(slc_tx_ready[l]),
      .rx_valid(slc_rx_valid[l]), .rx_data(slc_rx_data[l]));
  end

  // ---- event building and sources -----------------------------------------------------
  logic              eb_valid, eb_ready, eb_done;
  beat_t             eb_beat;
  logic [NLINKS-1:0] eb_err_links;
  logic              pg_valid, pg_ready;
  beat_t             pg_beat;
  logic [31:0]       pg_trig, pg_bp, pg_lost, pg_ev;

  event_builder #(.NLINKS(NLINKS)) u_eb (
    .clk, .rst(drst), .link_mask,
    .st_valid, .st, .st_pop, .d_valid, .d_data, .d_pop,
    .o_valid(eb_valid), .o_beat(eb_beat), .o_ready(eb_ready),
    .ev_done(eb_done), .ev_err_links(eb_err_links));

  pattern_gen u_pg (
    .clk, .rst(drst), .enable(pg_enable), .period(pg_period), .size_beats(pg_size),
    .ext_trig(1'b0),
    .o_valid(pg_valid), .o_beat(pg_beat), .o_ready(pg_ready),
    .trig_count(pg_trig), .bp_count(pg_bp), .lost_count(pg_lost), .ev_count(pg_ev));

  logic        df_wr, df_full, df_pop, df_valid;
  beat_t       df_wbeat, df_rbeat;
  logic [$clog2(DF_DEPTH+1):0] df_level;
  logic [15:0] df_events;
  logic [31:0] ul_bp_cycles, ul_bp_events, ul_events;

  user_logic_ctrl u_ulc (
    .clk, .rst(drst), .sel_pattern,
    .eb_valid, .eb_beat, .eb_ready, .pg_valid, .pg_beat, .pg_ready,
    .wr_en(df_wr), .wr_beat(df_wbeat), .fifo_full(df_full),
    .bp_cycles(ul_bp_cycles), .bp_events(ul_bp_events), .events(ul_events));

  dma_fifo u_df (
    .clk, .rst(drst), .wr_en(df_wr), .wr_beat(df_wbeat), .full(df_full),
    .rd_pop(df_pop), .rd_valid(df_valid), .rd_beat(df_rbeat),
    .level(df_level), .events(df_events));

  // ---- DMA ----------------------------------------------------------------------------
  logic            mem_we, mem_re;
  logic [MAW-1:0]  mem_waddr, mem_raddr;
  logic [DW-1:0]   mem_wdata, mem_rdata;
  logic            fp_valid, fp_ready, free_valid;
  logic [PW-1:0]   fp_page, free_page;
  logic [15:0]     fp_beats;
  logic [31:0]     pages_closed, pages_flushed, sp_used, nosp_cycles;
  logic            rd_start, sp_valid, sp_room, rd_busy;
  logic [63:0]     rd_addr, sp_addr;
  logic [31:0]     rd_count;
  logic            wr_valid, wr_ready, wr_done;
  dma_desc_t       wr_desc;

  fifo_ctrl #(.NPAGES(NPAGES)) u_fc (
    .clk, .rst(drst), .rd_valid(df_valid), .rd_beat(df_rbeat), .rd_pop(df_pop),
    .mem_we, .mem_waddr, .mem_wdata,
    .fp_valid, .fp_page, .fp_beats, .fp_ready, .free_valid, .free_page,
    .pages_closed, .pages_flushed);

  onchip_mem #(.NPAGES(NPAGES)) u_mem (
    .clk, .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata));

  desc_ctrl #(.NPAGES(NPAGES)) u_dc (
    .clk, .rst(drst), .tbl_addr, .tbl_count, .start(tbl_start),
    .rd_start, .rd_addr, .rd_count, .sp_valid, .sp_addr, .sp_room,
    .fp_valid, .fp_page, .fp_beats, .fp_ready, .free_valid, .free_page,
    .wr_valid, .wr_desc, .wr_ready, .wr_done,
    .st_valid(dma_st_valid), .st_data(dma_st), .sp_used, .nosp_cycles);

  read_dma u_rd (
    .clk, .rst(drst), .start(rd_start), .tbl_addr(rd_addr), .count(rd_count),
    .rq_valid, .rq_addr, .rq_ready, .cpl_valid, .cpl_data,
    .sp_valid, .sp_addr, .sp_room, .busy(rd_busy));

  write_dma #(.NPAGES(NPAGES)) u_wd (
    .clk, .rst(drst), .desc_valid(wr_valid), .desc(wr_desc), .desc_ready(wr_ready),
    .mem_re, .mem_raddr, .mem_rdata,
    .hw_valid, .hw_addr, .hw_data, .hw_last, .hw_ready, .done(wr_done));

  // ---- trigger / busy -----------------------------------------------------------------
  logic [31:0]       trig_count, busy_cycles, trig_while_busy;
  logic [NLINKS-1:0] busy_links, err_links;
  logic [63:0]       busy_links64, err_links64;
  logic              dma_busy;

  assign dma_busy = (df_level > ($clog2(DF_DEPTH+1)+1)'(DF_DEPTH * 3 / 4));

  ttd_if #(.NLINKS(NLINKS)) u_ttd (
    .clk, .rst(drst), .trig, .link_mask, .link_busy(lb_busy),
    .link_err(eb_err_links & {NLINKS{eb_done}}), .dma_busy, .sw_busy, .clr_sticky,
    .busy, .trig_count, .busy_cycles, .trig_while_busy, .busy_links, .err_links);

  // ---- monitoring ---------------------------------------------------------------------
  logic [31:0] ovf_count, eb_events, dma_pages;

  always_ff @(posedge clk) begin
    if (drst) begin
      ovf_count <= '0;
      eb_events <= '0;
      dma_pages <= '0;
    end else begin
      if (|lb_ovf)      ovf_count <= ovf_count + 1'b1;
      if (eb_done)      eb_events <= eb_events + 1'b1;
      if (dma_st_valid) dma_pages <= dma_pages + 1'b1;
    end
  end

  assign busy_links64 = 64'(busy_links);
  assign err_links64  = 64'(err_links);
  assign status[0]  = trig_count;
  assign status[1]  = eb_events;
  assign status[2]  = ul_events;
  assign status[3]  = ul_bp_cycles;
  assign status[4]  = ul_bp_events;
  assign status[5]  = pg_trig;
  assign status[6]  = pg_bp;
  assign status[7]  = pg_lost;
  assign status[8]  = pages_closed;
  assign status[9]  = pages_flushed;
  assign status[10] = dma_pages;
  assign status[11] = sp_used;
  assign status[12] = nosp_cycles;
  assign status[13] = busy_cycles;
  assign status[14] = trig_while_busy;
  assign status[15] = {5'd0, rd_busy, 10'(df_level), df_events};
  assign status[16] = busy_links64[31:0];
  assign status[17] = busy_links64[63:32];
  assign status[18] = err_links64[31:0];
  assign status[19] = err_links64[63:32];
  assign status[20] = ovf_count;

  reg_bank #(.NLINKS(NLINKS), .NSTAT(NSTAT)) u_regs (
    .clk, .rst, .we(reg_we), .re(reg_re), .addr(reg_addr), .wdata(reg_wdata),
    .rdata(reg_rdata), .rvalid(reg_rvalid),
    .soft_rst, .sel_pattern, .pg_enable, .sw_busy, .clr_sticky, .link_mask,
    .pg_period, .pg_size, .tbl_addr, .tbl_count, .tbl_start,
    .status, .frag_err(lb_err), .crc_err(lk_crc_err), .frag_in(lb_done), .word_in(lk_valid),
    .slc_we, .slc_re, .slc_addr, .slc_wdata, .slc_rdata);

  // pg_ev duplicates ul_events in pattern mode
  logic unused;
  assign unused = ^pg_ev;
endmodule
