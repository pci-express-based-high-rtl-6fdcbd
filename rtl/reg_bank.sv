// reg_bank: host-accessible control and status registers (PCIe BAR0 slow-control space).
//
// Word-addressed 32-bit registers. A write takes effect at the clock edge; a read returns
// `rdata` with `rvalid` one cycle after `re`. Map (word addresses):
//   0x000      R   ID: {16'hB240, NLINKS}
//   0x001      RW  control: bit0 soft reset (self-clearing), bit1 select pattern generator,
//                  bit2 pattern trigger enable, bit3 software busy, bit4 clear sticky
//                  link vectors (self-clearing)
//   0x002/003  RW  link mask, links 0..31 / 32..63 (1 = link enabled)
//   0x004      RW  pattern trigger period (cycles);  0x005 RW pattern event size (beats)
//   0x008/009  RW  descriptor table host address, low / high word
//   0x00A      RW  descriptor table entries;  0x00B W bit0: start table fetch (pulse)
//   0x020+i    R   status word i (NSTAT words supplied by the top level)
//   0x100+l    R   fragment error counter of link l (16 bit, saturating)
//   0x140+l    R   CRC error counter of link l, counted from the link receiver's pulses
//   0x180+l    R   fragments received on link l (32 bit, wrapping)
//   0x1C0+l    R   32-bit words received on link l, header and trailer included (32 bit,
//                  wrapping); software shows it as the link's total data volume
//   0x200+4l+k RW  slow-control window k (0..3) of link l, forwarded to that slc_fifo
// Following the published readout: registers reached through BAR0 for slow control,
// per-link enable/mask, per-link error counters, event counts and data volume read by the
// monitoring tools. The map
// itself is this design's choice. Synchronous active-high reset.
// Only the low $clog2(NSTAT) bits of the status offset select a word (the range is checked
// on the full address), so lint reports its upper bits as unused.
module reg_bank #(
  parameter int unsigned NLINKS = 48,
  parameter int unsigned NSTAT  = 16
) (
  input  logic              clk,
  input  logic              rst,
  // host access
  input  logic              we,
  input  logic              re,
  input  logic [11:0]       addr,
  input  logic [31:0]       wdata,
  output logic [31:0]       rdata,
  output logic              rvalid,
  // control
  output logic              soft_rst,
  output logic              sel_pattern,
  output logic              pg_enable,
  output logic              sw_busy,
  output logic              clr_sticky,
  output logic [NLINKS-1:0] link_mask,
  output logic [31:0]       pg_period,
  output logic [15:0]       pg_size,
  output logic [63:0]       tbl_addr,
  output logic [31:0]       tbl_count,
  output logic              tbl_start,
  // status
  input  logic [31:0]       status [NSTAT],
  input  logic [NLINKS-1:0] frag_err,   // pulses
  input  logic [NLINKS-1:0] crc_err,    // pulses
  input  logic [NLINKS-1:0] frag_in,    // pulses: a fragment ended on the link
  input  logic [NLINKS-1:0] word_in,    // pulses: a word arrived on the link
  // slow-control windows
  output logic [NLINKS-1:0] slc_we,
  output logic [NLINKS-1:0] slc_re,
  output logic [1:0]        slc_addr,
  output logic [31:0]       slc_wdata,
  input  logic [31:0]       slc_rdata [NLINKS]
);
  logic [63:0]  mask64;
  logic [15:0]  ferr_cnt [NLINKS];
  localparam int unsigned LI = (NLINKS > 1) ? $clog2(NLINKS) : 1;
  localparam int unsigned SI = (NSTAT > 1) ? $clog2(NSTAT) : 1;
  logic [15:0]  crc_cnt  [NLINKS];
  logic [31:0]  frag_cnt [NLINKS];
  logic [31:0]  word_cnt [NLINKS];
  logic [11:0]  off_st;                  // address offset inside the status range
  logic [5:0]   off_l;                   // address offset inside a 64-word per-link range
  logic         in_slc;
  logic [9:0]   slc_idx;

  assign link_mask = mask64[NLINKS-1:0];
  assign in_slc    = (addr[11:9] == 3'b001);
  assign slc_idx   = {1'b0, addr[8:0]} >> 2;
  assign slc_addr  = addr[1:0];
  assign slc_wdata = wdata;
  assign off_st    = addr - 12'h020;
  assign off_l     = addr[5:0];

  always_comb begin
    slc_we = '0;
    slc_re = '0;
    if (in_slc && slc_idx < 10'(NLINKS)) begin
      slc_we[slc_idx[LI-1:0]] = we;
      slc_re[slc_idx[LI-1:0]] = re;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      mask64      <= '0;
      soft_rst    <= 1'b0;
      sel_pattern <= 1'b0;
      pg_enable   <= 1'b0;
      sw_busy     <= 1'b0;
      clr_sticky  <= 1'b0;
      pg_period   <= 32'd1000;
      pg_size     <= 16'd256;
      tbl_addr    <= '0;
      tbl_count   <= '0;
      tbl_start   <= 1'b0;
      rdata       <= '0;
      rvalid      <= 1'b0;
      for (int l = 0; l < NLINKS; l++) begin
        ferr_cnt[l] <= '0;
        crc_cnt[l]  <= '0;
        frag_cnt[l] <= '0;
        word_cnt[l] <= '0;
      end
    end else begin
      soft_rst   <= 1'b0;
      clr_sticky <= 1'b0;
      tbl_start  <= 1'b0;
      if (we) begin
        unique case (addr)
          12'h001: begin
            soft_rst    <= wdata[0];
            sel_pattern <= wdata[1];
            pg_enable   <= wdata[2];
            sw_busy     <= wdata[3];
            clr_sticky  <= wdata[4];
          end
          12'h002: mask64[31:0]  <= wdata;
          12'h003: mask64[63:32] <= wdata;
          12'h004: pg_period     <= wdata;
          12'h005: pg_size       <= wdata[15:0];
          12'h008: tbl_addr[31:0]  <= wdata;
          12'h009: tbl_addr[63:32] <= wdata;
          12'h00A: tbl_count     <= wdata;
          12'h00B: tbl_start     <= wdata[0];
          default: ;
        endcase
      end
      for (int l = 0; l < NLINKS; l++) begin
        if (frag_err[l] && ferr_cnt[l] != 16'hFFFF) ferr_cnt[l] <= ferr_cnt[l] + 1'b1;
        if (crc_err[l]  && crc_cnt[l]  != 16'hFFFF) crc_cnt[l]  <= crc_cnt[l]  + 1'b1;
        if (frag_in[l]) frag_cnt[l] <= frag_cnt[l] + 1'b1;
        if (word_in[l]) word_cnt[l] <= word_cnt[l] + 1'b1;
      end
      rvalid <= re;
      if (re) begin
        rdata <= '0;
        if (addr == 12'h000) rdata <= {16'hB240, 16'(NLINKS)};
        else if (addr == 12'h001) rdata <= {27'd0, 1'b0, sw_busy, pg_enable, sel_pattern, 1'b0};
        else if (addr == 12'h002) rdata <= mask64[31:0];
        else if (addr == 12'h003) rdata <= mask64[63:32];
        else if (addr == 12'h004) rdata <= pg_period;
        else if (addr == 12'h005) rdata <= 32'(pg_size);
        else if (addr == 12'h008) rdata <= tbl_addr[31:0];
        else if (addr == 12'h009) rdata <= tbl_addr[63:32];
        else if (addr == 12'h00A) rdata <= tbl_count;
        else if (addr >= 12'h020 && addr < 12'(32'h020 + NSTAT)) rdata <= status[off_st[SI-1:0]];
        else if (addr >= 12'h100 && addr < 12'(32'h100 + NLINKS)) rdata <= 32'(ferr_cnt[off_l[LI-1:0]]);
        else if (addr >= 12'h140 && addr < 12'(32'h140 + NLINKS)) rdata <= 32'(crc_cnt[off_l[LI-1:0]]);
        else if (addr >= 12'h180 && addr < 12'(32'h180 + NLINKS)) rdata <= frag_cnt[off_l[LI-1:0]];
        else if (addr >= 12'h1C0 && addr < 12'(32'h1C0 + NLINKS)) rdata <= word_cnt[off_l[LI-1:0]];
        else if (in_slc && slc_idx < 10'(NLINKS)) rdata <= slc_rdata[slc_idx[LI-1:0]];
      end
    end
  end
endmodule
