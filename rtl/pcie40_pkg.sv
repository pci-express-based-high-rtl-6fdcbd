// pcie40_pkg: constants and types shared by the PCIe40 Belle II readout firmware.
//
// The numbers that the published description of the readout gives are used as defaults:
// 48 Belle2links, a 256-bit data path into an on-chip page memory of 8 kB pages, a 32 kB
// DMA FIFO and 128 pages per 1 MB host super page. The per-link fragment format (header
// and trailer words) and the built-event header and trailer layout are this design's own
// choice, because the Belle2link frame format is not published with the readout.
package pcie40_pkg;

  // ---- sizes --------------------------------------------------------------------------
  localparam int unsigned NLINKS_DEF    = 48;     // Belle2links per board
  localparam int unsigned LW            = 32;     // link word width (bits)
  localparam int unsigned DW            = 256;    // data path / on-chip memory width (bits)
  localparam int unsigned WPB           = DW / LW; // link words per 256-bit beat (8)
  localparam int unsigned BEAT_BYTES    = DW / 8;  // 32
  localparam int unsigned PAGE_BYTES    = 8192;    // DMA page
  localparam int unsigned PAGE_BEATS    = PAGE_BYTES / BEAT_BYTES; // 256
  localparam int unsigned SP_PAGES      = 128;     // DMA pages per super page (1 MB)
  localparam int unsigned DMA_FIFO_BYTES = 32768;  // DMA data FIFO

  // ---- per-link fragment format (this design's choice) --------------------------------
  // header : {8'hB2, event_tag[23:0]}
  // payload: any number of 32-bit words
  // trailer: {8'hE2, 8'h00, payload_word_count[15:0]}
  localparam logic [7:0] FRAG_HDR_MAGIC = 8'hB2;
  localparam logic [7:0] FRAG_TRL_MAGIC = 8'hE2;

  // ---- built-event format (this design's choice) --------------------------------------
  localparam logic [31:0] EVT_HDR_MAGIC = 32'hB2EB_0001;
  localparam logic [31:0] EVT_TRL_MAGIC = 32'hB2EE_0001;
  localparam logic [31:0] PG_HDR_MAGIC  = 32'hB2FA_0001; // pattern generator events

  // status the link buffer keeps per stored fragment
  typedef struct packed {
    logic [23:0] tag;      // event tag from the fragment header
    logic [15:0] nwords;   // payload words received
    logic [15:0] nbeats;   // 256-bit beats stored in the data FIFO
    logic        hdr_err;  // header magic wrong
    logic        trl_err;  // trailer magic wrong
    logic        len_err;  // trailer word count differs from the words received
    logic        ovf;      // payload words dropped because the data FIFO was full
  } frag_status_t;

  // one 256-bit beat of a data stream with event boundaries
  typedef struct packed {
    logic          sop;
    logic          eop;
    logic [DW-1:0] data;
  } beat_t;

  // DMA descriptor: source in on-chip memory, destination in host memory, size
  typedef struct packed {
    logic [31:0] src;   // byte address in on-chip memory
    logic [63:0] dst;   // host bus address
    logic [31:0] size;  // bytes
  } dma_desc_t;

  // status written upstream after each descriptor
  typedef struct packed {
    logic [63:0] dst;      // host address the page went to
    logic [31:0] size;     // bytes written
    logic [31:0] seq;      // running page number
  } dma_status_t;

endpackage
