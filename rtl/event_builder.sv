// event_builder: merges the fragments of all enabled links into one built event.
//
// When every enabled link (link_mask bit 1) has a complete fragment waiting, the state
// machine writes one event to its output stream, one 256-bit beat per cycle while
// `o_ready` is high:
//   beat 0          header : [31:0] EVT_HDR_MAGIC, [63:32] event number, [95:64] event
//                            length in beats, [111:96] NLINKS, [127:112] size-table beats,
//                            [128 +: NLINKS] link mask
//   beats 1..NSW    size table: 16 bits per link, link l in beat 1+l/16, bits (l%16)*16,
//                            holding the link's payload length in 32-bit words (0 if masked)
//   then            the payload beats of link 0, link 1, ... link NLINKS-1 (enabled only)
//   last beat       trailer: [31:0] EVT_TRL_MAGIC, [63:32] event number, [64 +: NLINKS]
//                            per-link error flags, [159:128] XOR of all payload 32-bit words
// The links are visited one after another, as in the published readout; the per-link
// headers and trailers were already checked and removed by link_buffer. A link's error
// flag is set for a header, trailer, length or overflow error, or when its event tag
// differs from the low 24 bits of the event number, which counts built events from 0.
// The header/size-table/trailer layout is this design's choice. Each link costs one extra
// cycle to close (status pop), so an event takes NSW + 2 + sum(payload beats) + NLINKS
// cycles when the output never stalls.
// The error check reads only the flags and tag of a fragment status and the low 24 bits
// of the event number; lint reports the other bits of its arguments as unused.
module event_builder
  import pcie40_pkg::*;
#(
  parameter int unsigned NLINKS = NLINKS_DEF
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [NLINKS-1:0]   link_mask,
  // from the link buffers
  input  logic [NLINKS-1:0]   st_valid,
  input  frag_status_t        st     [NLINKS],
  output logic [NLINKS-1:0]   st_pop,
  input  logic [NLINKS-1:0]   d_valid,
  input  logic [DW-1:0]       d_data [NLINKS],
  output logic [NLINKS-1:0]   d_pop,
  // built events
  output logic                o_valid,
  output beat_t               o_beat,
  input  logic                o_ready,
  // monitoring
  output logic                ev_done,      // pulse: an event was completed
  output logic [NLINKS-1:0]   ev_err_links  // error flags of that event (valid with ev_done)
);
  localparam int unsigned NSW = (NLINKS + 15) / 16;        // size-table beats
  localparam int unsigned LI  = (NLINKS > 1) ? $clog2(NLINKS) : 1;
  localparam int unsigned SI  = (NSW > 1) ? $clog2(NSW) : 1;

  typedef enum logic [2:0] {S_WAIT, S_HDR, S_SIZE, S_LINK, S_TRL} state_t;
  state_t state;

  logic [31:0]        evnum;
  logic [31:0]        total;      // beats in the event
  logic [LI-1:0]      link;
  logic [15:0]        beat;
  logic [SI-1:0]      widx;
  logic [NLINKS-1:0]  errs;
  logic [31:0]        csum;
  logic               all_ready;
  logic [31:0]        sum_beats;
  logic               fire;

  always_comb begin
    sum_beats = 32'(NSW + 2);
    all_ready = |link_mask;
    for (int l = 0; l < NLINKS; l++) begin
      if (link_mask[l]) begin
        sum_beats = sum_beats + 32'(st[l].nbeats);
        if (!st_valid[l]) all_ready = 1'b0;
      end
    end
  end

  function automatic logic [31:0] fold(input logic [DW-1:0] d);
    fold = '0;
    for (int k = 0; k < WPB; k++) fold ^= d[k*LW +: LW];
  endfunction

  function automatic logic link_bad(input frag_status_t s, input logic [31:0] n);
    return s.hdr_err | s.trl_err | s.len_err | s.ovf | (s.tag != n[23:0]);
  endfunction

  // output beat
  always_comb begin
    o_valid = 1'b0;
    o_beat  = '0;
    unique case (state)
      S_HDR: begin
        o_valid                = 1'b1;
        o_beat.sop             = 1'b1;
        o_beat.data[31:0]      = EVT_HDR_MAGIC;
        o_beat.data[63:32]     = evnum;
        o_beat.data[95:64]     = total;
        o_beat.data[111:96]    = 16'(NLINKS);
        o_beat.data[127:112]   = 16'(NSW);
        o_beat.data[128 +: NLINKS] = link_mask;
      end
      S_SIZE: begin
        o_valid = 1'b1;
        for (int l = 0; l < NLINKS; l++)
          if (l / 16 == int'(widx) && link_mask[l])
            o_beat.data[(l % 16)*16 +: 16] = st[l].nwords;
      end
      S_LINK: begin
        o_valid     = link_mask[link] && (beat != st[link].nbeats) && d_valid[link];
        o_beat.data = d_data[link];
      end
      S_TRL: begin
        o_valid               = 1'b1;
        o_beat.eop            = 1'b1;
        o_beat.data[31:0]     = EVT_TRL_MAGIC;
        o_beat.data[63:32]    = evnum;
        o_beat.data[64 +: NLINKS] = errs;
        o_beat.data[159:128]  = csum;
      end
      default: ;
    endcase
  end
  assign fire = o_valid && o_ready;

  always_comb begin
    st_pop = '0;
    d_pop  = '0;
    if (state == S_LINK) begin
      if (link_mask[link] && beat == st[link].nbeats) st_pop[link] = 1'b1;
      if (fire) d_pop[link] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= S_WAIT;
      evnum        <= '0;
      total        <= '0;
      link         <= '0;
      beat         <= '0;
      widx         <= '0;
      errs         <= '0;
      csum         <= '0;
      ev_done      <= 1'b0;
      ev_err_links <= '0;
    end else begin
      ev_done <= 1'b0;
      unique case (state)
        S_WAIT: if (all_ready) begin
          total <= sum_beats;
          errs  <= '0;
          csum  <= '0;
          state <= S_HDR;
        end
        S_HDR: if (fire) begin
          widx  <= '0;
          state <= S_SIZE;
        end
        S_SIZE: if (fire) begin
          widx <= widx + 1'b1;
          if (widx == SI'(NSW-1)) begin
            link  <= '0;
            beat  <= '0;
            state <= S_LINK;
          end
        end
        S_LINK: begin
          if (fire) begin
            beat <= beat + 1'b1;
            csum <= csum ^ fold(d_data[link]);
          end else if (!link_mask[link] || beat == st[link].nbeats) begin
            if (link_mask[link] && link_bad(st[link], evnum)) errs[link] <= 1'b1;
            beat <= '0;
            if (link == LI'(NLINKS-1)) state <= S_TRL;
            else link <= link + 1'b1;
          end
        end
        S_TRL: if (fire) begin
          ev_done      <= 1'b1;
          ev_err_links <= errs;
          evnum        <= evnum + 1'b1;
          state        <= S_WAIT;
        end
        default: state <= S_WAIT;
      endcase
    end
  end

  a_pop_valid: assert property (@(posedge clk) disable iff (rst) (d_pop & ~d_valid) == '0);
endmodule
