// link_buffer: the event-fragment FIFO of one Belle2link, with fragment checking.
//
// The Belle2link receiver delivers one 32-bit word per cycle with `in_sof` on the fragment
// header and `in_eof` on the trailer. This block checks the header magic, takes its 24-bit
// event tag, checks the trailer magic and its payload word count, and drops both words:
// only the payload goes on. Payload words are packed eight at a time, word 0 in bits
// [31:0], into 256-bit beats; the last beat of a fragment is zero-padded. Beats go to a
// data FIFO; one frag_status_t per fragment goes to a status FIFO when the trailer arrives.
// The event builder pops a status entry and exactly `nbeats` data beats per fragment.
//
// Overflow: a fragment whose header finds the status FIFO full is dropped whole; payload
// words that find the data FIFO full are dropped and the fragment is flagged `ovf`.
// `ovf_pulse` marks every drop. `busy` is raised while the data FIFO holds more than
// DEPTH-BUSY_MARGIN beats or the status FIFO is nearly full; it is this link's share of
// the busy handshake to the trigger system.
//
// Following the published readout: one FIFO per link, headers and trailers checked and
// removed before event building. This design's choices: fragment format (see pcie40_pkg),
// packing into 256-bit beats at the FIFO input, FIFO depths, busy threshold.
// Latency: a beat is in the data FIFO two cycles after its last word arrives.
// Fragments are admitted by the status FIFO's count (one entry kept spare), so its full
// flag is never read and lint reports it as unused.
module link_buffer
  import pcie40_pkg::*;
#(
  parameter int unsigned DEPTH       = 256,  // data FIFO beats (8 kB)
  parameter int unsigned NFRAG       = 64,   // status FIFO entries (fragments)
  parameter int unsigned BUSY_MARGIN = 64    // beats of headroom when busy rises
) (
  input  logic              clk,
  input  logic              rst,
  // from the Belle2link receiver
  input  logic              in_valid,
  input  logic [LW-1:0]     in_data,
  input  logic              in_sof,
  input  logic              in_eof,
  // to the event builder
  output logic              st_valid,
  output frag_status_t      st,
  input  logic              st_pop,
  output logic              d_valid,
  output logic [DW-1:0]     d_data,
  input  logic              d_pop,
  // monitoring
  output logic              busy,
  output logic              ovf_pulse,
  output logic              frag_done,   // a fragment was stored (pulse)
  output logic              frag_err     // ...and it had an error (pulse)
);
  typedef enum logic [0:0] {S_IDLE, S_BODY} state_t;
  state_t state;

  logic [DW-1:0]          pack;
  logic [$clog2(WPB)-1:0] pidx;
  logic                   pack_full;     // pack holds a complete beat to push
  logic                   pack_last;     // ...and it ends the fragment
  logic                   accept;        // current fragment is being stored
  frag_status_t           cur;

  // data FIFO
  logic                     dq_full;
  logic [$clog2(DEPTH+2):0] dq_count;
  logic                     dq_push;
  // status FIFO
  logic                     sq_full, sq_push;
  logic [$clog2(NFRAG+2):0] sq_count;
  frag_status_t             sq_din;

  sync_fifo #(.W(DW), .DEPTH(DEPTH)) u_data (
    .clk, .rst, .push(dq_push), .din(pack), .pop(d_pop),
    .dout(d_data), .valid(d_valid), .full(dq_full), .count(dq_count));

  sync_fifo #(.W($bits(frag_status_t)), .DEPTH(NFRAG)) u_stat (
    .clk, .rst, .push(sq_push), .din(sq_din), .pop(st_pop),
    .dout(st), .valid(st_valid), .full(sq_full), .count(sq_count));

  assign dq_push = pack_full && !dq_full;

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      pidx      <= '0;
      pack      <= '0;
      pack_full <= 1'b0;
      pack_last <= 1'b0;
      accept    <= 1'b0;
      cur       <= '0;
      sq_push   <= 1'b0;
      sq_din    <= '0;
      ovf_pulse <= 1'b0;
      frag_done <= 1'b0;
      frag_err  <= 1'b0;
    end else begin
      sq_push   <= 1'b0;
      ovf_pulse <= 1'b0;
      frag_done <= 1'b0;
      frag_err  <= 1'b0;
      // a packed beat leaves the pack register this cycle
      if (pack_full) begin
        pack_full <= 1'b0;
        if (dq_full) begin
          cur.ovf   <= 1'b1;
          ovf_pulse <= 1'b1;
        end else begin
          cur.nbeats <= cur.nbeats + 1'b1;
        end
        if (pack_last) begin
          // status goes out the cycle after the last beat is counted
          sq_push   <= 1'b1;
          sq_din    <= cur;
          sq_din.nbeats <= cur.nbeats + (dq_full ? 16'd0 : 16'd1);
          sq_din.ovf    <= cur.ovf | dq_full;
          frag_done <= 1'b1;
          frag_err  <= cur.hdr_err | cur.trl_err | cur.len_err | cur.ovf | dq_full;
          pack_last <= 1'b0;
        end
      end
      if (in_valid) begin
        unique case (state)
          S_IDLE: if (in_sof) begin
            state       <= S_BODY;
            // keep one status entry spare for a fragment still being closed
            accept      <= (sq_count < ($clog2(NFRAG+2)+1)'(NFRAG-1));
            if (sq_count >= ($clog2(NFRAG+2)+1)'(NFRAG-1)) ovf_pulse <= 1'b1;
            cur         <= '0;
            cur.tag     <= in_data[23:0];
            cur.hdr_err <= (in_data[31:24] != FRAG_HDR_MAGIC);
            pidx        <= '0;
            pack        <= '0;
          end
          S_BODY: if (in_eof) begin
            state       <= S_IDLE;
            cur.trl_err <= (in_data[31:24] != FRAG_TRL_MAGIC);
            cur.len_err <= (in_data[15:0] != cur.nwords);
            if (accept) begin
              if (pidx != 0) begin
                pack_full <= 1'b1;      // flush the partly filled beat
                pack_last <= 1'b1;
              end else begin
                // no partial beat: status can go out now (after any beat in flight)
                sq_push   <= 1'b1;
                sq_din    <= cur;
                sq_din.trl_err <= (in_data[31:24] != FRAG_TRL_MAGIC);
                sq_din.len_err <= (in_data[15:0] != cur.nwords);
                sq_din.nbeats  <= cur.nbeats + ((pack_full && !dq_full) ? 16'd1 : 16'd0);
                sq_din.ovf     <= cur.ovf | (pack_full && dq_full);
                frag_done <= 1'b1;
                frag_err  <= cur.hdr_err | (in_data[31:24] != FRAG_TRL_MAGIC) |
                             (in_data[15:0] != cur.nwords) | cur.ovf | (pack_full && dq_full);
              end
            end
          end else begin
            cur.nwords <= cur.nwords + 1'b1;
            pack[pidx*LW +: LW] <= in_data;
            pidx <= pidx + 1'b1;
            if (pidx == ($clog2(WPB))'(WPB-1)) begin
              pack_full <= accept;
            end
          end
        endcase
        // a full beat is emptied next cycle; clear the rest of it for padding
        if (state == S_BODY && !in_eof && pidx == '0) begin
          pack <= '0;
          pack[LW-1:0] <= in_data;
        end
      end
    end
  end

  assign busy = (dq_count > ($clog2(DEPTH+2)+1)'(DEPTH - BUSY_MARGIN)) ||
                (sq_count > ($clog2(NFRAG+2)+1)'(NFRAG - 4));

  // trailer word count applies to the payload only
  a_sof_eof: assert property (@(posedge clk) disable iff (rst) in_valid |-> !(in_sof && in_eof));
endmodule
