// read_dma: fetches the descriptor table (the list of free host super pages).
//
// After `start`, it reads `count` 64-bit entries from host memory at `tbl_addr`,
// `tbl_addr+8`, ..., one read request at a time: it raises `rq_valid` with the entry's
// address, waits for `rq_ready`, then for the completion (`cpl_valid`, `cpl_data`), and
// pushes the entry, the bus address of one free 1 MB super page, to the descriptor
// controller on `sp_valid`. A request is issued only while `sp_room` says the receiver
// can take the entry, so no completion is ever left without a place.
// Following the published readout: the Read DMA engine issues memory reads to forward the
// descriptor table. One outstanding read and the 8-byte entry format are this design's
// choice. `busy` is high from `start` until the last entry has been passed on.
module read_dma (
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic [63:0] tbl_addr,
  input  logic [31:0] count,
  // host memory read requests and completions
  output logic        rq_valid,
  output logic [63:0] rq_addr,
  input  logic        rq_ready,
  input  logic        cpl_valid,
  input  logic [63:0] cpl_data,
  // free super pages to the descriptor controller
  output logic        sp_valid,
  output logic [63:0] sp_addr,
  input  logic        sp_room,
  output logic        busy
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_CPL} state_t;
  state_t state;
  logic [31:0] left;

  assign rq_valid = (state == S_REQ) && sp_room;
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      rq_addr  <= '0;
      left     <= '0;
      sp_valid <= 1'b0;
      sp_addr  <= '0;
    end else begin
      sp_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start && count != 0) begin
          rq_addr <= tbl_addr;
          left    <= count;
          state   <= S_REQ;
        end
        S_REQ: if (rq_valid && rq_ready) state <= S_CPL;
        S_CPL: if (cpl_valid) begin
          sp_valid <= 1'b1;
          sp_addr  <= cpl_data;
          rq_addr  <= rq_addr + 64'd8;
          left     <= left - 1'b1;
          state    <= (left == 32'd1) ? S_IDLE : S_REQ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cpl_expected: assert property (@(posedge clk) disable iff (rst) cpl_valid |-> state == S_CPL);
endmodule
