// slc_fifo: slow-control FIFO interface of one Belle2link.
//
// Slow-control words for the front-end board are encoded by software (A7D8, A16D32 or a
// packet of a streamed file) and only pass through here. Software pushes words into the
// TX FIFO and then writes the `send` control bit: the FIFO is drained to the link's
// slow-control transmitter (`tx_valid`/`tx_ready`) until empty, so one send is one packet
// (e.g. 6 words for KLM thresholds, 100 words for ARICH firmware). Words returned by the
// front end (`rx_valid`) go into the RX FIFO for software to read. Each link has its own
// instance, so links can be accessed in parallel.
// Register window (word addresses, 32-bit):
//   0  W: push TX word                R: TX FIFO level
//   1  R: pop and return RX word (0 if empty)
//   2  R: {RX level[15:0], TX level[15:0]}
//   3  W: bit0 send, bit1 clear both FIFOs   R: {rx_dropped[15:0], 15'b0, sending}
// `acc_rdata` is combinational from `acc_addr`; the RX pop happens on `acc_re`.
// Following the published readout: a FIFO stores the addresses and parameters to send or
// received, controlled through registers; encoding is in software. Depth and register
// map are this design's choice.
module slc_fifo #(
  parameter int unsigned DEPTH = 128
) (
  input  logic        clk,
  input  logic        rst,
  // register access
  input  logic        acc_we,
  input  logic        acc_re,
  input  logic [1:0]  acc_addr,
  input  logic [31:0] acc_wdata,
  output logic [31:0] acc_rdata,
  // to the Belle2link slow-control transmitter
  output logic        tx_valid,
  output logic [31:0] tx_data,
  input  logic        tx_ready,
  // from the Belle2link slow-control receiver
  input  logic        rx_valid,
  input  logic [31:0] rx_data
);
  localparam int unsigned CW = $clog2(DEPTH+2) + 1;

  logic          clr, sending;
  logic          txq_valid, txq_full, rxq_valid, rxq_full;
  logic [CW-1:0] txq_count, rxq_count;
  logic [31:0]   rxq_dout;
  logic [15:0]   rx_dropped;
  logic          tx_pop, rx_pop;

  assign clr    = rst || (acc_we && acc_addr == 2'd3 && acc_wdata[1]);
  assign tx_pop = sending && txq_valid && tx_ready;
  assign rx_pop = acc_re && acc_addr == 2'd1 && rxq_valid;

  sync_fifo #(.W(32), .DEPTH(DEPTH)) u_tx (
    .clk, .rst(clr), .push(acc_we && acc_addr == 2'd0), .din(acc_wdata), .pop(tx_pop),
    .dout(tx_data), .valid(txq_valid), .full(txq_full), .count(txq_count));

  sync_fifo #(.W(32), .DEPTH(DEPTH)) u_rx (
    .clk, .rst(clr), .push(rx_valid), .din(rx_data), .pop(rx_pop),
    .dout(rxq_dout), .valid(rxq_valid), .full(rxq_full), .count(rxq_count));

  assign tx_valid = sending && txq_valid;

  always_comb begin
    unique case (acc_addr)
      2'd0: acc_rdata = 32'(txq_count);
      2'd1: acc_rdata = rxq_valid ? rxq_dout : 32'd0;
      2'd2: acc_rdata = {16'(rxq_count), 16'(txq_count)};
      default: acc_rdata = {rx_dropped, 15'd0, sending};
    endcase
  end

  always_ff @(posedge clk) begin
    if (clr) begin
      sending    <= 1'b0;
      rx_dropped <= '0;
    end else begin
      if (acc_we && acc_addr == 2'd3 && acc_wdata[0]) sending <= 1'b1;
      else if (sending && !txq_valid && txq_count == '0) sending <= 1'b0;
      if (rx_valid && rxq_full) rx_dropped <= rx_dropped + 1'b1;
    end
  end

  a_tx_hold: assert property (@(posedge clk) disable iff (clr) (tx_valid && !tx_ready) |=> tx_valid);
  // a push into a full TX FIFO is lost; software checks the level first
  a_tx_room: assert property (@(posedge clk) disable iff (clr) (acc_we && acc_addr == 2'd0) |-> !txq_full);
endmodule
