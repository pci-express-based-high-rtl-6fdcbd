// sync_fifo: single-clock first-word-fall-through FIFO, the common buffer of this design.
//
// Storage is an array read synchronously into an output register, so it maps onto block
// RAM. Whenever the output register is empty (or is being popped) and the array holds a
// word, the next word is loaded; `valid` then shows it at `dout` until `pop`.
// `count` is the number of words held, output register included. A push when `full` is
// ignored; callers check `full` first. Reset (synchronous, active high) empties it.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     push,
  input  logic [W-1:0]             din,
  input  logic                     pop,
  output logic [W-1:0]             dout,
  output logic                     valid,
  output logic                     full,
  output logic [$clog2(DEPTH+2):0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]           mem [DEPTH];
  logic [AW-1:0]          wptr, rptr;
  localparam int unsigned MW = $clog2(DEPTH+1) + 1;
  logic [MW-1:0]          mcount;   // words in the array
  logic                   do_push, do_pop, load;

  assign full    = (mcount == MW'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && valid;
  assign load    = (mcount != 0) && (!valid || do_pop);
  assign count   = ($clog2(DEPTH+2)+1)'(mcount) + ($clog2(DEPTH+2)+1)'(valid);

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
    if (load)    dout <= mem[rptr];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr   <= '0;
      rptr   <= '0;
      mcount <= '0;
      valid  <= 1'b0;
    end else begin
      if (do_push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (load)    rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      mcount <= mcount + MW'(do_push) - MW'(load);
      if (load)        valid <= 1'b1;
      else if (do_pop) valid <= 1'b0;
    end
  end

  // a reader pops only a word it can see
  a_pop_valid: assert property (@(posedge clk) disable iff (rst) pop |-> valid);
endmodule
