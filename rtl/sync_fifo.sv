// sync_fifo -- single-clock first-word-fall-through FIFO, used as the D-FIFOs
// (one per PE, 16-bit deltas) and the W-FIFO (64-bit weight beats) of EdgeDRNN.
//
// The paper names these FIFOs but does not describe them; this is the simplest
// circuit that does the job. `dout` shows the oldest entry while `empty` is low;
// `pop` removes it at the clock edge. `almost_full` rises two entries before
// full so that a producer with one pipeline stage in flight can stop in time.
// Push and pop in the same cycle are allowed, also on a full FIFO if pop is set.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic             almost_full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  wire do_push = push && (!full || pop);
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(do_push) - ($clog2(DEPTH+1))'(do_pop);
    end
  end

  assign dout        = mem[rptr];
  assign empty       = (count == 0);
  assign full        = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign almost_full = (count >= ($clog2(DEPTH+1))'(DEPTH-2));

  // Handshake rules: never push into a full FIFO (unless popping), never pop empty.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
