// event_fifo: synchronous FIFO that buffers AER packets.
//
// The processor has two of these, one between the AER input and the event
// controller and one between the controller and the AER output, so that
// events arriving (or leaving) while the controller is busy are not lost.
// The read side is show-ahead: rdata is the oldest entry whenever empty is
// low, so the controller can inspect the head packet's timestamp before it
// decides to pop it.
//
// Interface: push/wdata/full on the write side, pop/rdata/empty on the read
// side.  A push while full (without a pop) or a pop while empty is ignored
// and flagged by an assertion.  A push and a pop in the same cycle are both
// done, also when the FIFO is full.  Timing: an entry pushed in cycle t is visible on rdata from t+1.
// Buffering the AER packets in two FIFOs follows the published design; the
// depth (default 16) and the show-ahead read are this design's choices.
module event_fifo #(
  parameter int WIDTH = 18,
  parameter int DEPTH = 16,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_push, do_pop;
  logic [CW-1:0]    count;

  assign full    = (count == CW'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && (!full || do_pop);
  assign do_pop  = pop && !empty;
  assign rdata   = mem[rptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= next_ptr(wptr);
      if (do_pop)  rptr <= next_ptr(rptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop))
    else $error("event_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("event_fifo: pop while empty");

endmodule
