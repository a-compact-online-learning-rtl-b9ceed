// aer_input: receiver of the asynchronous AER input bus.
//
// A sender presents a packet {timestamp, neuron ID} on aer_addr and raises
// aer_req.  aer_req is brought into the clock domain by a SYNC_STAGES-flop
// synchroniser.  When the synchronised request is high, the packet is pushed
// into the input event FIFO and aer_ack is raised; aer_ack is dropped once the
// request has fallen again (four-phase handshake).  If the FIFO is full the
// acknowledge is withheld, which stalls the sender until there is room.
//
// Interface: aer_req/aer_addr/aer_ack towards the sender, fifo_full/
// fifo_push/fifo_wdata towards the FIFO.  The sender must hold aer_addr
// stable while aer_req is high.  Timing: ack rises SYNC_STAGES+1 clocks after
// req at the earliest and falls SYNC_STAGES+1 clocks after req falls.
// The port names REQ, ACK and ADDR follow the published block diagram; the
// four-phase protocol and the synchroniser are this design's choices.
module aer_input import snn_pkg::*; #(
  parameter int SYNC_STAGES = 2
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     aer_req,
  input  aer_pkt_t aer_addr,
  output logic     aer_ack,
  input  logic     fifo_full,
  output logic     fifo_push,
  output aer_pkt_t fifo_wdata
);

  logic [SYNC_STAGES-1:0] req_sync;
  logic                   req_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) req_sync <= '0;
    else        req_sync <= {req_sync[SYNC_STAGES-2:0], aer_req};
  end
  assign req_s = req_sync[SYNC_STAGES-1];

  // Accept a packet when a request is pending, not yet acknowledged, and the
  // FIFO has room.
  assign fifo_push  = req_s && !aer_ack && !fifo_full;
  assign fifo_wdata = aer_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         aer_ack <= 1'b0;
    else if (fifo_push) aer_ack <= 1'b1;
    else if (!req_s)    aer_ack <= 1'b0;
  end

endmodule
