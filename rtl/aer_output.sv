// aer_output: sender on the asynchronous AER output bus.
//
// When the output event FIFO holds a packet and the bus is free, the packet
// is popped into an address register that drives aer_addr, and aer_req is
// raised one clock later, so the address is stable before the request.  The
// receiver's aer_ack is synchronised by SYNC_STAGES flops; when it is seen
// high, aer_req is dropped, and when it is seen low again the next packet may
// be sent (four-phase handshake).
//
// Interface: fifo_empty/fifo_pop/fifo_rdata towards the FIFO, aer_req/
// aer_addr/aer_ack towards the receiver.  aer_addr is held from before
// aer_req rises until the acknowledge has fallen.
// The REQ, ACK and ADDR port names follow the published block diagram; the
// protocol and the synchroniser are this design's choices.
module aer_output import snn_pkg::*; #(
  parameter int SYNC_STAGES = 2
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     fifo_empty,
  output logic     fifo_pop,
  input  aer_pkt_t fifo_rdata,
  output logic     aer_req,
  output aer_pkt_t aer_addr,
  input  logic     aer_ack
);

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_REQ, S_WAIT_ACK_LOW} state_t;
  state_t                 state;
  logic [SYNC_STAGES-1:0] ack_sync;
  logic                   ack_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ack_sync <= '0;
    else        ack_sync <= {ack_sync[SYNC_STAGES-2:0], aer_ack};
  end
  assign ack_s = ack_sync[SYNC_STAGES-1];

  assign fifo_pop = (state == S_IDLE) && !fifo_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      aer_req  <= 1'b0;
      aer_addr <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (fifo_pop) begin
          aer_addr <= fifo_rdata;
          state    <= S_SETUP;
        end
        S_SETUP: if (!ack_s) begin
          aer_req <= 1'b1;
          state   <= S_REQ;
        end
        S_REQ: if (ack_s) begin
          aer_req <= 1'b0;
          state   <= S_WAIT_ACK_LOW;
        end
        S_WAIT_ACK_LOW: if (!ack_s) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
