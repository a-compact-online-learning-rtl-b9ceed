// synapse_sram: memory of the excitatory synapse weights.
//
// N_PRE x N_POST words of W_W bits; the weight from input neuron i to
// excitatory neuron j is at address i*N_POST + j, so the integrate handler
// walks one row and the LTP pass walks one column.  One synchronous read port
// and one write port: re/raddr in cycle t give rdata in t+1; a write takes
// effect at the clock edge; a read of the word being written returns the old
// value.  The contents are not reset; the host loads the initial weights.
// Storing all synapse weights in one memory follows the published design; the
// layout and the two-port organisation are this design's choices.
module synapse_sram import snn_pkg::*; #(
  parameter int N_PRE  = 784,
  parameter int N_POST = 100
) (
  input  logic     clk,
  input  mem_ctl_t ctl,
  input  weight_t  wdata,
  output weight_t  rdata
);
  localparam int DEPTH = N_PRE * N_POST;
  localparam int AW    = $clog2(DEPTH);

  weight_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ctl.we) mem[ctl.waddr[AW-1:0]] <= wdata;
    if (ctl.re) rdata <= mem[ctl.raddr[AW-1:0]];
  end

  a_addr_in_range: assert property (@(posedge clk)
    (ctl.re |-> ctl.raddr < maddr_t'(DEPTH)) and (ctl.we |-> ctl.waddr < maddr_t'(DEPTH)))
    else $error("synapse_sram: address out of range");
endmodule
