// pre_neuron_sram: memory of the input (pre-synaptic) neuron traces X_pre.
//
// One word of X_W bits per input neuron, N_PRE words.  The array has one
// synchronous read port and one write port, so a handler can read the next
// word while the previous one is written back.  Reads: re/raddr in cycle t,
// rdata valid in t+1 (held until the next read).  Writes: we/waddr/wdata take
// effect at the clock edge.  A read of the word being written returns the old
// value.  The contents are not reset, as in an SRAM; the host loads them.
// Keeping neuron states in memory and updating them one at a time follows the
// published design; the two-port organisation is this design's choice.
module pre_neuron_sram import snn_pkg::*; #(
  parameter int N_PRE = 784
) (
  input  logic     clk,
  input  mem_ctl_t ctl,
  input  trace_t   wdata,
  output trace_t   rdata
);
  localparam int AW = $clog2(N_PRE);

  trace_t mem [N_PRE];

  always_ff @(posedge clk) begin
    if (ctl.we) mem[ctl.waddr[AW-1:0]] <= wdata;
    if (ctl.re) rdata <= mem[ctl.raddr[AW-1:0]];
  end

  a_addr_in_range: assert property (@(posedge clk)
    (ctl.re |-> ctl.raddr < maddr_t'(N_PRE)) and (ctl.we |-> ctl.waddr < maddr_t'(N_PRE)))
    else $error("pre_neuron_sram: address out of range");
endmodule
