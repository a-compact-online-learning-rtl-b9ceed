// post_neuron_sram: memory of the excitatory (post-synaptic) neuron states.
//
// One post_state_t word {fired, X_post, V} per excitatory neuron.  The array has one
// synchronous read port and one write port, so a handler can read the next
// word while the previous one is written back.  Reads: re/raddr in cycle t,
// rdata valid in t+1 (held until the next read).  Writes: we/waddr/wdata take
// effect at the clock edge.  A read of the word being written returns the old
// value.  The contents are not reset, as in an SRAM; the host loads them.
// Keeping neuron states in memory and updating them one at a time follows the
// published design; the two-port organisation is this design's choice.
module post_neuron_sram import snn_pkg::*; #(
  parameter int N_POST = 100
) (
  input  logic     clk,
  input  mem_ctl_t ctl,
  input  post_state_t wdata,
  output post_state_t rdata
);
  localparam int AW = $clog2(N_POST);

  post_state_t mem [N_POST];

  always_ff @(posedge clk) begin
    if (ctl.we) mem[ctl.waddr[AW-1:0]] <= wdata;
    if (ctl.re) rdata <= mem[ctl.raddr[AW-1:0]];
  end

  a_addr_in_range: assert property (@(posedge clk)
    (ctl.re |-> ctl.raddr < maddr_t'(N_POST)) and (ctl.we |-> ctl.waddr < maddr_t'(N_POST)))
    else $error("post_neuron_sram: address out of range");
endmodule
