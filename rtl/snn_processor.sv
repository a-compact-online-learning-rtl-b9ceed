// snn_processor: compact online-learning spiking neural network processor.
//
// A single-layer excitatory-inhibitory network: N_PRE input neurons fully
// connected to N_POST leaky integrate-and-fire excitatory neurons with
// plastic weights, and lateral inhibition between the excitatory neurons.
// Learning is trace-based STDP: an input spike depresses the weights of its
// row by the post traces (LTD), an excitatory spike potentiates the weights of
// its column by the pre traces (LTP).
//
// Structure (left to right in the data flow):
//   aer_input -> input event_fifo -> event_controller -> output event_fifo
//   -> aer_output; the controller drives the pre-neuron, post-neuron and
//   synapse memories through rw_select_bus, and the integrate, leaky and fire
//   handlers compute the new states from the memory read data.
// All states live in the three memories and are updated one word per clock,
// and the controller only works when an event is waiting.
//
// Interface:
//   aer_in_req/aer_in_addr/aer_in_ack    four-phase AER input, {ts, id}
//   aer_out_req/aer_out_addr/aer_out_ack four-phase AER output, {ts, id}
//   cfg                                  hyper-parameters (snn_cfg_t)
//   host_*                               load/read back the memories while
//                                        busy is low (see rw_select_bus)
//   busy, cur_ts                         controller status, current timestep
// Input packets with the current timestamp are integrated; the first packet
// with a later timestamp ends the timestep (leak, fire, LTP, output spikes).
// A packet with id NULL_ID only carries time.  Timing: see event_controller.
// The block structure follows the published architecture; the interface
// protocols, the host port and all widths are this design's choices.
module snn_processor import snn_pkg::*; #(
  parameter int N_PRE          = 784,
  parameter int N_POST         = 100,
  parameter int IN_FIFO_DEPTH  = 16,
  parameter int OUT_FIFO_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // AER input
  input  logic              aer_in_req,
  input  aer_pkt_t          aer_in_addr,
  output logic              aer_in_ack,
  // AER output
  output logic              aer_out_req,
  output aer_pkt_t          aer_out_addr,
  input  logic              aer_out_ack,
  // configuration
  input  snn_cfg_t          cfg,
  // host access to the memories
  input  logic              host_re,
  input  logic              host_we,
  input  mem_sel_t          host_sel,
  input  maddr_t            host_addr,
  input  logic [POST_W-1:0] host_wdata,
  output logic [POST_W-1:0] host_rdata,
  // status
  output logic              busy,
  output ts_t               cur_ts
);

  // AER input -> input FIFO
  logic     in_push, in_full, in_pop, in_empty;
  aer_pkt_t in_wdata, in_rdata;
  // controller -> output FIFO -> AER output
  logic     out_push, out_full, out_pop, out_empty;
  aer_pkt_t out_wdata, out_rdata;
  // memories
  mem_ctl_t    pre_ctl_c, post_ctl_c, syn_ctl_c;
  mem_ctl_t    pre_ctl, post_ctl, syn_ctl;
  trace_t      pre_wdata, pre_rdata;
  post_state_t post_wdata, post_rdata;
  weight_t     syn_wdata, syn_rdata;
  phase_t      phase_w;
  cnt_t        n_fired_prev;
  // handler results
  post_state_t int_post, leak_post, fire_post;
  weight_t     int_w, fire_w;
  trace_t      int_xpre, leak_xpre;
  logic        spike;

  aer_input u_aer_in (
    .clk, .rst_n,
    .aer_req    (aer_in_req),
    .aer_addr   (aer_in_addr),
    .aer_ack    (aer_in_ack),
    .fifo_full  (in_full),
    .fifo_push  (in_push),
    .fifo_wdata (in_wdata)
  );

  event_fifo #(.WIDTH(AER_W), .DEPTH(IN_FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n,
    .push (in_push), .wdata (in_wdata), .full (in_full),
    .pop  (in_pop),  .rdata (in_rdata), .empty (in_empty)
  );

  event_controller #(.N_PRE(N_PRE), .N_POST(N_POST)) u_ctrl (
    .clk, .rst_n,
    .learn_en (cfg.learn_en),
    .in_empty, .in_pkt (in_rdata), .in_pop,
    .out_full, .out_push, .out_pkt (out_wdata),
    .pre_ctl (pre_ctl_c), .post_ctl (post_ctl_c), .syn_ctl (syn_ctl_c),
    .phase_w, .spike, .n_fired_prev, .cur_ts, .busy
  );

  event_fifo #(.WIDTH(AER_W), .DEPTH(OUT_FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .push (out_push), .wdata (out_wdata), .full (out_full),
    .pop  (out_pop),  .rdata (out_rdata), .empty (out_empty)
  );

  aer_output u_aer_out (
    .clk, .rst_n,
    .fifo_empty (out_empty),
    .fifo_pop   (out_pop),
    .fifo_rdata (out_rdata),
    .aer_req    (aer_out_req),
    .aer_addr   (aer_out_addr),
    .aer_ack    (aer_out_ack)
  );

  rw_select_bus u_bus (
    .clk, .rst_n,
    .ctl_idle (!busy),
    .phase_w,
    .pre_ctl_c, .post_ctl_c, .syn_ctl_c,
    .int_post, .int_w, .int_xpre,
    .leak_post, .leak_xpre,
    .fire_post, .fire_w,
    .host_re, .host_we, .host_sel, .host_addr, .host_wdata, .host_rdata,
    .pre_ctl, .post_ctl, .syn_ctl,
    .pre_wdata, .post_wdata, .syn_wdata,
    .pre_rdata, .post_rdata, .syn_rdata
  );

  pre_neuron_sram #(.N_PRE(N_PRE)) u_pre_mem (
    .clk, .ctl (pre_ctl), .wdata (pre_wdata), .rdata (pre_rdata)
  );

  post_neuron_sram #(.N_POST(N_POST)) u_post_mem (
    .clk, .ctl (post_ctl), .wdata (post_wdata), .rdata (post_rdata)
  );

  synapse_sram #(.N_PRE(N_PRE), .N_POST(N_POST)) u_syn_mem (
    .clk, .ctl (syn_ctl), .wdata (syn_wdata), .rdata (syn_rdata)
  );

  integrate_handler u_int (
    .cfg, .post (post_rdata), .w (syn_rdata), .x_pre (pre_rdata),
    .post_new (int_post), .w_new (int_w), .x_pre_new (int_xpre)
  );

  leaky_handler u_leak (
    .cfg, .post (post_rdata), .x_pre (pre_rdata), .n_fired (n_fired_prev),
    .post_new (leak_post), .x_pre_new (leak_xpre)
  );

  fire_handler u_fire (
    .cfg, .post (post_rdata), .w (syn_rdata), .x_pre (pre_rdata),
    .spike_out (spike), .post_new (fire_post), .w_new (fire_w)
  );

endmodule
