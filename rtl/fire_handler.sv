// fire_handler: datapath of the fire pass and of the LTP weight update.
//
// Neuron path (phase PH_FIRE, one excitatory neuron per cycle):
//   spike_out = V > v_thresh
//   V      <- spike_out ? v_reset : V
//   X_post <- spike_out ? X_post + a_post : X_post
//   fired  <- spike_out
// Weight path (phase PH_LTP, one synapse of the spiking neuron per cycle):
//   w_ij <- w_ij + (lr_pre * X_pre_i) >> 8       (LTP, only when learn_en)
// Combinational; results saturate.  The comparator against v_thresh, the
// reset multiplexer, the gated trace step and the weight update on a post
// spike follow the published design.  The published datapath draws the weight
// update as a subtractor while the learning rule adds alpha_pre * X_pre; the
// rule is followed here.  A separate v_reset is kept next to v_rest (the
// published text resets to the rest potential, its figures to V_reset).
module fire_handler import snn_pkg::*; (
  input  snn_cfg_t    cfg,
  input  post_state_t post,
  input  weight_t     w,
  input  trace_t      x_pre,
  output logic        spike_out,
  output post_state_t post_new,
  output weight_t     w_new
);
  logic signed [V_W+8:0] w_ltp;
  logic signed [V_W+8:0] x_inc;

  always_comb begin
    spike_out = post.v > cfg.v_thresh;
    x_inc     = (V_W+9)'($signed({1'b0, post.xpost})) + (V_W+9)'($signed({1'b0, cfg.a_post}));
    w_ltp     = (V_W+9)'($signed({1'b0, w})) + (V_W+9)'($signed({1'b0, mul_frac_floor(x_pre, cfg.lr_pre)}));

    post_new.fired = spike_out;
    post_new.v     = spike_out ? cfg.v_reset : post.v;
    post_new.xpost = spike_out ? sat_u8(x_inc) : post.xpost;
    w_new          = cfg.learn_en ? sat_u8(w_ltp) : w;
  end
endmodule
