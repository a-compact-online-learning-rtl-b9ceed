// leaky_handler: datapath of the end-of-timestep leak.
//
// Discrete-time leak of every stored state, applied once per timestep:
//   X* = X - ceil(X * k_x / 256)                  for X_pre and X_post
//   V* = V - floor((V - V_rest) * k_v / 256) - v_inh * (n_fired - fired)
// with k = 256 * dt / tau given as a Q0.8 fraction.  The last term is the
// lateral inhibition: every excitatory neuron that fired in the previous
// fire pass drives its own inhibitory neuron, which inhibits all other
// excitatory neurons, so a neuron receives v_inh for each spike except its
// own.  The controller presents one pre trace (phase PH_LEAK_PRE) or one
// excitatory neuron state (phase PH_LEAK_POST) per cycle; this unit is
// combinational.  The multiply-by-1/tau-then-subtract structure, the
// subtraction of v_inh in this stage and the leak equations follow the
// published design; the fixed-point coding, the rounding (down for V, up for
// traces so they reach zero) and the spike-count form of inhibition are this
// design's choices.
module leaky_handler import snn_pkg::*; (
  input  snn_cfg_t    cfg,
  input  post_state_t post,
  input  trace_t      x_pre,
  input  cnt_t        n_fired,
  output post_state_t post_new,
  output trace_t      x_pre_new
);
  localparam int PW = V_W + 20;
  localparam logic signed [PW-1:0] VMAX = PW'((1 <<< (V_W-1)) - 1);
  localparam logic signed [PW-1:0] VMIN = -PW'(1 <<< (V_W-1));
  logic signed [PW-1:0] diff, leak, inh, v_next;
  cnt_t                 n_other;

  always_comb begin
    diff    = PW'(post.v) - PW'(cfg.v_rest);
    leak    = (diff * PW'($signed({1'b0, cfg.k_v}))) >>> 8;
    n_other = n_fired - cnt_t'(post.fired);
    inh     = PW'($signed({1'b0, cfg.v_inh})) * PW'($signed({1'b0, n_other}));
    v_next  = PW'(post.v) - leak - inh;

    post_new       = post;
    post_new.v     = (v_next > VMAX) ? volt_t'(VMAX) :
                     (v_next < VMIN) ? volt_t'(VMIN) : volt_t'(v_next);
    post_new.xpost = post.xpost - mul_frac_ceil(post.xpost, cfg.k_post);
    x_pre_new      = x_pre - mul_frac_ceil(x_pre, cfg.k_pre);
  end
endmodule
