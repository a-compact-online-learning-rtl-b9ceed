// integrate_handler: datapath run for every synapse of an input spike.
//
// When input neuron i spikes, the event controller walks all excitatory
// neurons j and presents, each cycle, the stored voltage and post trace of j,
// the weight w_ij and the trace of i.  This purely combinational unit returns
// the values to write back:
//   V_j   <- V_j + w_ij                         (integration)
//   w_ij  <- w_ij - (lr_post * X_post_j) >> 8   (LTD, only when learn_en)
//   X_pre <- X_pre + a_pre                      (trace step of the spike)
// All results saturate: V to the signed V_W range, weight and trace to
// 0..255.  The controller writes the X_pre result once per input spike.
// The three operations and where they sit follow the published handler
// datapath and learning rule (w = w - alpha_post * X_post on a pre spike); the
// Q0.8 learning rate, the saturation and the learn_en switch are this
// design's choices.  Latency: zero (the controller registers around it).
module integrate_handler import snn_pkg::*; (
  input  snn_cfg_t    cfg,
  input  post_state_t post,
  input  weight_t     w,
  input  trace_t      x_pre,
  output post_state_t post_new,
  output weight_t     w_new,
  output trace_t      x_pre_new
);
  logic signed [V_W+8:0] v_sum;
  logic signed [V_W+8:0] w_ltd;

  always_comb begin
    v_sum = (V_W+9)'(post.v) + (V_W+9)'($signed({1'b0, w}));
    w_ltd = (V_W+9)'($signed({1'b0, w})) - (V_W+9)'($signed({1'b0, mul_frac_floor(post.xpost, cfg.lr_post)}));

    post_new       = post;
    post_new.v     = sat_v(v_sum);
    w_new          = cfg.learn_en ? sat_u8(w_ltd) : w;
    x_pre_new      = sat_u8((V_W+9)'($signed({1'b0, x_pre})) + (V_W+9)'($signed({1'b0, cfg.a_pre})));
  end
endmodule
