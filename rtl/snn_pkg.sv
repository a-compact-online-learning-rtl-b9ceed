// snn_pkg: types and constants shared by the online-learning SNN processor.
//
// The processor keeps every neuron and synapse state in memories and updates
// them one word at a time.  This package fixes the word formats used on those
// memories and on the AER (address-event) buses, the configuration register
// set, the handler phase encoding, and the saturating fixed-point helpers used
// by the three event handlers.
//
// What follows the published design: an AER packet carries a timestamp and a
// neuron ID; the stored states are membrane voltage, pre trace, post trace and
// synapse weight; the leak uses a multiply by dt/tau.  What is this design's
// own choice: every bit width, the Q0.8 encoding of dt/tau and of the learning
// rates, the 'fired' flag kept with each excitatory neuron, and the NULL_ID
// packet that carries a timestamp but no spike.
package snn_pkg;

  // ---------------------------------------------------------------- widths
  localparam int TS_W   = 8;   // timestamp (timestep index, wraps modulo 256)
  localparam int ID_W   = 10;  // neuron ID on the AER buses (up to 1023 neurons)
  localparam int V_W    = 16;  // membrane voltage, signed
  localparam int W_W    = 8;   // synapse weight, unsigned
  localparam int X_W    = 8;   // trace, unsigned
  localparam int K_W    = 8;   // Q0.8 fractions: dt/tau and learning rates
  localparam int MA_W   = 20;  // memory address field in the control structs
  localparam int CNT_W  = ID_W;// spike counter (excitatory spikes per timestep)

  typedef logic [TS_W-1:0]        ts_t;
  typedef logic [ID_W-1:0]        nid_t;
  typedef logic signed [V_W-1:0]  volt_t;
  typedef logic [W_W-1:0]         weight_t;
  typedef logic [X_W-1:0]         trace_t;
  typedef logic [K_W-1:0]         frac_t;
  typedef logic [MA_W-1:0]        maddr_t;
  typedef logic [CNT_W-1:0]       cnt_t;

  // A packet with this ID carries only a timestamp: it advances time without
  // a spike (used to close the last timestep of a sample).
  localparam nid_t NULL_ID = '1;

  // AER packet: {timestamp, neuron ID}
  typedef struct packed {
    ts_t  ts;
    nid_t id;
  } aer_pkt_t;
  localparam int AER_W = $bits(aer_pkt_t);

  // One word of the post-neuron (excitatory neuron) memory.
  typedef struct packed {
    logic   fired;   // neuron fired in the last fire pass
    trace_t xpost;   // post-synaptic trace X_post
    volt_t  v;       // membrane voltage V
  } post_state_t;
  localparam int POST_W = $bits(post_state_t);

  // Hyper-parameters, held by the host.
  typedef struct packed {
    volt_t  v_thresh;     // firing threshold
    volt_t  v_rest;       // rest potential the voltage leaks towards
    volt_t  v_reset;      // voltage after a spike
    weight_t v_inh;       // inhibition per spike of another excitatory neuron
    frac_t  k_v;          // dt/tau_v    (Q0.8)
    frac_t  k_pre;        // dt/tau_pre  (Q0.8)
    frac_t  k_post;       // dt/tau_post (Q0.8)
    trace_t a_pre;        // trace increment of an input neuron's spike (ON_PRE)
    trace_t a_post;       // trace increment of an excitatory spike (ON_POST)
    frac_t  lr_pre;       // alpha_pre, LTP rate (Q0.8)
    frac_t  lr_post;      // alpha_post, LTD rate (Q0.8)
    logic   learn_en;     // 1: online learning, 0: inference only
  } snn_cfg_t;

  // Which handler owns the memory write stage.
  typedef enum logic [2:0] {
    PH_IDLE      = 3'd0,
    PH_INT       = 3'd1,   // integrate handler (input spike, LTD)
    PH_LEAK_PRE  = 3'd2,   // leaky handler on the pre traces
    PH_LEAK_POST = 3'd3,   // leaky handler on the excitatory neurons
    PH_FIRE      = 3'd4,   // fire handler on the excitatory neurons
    PH_LTP       = 3'd5    // fire handler weight path (LTP of one column)
  } phase_t;

  // Host port memory select.
  typedef enum logic [1:0] {
    MEM_PRE  = 2'd0,
    MEM_POST = 2'd1,
    MEM_SYN  = 2'd2
  } mem_sel_t;

  // Control of one memory: synchronous read port and write port.
  typedef struct packed {
    logic   re;
    maddr_t raddr;
    logic   we;
    maddr_t waddr;
  } mem_ctl_t;

  // ------------------------------------------------- saturating arithmetic
  // Clamp a wide signed value into the voltage range.
  function automatic volt_t sat_v(input logic signed [V_W+8:0] x);
    localparam logic signed [V_W+8:0] VMAX = (1 <<< (V_W-1)) - 1;
    localparam logic signed [V_W+8:0] VMIN = -(1 <<< (V_W-1));
    if (x > VMAX)      return volt_t'(VMAX);
    else if (x < VMIN) return volt_t'(VMIN);
    else               return volt_t'(x);
  endfunction

  // Clamp a wide signed value into 0 .. 2^8-1 (weights and traces).
  function automatic logic [7:0] sat_u8(input logic signed [V_W+8:0] x);
    if (x > 255)    return 8'd255;
    else if (x < 0) return 8'd0;
    else            return x[7:0];
  endfunction

  // (a * f) >> 8 for an 8-bit unsigned value and a Q0.8 fraction.
  function automatic logic [7:0] mul_frac_floor(input logic [7:0] a, input frac_t f);
    logic [15:0] p;
    p = 16'(a) * 16'(f);
    return p[15:8];
  endfunction

  // ceil((a * f) / 256): a decay step that never leaves a residue.
  function automatic logic [7:0] mul_frac_ceil(input logic [7:0] a, input frac_t f);
    logic [16:0] p;
    p = 17'(a) * 17'(f) + 17'd255;
    return p[15:8];
  endfunction

endpackage
