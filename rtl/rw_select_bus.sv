// rw_select_bus: read/write data selection between the state memories, the
// event handlers and the host.
//
// The three event handlers work on the same three memories (pre-neuron,
// post-neuron and synapse) but never at the same time.  The controller says,
// through phase_w, which handler owns the write stage; this unit steers that
// handler's results onto the write data of the memories the phase touches:
//   PH_INT       integrate handler: V_j, w_ij, X_pre_i
//   PH_LEAK_PRE  leaky handler: X_pre
//   PH_LEAK_POST leaky handler: {fired, X_post, V}
//   PH_FIRE      fire handler: {fired, X_post, V}
//   PH_LTP       fire handler: w_ij
// Read data go from the memories to all handlers unchanged.
// While the controller is idle (ctl_idle) the memories belong to the host
// port instead: host_re/host_we with host_sel, host_addr and host_wdata; the
// read data appear on host_rdata one clock after host_re (the low X_W or W_W
// bits for the pre and synapse memories).  Host requests while the
// controller is busy are ignored.
// A shared selection bus between memories and handlers follows the published
// block diagram; the phase encoding and the host port are this design's
// choices (the host port is how weights and states are loaded and read back).
module rw_select_bus import snn_pkg::*; (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ctl_idle,
  input  phase_t            phase_w,
  input  mem_ctl_t          pre_ctl_c,
  input  mem_ctl_t          post_ctl_c,
  input  mem_ctl_t          syn_ctl_c,
  // handler results
  input  post_state_t       int_post,
  input  weight_t           int_w,
  input  trace_t            int_xpre,
  input  post_state_t       leak_post,
  input  trace_t            leak_xpre,
  input  post_state_t       fire_post,
  input  weight_t           fire_w,
  // host port
  input  logic              host_re,
  input  logic              host_we,
  input  mem_sel_t          host_sel,
  input  maddr_t            host_addr,
  input  logic [POST_W-1:0] host_wdata,
  output logic [POST_W-1:0] host_rdata,
  // memories
  output mem_ctl_t          pre_ctl,
  output mem_ctl_t          post_ctl,
  output mem_ctl_t          syn_ctl,
  output trace_t            pre_wdata,
  output post_state_t       post_wdata,
  output weight_t           syn_wdata,
  input  trace_t            pre_rdata,
  input  post_state_t       post_rdata,
  input  weight_t           syn_rdata
);

  mem_sel_t host_rsel;
  logic     host_re_g, host_we_g;

  assign host_re_g = host_re && ctl_idle;
  assign host_we_g = host_we && ctl_idle;

  always_comb begin
    // controller by default
    pre_ctl    = pre_ctl_c;
    post_ctl   = post_ctl_c;
    syn_ctl    = syn_ctl_c;
    pre_wdata  = leak_xpre;
    post_wdata = leak_post;
    syn_wdata  = fire_w;
    unique case (phase_w)
      PH_INT: begin
        pre_wdata  = int_xpre;
        post_wdata = int_post;
        syn_wdata  = int_w;
      end
      PH_LEAK_PRE:  pre_wdata  = leak_xpre;
      PH_LEAK_POST: post_wdata = leak_post;
      PH_FIRE:      post_wdata = fire_post;
      PH_LTP:       syn_wdata  = fire_w;
      default: ;
    endcase
    // host while the controller is idle
    if (ctl_idle) begin
      pre_ctl  = '{re: host_re_g && host_sel == MEM_PRE,  raddr: host_addr,
                   we: host_we_g && host_sel == MEM_PRE,  waddr: host_addr};
      post_ctl = '{re: host_re_g && host_sel == MEM_POST, raddr: host_addr,
                   we: host_we_g && host_sel == MEM_POST, waddr: host_addr};
      syn_ctl  = '{re: host_re_g && host_sel == MEM_SYN,  raddr: host_addr,
                   we: host_we_g && host_sel == MEM_SYN,  waddr: host_addr};
      pre_wdata  = host_wdata[X_W-1:0];
      post_wdata = post_state_t'(host_wdata);
      syn_wdata  = host_wdata[W_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         host_rsel <= MEM_PRE;
    else if (host_re_g) host_rsel <= host_sel;
  end

  always_comb begin
    unique case (host_rsel)
      MEM_POST: host_rdata = POST_W'(post_rdata);
      MEM_SYN:  host_rdata = POST_W'(syn_rdata);
      default:  host_rdata = POST_W'(pre_rdata);
    endcase
  end

  a_host_only_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (host_re || host_we) |-> ctl_idle)
    else $warning("rw_select_bus: host access while the controller is busy is ignored");

endmodule
