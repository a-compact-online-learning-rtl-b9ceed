// event_controller: event-driven sequencer of the SNN processor.
//
// The controller is idle until the input event FIFO holds a packet.  It then
// compares the packet's timestamp with the current timestep cur_ts:
//  * equal     - the packet is popped; if it names an input neuron i the
//                integrate handler is run over all N_POST excitatory neurons
//                (V_j += w_ij, LTD of w_ij, one X_pre_i step).  A NULL_ID
//                packet is popped and does nothing.
//  * different - the current timestep has ended: the leaky handler is run
//                over all N_PRE pre traces and all N_POST excitatory neurons,
//                then the fire handler over all excitatory neurons.  When a
//                neuron spikes, its LTP pass runs at once over all N_PRE
//                synapses of that neuron (if learn_en) and the packet
//                {cur_ts, j} is pushed into the output FIFO (waiting while it
//                is full).  cur_ts then advances by one and the packet is
//                examined again, so a jump of k timesteps runs k leak/fire
//                passes.
// Memory access is a two-stage pipeline: in the read stage the controller
// issues the addresses of element idx; one clock later the SRAM data sit at
// the handler inputs and the write stage writes the handler results back to
// the same addresses.  One neuron or synapse is processed per clock.
// phase_w tells the data selection bus which handler's results to write.
//
// Cycle counts (cycles with busy high; one idle cycle precedes each event):
// one input spike N_POST+1; a timestep end N_PRE+2*N_POST+2, plus N_PRE+2
// per output spike with learning on (2 without), plus any wait for the
// output FIFO.
// The integrate / leak / fire order and the timestamp comparison follow the
// published design; the pipeline, NULL_ID, and the immediate LTP pass for each
// spiking neuron are this design's choices.
module event_controller import snn_pkg::*; #(
  parameter int N_PRE  = 784,
  parameter int N_POST = 100,
  localparam int NMAX  = (N_PRE > N_POST) ? N_PRE : N_POST,
  localparam int IW    = $clog2(NMAX + 1)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     learn_en,
  // input event FIFO (show-ahead)
  input  logic     in_empty,
  input  aer_pkt_t in_pkt,
  output logic     in_pop,
  // output event FIFO
  input  logic     out_full,
  output logic     out_push,
  output aer_pkt_t out_pkt,
  // memory control towards the data selection bus
  output mem_ctl_t pre_ctl,
  output mem_ctl_t post_ctl,
  output mem_ctl_t syn_ctl,
  output phase_t   phase_w,
  // fire handler result for the neuron in the write stage
  input  logic     spike,
  // excitatory spikes of the previous fire pass (for inhibition)
  output cnt_t     n_fired_prev,
  output ts_t      cur_ts,
  output logic     busy
);

  typedef enum logic [2:0] {
    S_IDLE, S_INT, S_LEAK_PRE, S_LEAK_POST, S_FIRE, S_LTP, S_EMIT, S_ADV
  } state_t;

  state_t        state;
  logic [IW-1:0] idx;          // element issued in the read stage
  logic [IW-1:0] idx_w;        // element in the write stage
  logic          valid_w;
  logic [IW-1:0] resume_idx;   // fire pass resumes here after an LTP pass
  nid_t          pre_i;        // input neuron being integrated
  logic [IW-1:0] post_j;       // spiking excitatory neuron
  cnt_t          n_fired_cur;
  maddr_t        pre_raddr, post_raddr, syn_raddr;
  maddr_t        pre_waddr, post_waddr, syn_waddr;
  logic          pre_re, post_re, syn_re;
  logic          issue, last_issue;
  phase_t        phase_r;
  logic          fire_spike_w;

  localparam logic [IW-1:0] PRE_LAST  = IW'(N_PRE - 1);
  localparam logic [IW-1:0] POST_LAST = IW'(N_POST - 1);
  localparam logic [IW-1:0] POST_END  = IW'(N_POST);

  assign fire_spike_w = valid_w && (phase_w == PH_FIRE) && spike;

  // ------------------------------------------------------------ read stage
  always_comb begin
    pre_re     = 1'b0;
    post_re    = 1'b0;
    syn_re     = 1'b0;
    pre_raddr  = '0;
    post_raddr = '0;
    syn_raddr  = '0;
    phase_r    = PH_IDLE;
    issue      = 1'b0;
    last_issue = 1'b0;
    unique case (state)
      S_INT: begin
        issue      = 1'b1;
        last_issue = (idx == POST_LAST);
        phase_r    = PH_INT;
        pre_re     = 1'b1;
        post_re    = 1'b1;
        syn_re     = 1'b1;
        pre_raddr  = maddr_t'(pre_i);
        post_raddr = maddr_t'(idx);
        syn_raddr  = maddr_t'(pre_i) * maddr_t'(N_POST) + maddr_t'(idx);
      end
      S_LEAK_PRE: begin
        issue      = 1'b1;
        last_issue = (idx == PRE_LAST);
        phase_r    = PH_LEAK_PRE;
        pre_re     = 1'b1;
        pre_raddr  = maddr_t'(idx);
      end
      S_LEAK_POST: begin
        issue      = 1'b1;
        last_issue = (idx == POST_LAST);
        phase_r    = PH_LEAK_POST;
        post_re    = 1'b1;
        post_raddr = maddr_t'(idx);
      end
      S_FIRE: begin
        issue      = (idx < POST_END) && !fire_spike_w;
        phase_r    = PH_FIRE;
        post_re    = issue;
        post_raddr = maddr_t'(idx);
      end
      S_LTP: begin
        issue      = 1'b1;
        last_issue = (idx == PRE_LAST);
        phase_r    = PH_LTP;
        pre_re     = 1'b1;
        syn_re     = 1'b1;
        pre_raddr  = maddr_t'(idx);
        syn_raddr  = maddr_t'(idx) * maddr_t'(N_POST) + maddr_t'(post_j);
      end
      default: ;
    endcase
  end

  // ----------------------------------------------------------- write stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_w    <= 1'b0;
      phase_w    <= PH_IDLE;
      idx_w      <= '0;
      pre_waddr  <= '0;
      post_waddr <= '0;
      syn_waddr  <= '0;
    end else begin
      valid_w    <= issue;
      phase_w    <= issue ? phase_r : PH_IDLE;
      idx_w      <= idx;
      pre_waddr  <= pre_raddr;
      post_waddr <= post_raddr;
      syn_waddr  <= syn_raddr;
    end
  end

  always_comb begin
    pre_ctl  = '{re: pre_re,  raddr: pre_raddr,  we: 1'b0, waddr: pre_waddr};
    post_ctl = '{re: post_re, raddr: post_raddr, we: 1'b0, waddr: post_waddr};
    syn_ctl  = '{re: syn_re,  raddr: syn_raddr,  we: 1'b0, waddr: syn_waddr};
    if (valid_w) begin
      unique case (phase_w)
        PH_INT: begin
          post_ctl.we = 1'b1;
          syn_ctl.we  = 1'b1;
          pre_ctl.we  = (idx_w == '0);   // X_pre_i stepped once per spike
        end
        PH_LEAK_PRE:  pre_ctl.we  = 1'b1;
        PH_LEAK_POST: post_ctl.we = 1'b1;
        PH_FIRE:      post_ctl.we = 1'b1;
        PH_LTP:       syn_ctl.we  = 1'b1;
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------- sequencer
  assign in_pop   = (state == S_IDLE) && !in_empty && (in_pkt.ts == cur_ts);
  assign out_push = (state == S_EMIT) && !out_full;
  assign out_pkt  = '{ts: cur_ts, id: nid_t'(post_j)};
  assign busy     = (state != S_IDLE) || valid_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      idx          <= '0;
      resume_idx   <= '0;
      pre_i        <= '0;
      post_j       <= '0;
      cur_ts       <= '0;
      n_fired_cur  <= '0;
      n_fired_prev <= '0;
    end else begin
      if (issue) idx <= last_issue ? '0 : idx + 1'b1;
      unique case (state)
        S_IDLE: if (!in_empty) begin
          if (in_pkt.ts == cur_ts) begin
            if (in_pkt.id != NULL_ID && in_pkt.id < nid_t'(N_PRE)) begin
              pre_i <= in_pkt.id;
              state <= S_INT;
            end
          end else begin
            state <= S_LEAK_PRE;
          end
        end
        S_INT:       if (last_issue) state <= S_IDLE;
        S_LEAK_PRE:  if (last_issue) state <= S_LEAK_POST;
        S_LEAK_POST: if (last_issue) state <= S_FIRE;
        S_FIRE: begin
          if (fire_spike_w) begin
            post_j      <= idx_w;
            resume_idx  <= idx_w + 1'b1;
            n_fired_cur <= n_fired_cur + 1'b1;
            idx         <= '0;
            state       <= learn_en ? S_LTP : S_EMIT;
          end else if (idx == POST_END) begin
            state <= S_ADV;
          end
        end
        S_LTP:  if (last_issue) state <= S_EMIT;
        S_EMIT: if (!out_full) begin
          idx   <= resume_idx;
          state <= S_FIRE;
        end
        S_ADV: begin
          cur_ts       <= cur_ts + 1'b1;
          n_fired_prev <= n_fired_cur;
          n_fired_cur  <= '0;
          idx          <= '0;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_pass_at_a_time: assert property (@(posedge clk) disable iff (!rst_n)
    in_pop |-> !out_push)
    else $error("event_controller: pop and emit together");
  a_no_fire_spike_outside_fire: assert property (@(posedge clk) disable iff (!rst_n)
    fire_spike_w |-> (state == S_FIRE))
    else $error("event_controller: spike seen outside the fire pass");

endmodule
