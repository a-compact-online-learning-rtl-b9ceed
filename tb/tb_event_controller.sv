// tb_event_controller: self-checking test of event_controller on its own.
// The test plays the two FIFOs and the fire handler.  It sends input packets
// over several timesteps (spikes, a NULL_ID packet, an out-of-range ID and a
// timestamp gap), makes chosen excitatory neurons spike, and holds the output
// FIFO full for a while.  Every write-stage memory operation is recorded and
// compared, in order, with the operation list predicted here from the
// controller's rules; output packets and cycle counts per timestep are
// checked too.  The sequence is run with learning on and again with it off.
module tb_event_controller;
  import snn_pkg::*;
  localparam int N_PRE  = 6;
  localparam int N_POST = 4;

  logic     clk = 0, rst_n = 1;
  logic     learn_en = 1;
  logic     in_empty;
  aer_pkt_t in_pkt;
  logic     in_pop;
  logic     out_full = 0;
  logic     out_push;
  aer_pkt_t out_pkt;
  mem_ctl_t pre_ctl, post_ctl, syn_ctl;
  phase_t   phase_w;
  logic     spike;
  cnt_t     n_fired_prev;
  ts_t      cur_ts;
  logic     busy;

  int checks = 0, failures = 0;

  event_controller #(.N_PRE(N_PRE), .N_POST(N_POST)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // neurons that spike: chosen by timestep and index
  function automatic bit fires(input int ts, input int j);
    return (ts == 0 && (j == 1 || j == 3)) || (ts == 2 && j == 0) || (ts == 3 && j == 3) || (ts == 4 && j == 2);
  endfunction

  // input FIFO model
  aer_pkt_t inq[$];
  task automatic refresh_head();
    in_empty <= (inq.size() == 0);
    in_pkt   <= (inq.size() == 0) ? aer_pkt_t'('0) : inq[0];
  endtask
  task automatic send(input aer_pkt_t p);
    inq.push_back(p);
    refresh_head();
  endtask
  initial refresh_head();
  always @(posedge clk) if (rst_n && in_pop) begin
    void'(inq.pop_front());
    refresh_head();
  end

  // fire handler model: spike for the neuron in the write stage
  assign spike = (phase_w == PH_FIRE) && fires(int'(cur_ts), int'(post_ctl.waddr));

  // recorded operations: {phase, pre we/addr, post we/addr, syn we/addr}
  typedef struct packed {
    phase_t ph;
    logic   pwe; logic [9:0] pa;
    logic   qwe; logic [9:0] qa;
    logic   swe; logic [9:0] sa;
  } op_t;
  op_t got_ops[$], exp_ops[$];
  aer_pkt_t got_out[$], exp_out[$];
  int       n_full_stalls = 0;

  always @(posedge clk) if (rst_n) begin
    if (pre_ctl.we || post_ctl.we || syn_ctl.we)
      got_ops.push_back('{ph: phase_w,
                          pwe: pre_ctl.we,  pa: pre_ctl.we  ? pre_ctl.waddr[9:0]  : '0,
                          qwe: post_ctl.we, qa: post_ctl.we ? post_ctl.waddr[9:0] : '0,
                          swe: syn_ctl.we,  sa: syn_ctl.we  ? syn_ctl.waddr[9:0]  : '0});
    if (out_push) got_out.push_back(out_pkt);
    if (out_full && busy && phase_w == PH_IDLE && !in_pop) n_full_stalls++;
  end

  function automatic op_t mk(input phase_t ph, input int pa, input int qa, input int sa,
                             input bit pwe, input bit qwe, input bit swe);
    return '{ph: ph, pwe: pwe, pa: pwe ? 10'(pa) : '0, qwe: qwe, qa: qwe ? 10'(qa) : '0,
             swe: swe, sa: swe ? 10'(sa) : '0};
  endfunction

  // expected operations of one input spike and of one timestep end
  task automatic exp_int(input int i);
    for (int j = 0; j < N_POST; j++)
      exp_ops.push_back(mk(PH_INT, i, j, i * N_POST + j, j == 0, 1, 1));
  endtask

  function automatic int exp_step(input int ts, input bit learn);
    int cyc;
    cyc = N_PRE + 2 * N_POST + 2;
    for (int i = 0; i < N_PRE; i++)  exp_ops.push_back(mk(PH_LEAK_PRE, i, 0, 0, 1, 0, 0));
    for (int j = 0; j < N_POST; j++) exp_ops.push_back(mk(PH_LEAK_POST, 0, j, 0, 0, 1, 0));
    for (int j = 0; j < N_POST; j++) begin
      exp_ops.push_back(mk(PH_FIRE, 0, j, 0, 0, 1, 0));
      if (fires(ts, j)) begin
        if (learn) for (int i = 0; i < N_PRE; i++) exp_ops.push_back(mk(PH_LTP, 0, 0, i * N_POST + j, 0, 0, 1));
        exp_out.push_back('{ts: ts_t'(ts), id: nid_t'(j)});
        cyc += learn ? N_PRE + 2 : 2;
      end
    end
    return cyc;
  endfunction

  task automatic wait_idle();
    @(posedge clk);
    while (busy || !in_empty) @(posedge clk);
  endtask

  // one pass of the whole sequence
  task automatic run_sequence(input bit learn);
    int t0, cyc, exp_cyc;
    learn_en = learn;
    // timestep 0: inputs 2 and 5, then a NULL_ID and an out-of-range ID
    send('{ts: 8'd0, id: 10'd2});
    send('{ts: 8'd0, id: 10'd5});
    send('{ts: 8'd0, id: NULL_ID});
    send('{ts: 8'd0, id: 10'd9});
    exp_int(2);
    exp_int(5);
    wait_idle();
    check(cur_ts == 8'd0, "still in timestep 0");
    // a packet of timestep 1 ends timestep 0; hold the output FIFO full
    t0 = $time / 10;
    out_full = 1;
    send('{ts: 8'd1, id: 10'd0});
    exp_cyc = exp_step(0, learn);
    exp_int(0);
    repeat (N_PRE + 2 * N_POST + 40) @(posedge clk);
    out_full = 0;
    wait_idle();
    check(cur_ts == 8'd1, "timestep 1 reached");
    check(n_fired_prev == cnt_t'(2), "two spikes counted for inhibition");
    // timestep gap: packet at ts 4 runs three leak/fire passes
    send('{ts: 8'd4, id: NULL_ID});
    exp_cyc = exp_step(1, learn);
    exp_cyc = exp_step(2, learn);
    exp_cyc = exp_step(3, learn);
    wait_idle();
    check(cur_ts == 8'd4, "gap of three timesteps processed");
    // busy cycles of one timestep end with one spike (timestep 4 -> 5)
    send('{ts: 8'd5, id: NULL_ID});
    @(posedge clk);
    t0 = 0;
    while (!busy) @(posedge clk);
    while (busy) begin
      t0++;
      @(posedge clk);
    end
    exp_cyc = exp_step(4, learn);
    check(t0 == exp_cyc, $sformatf("timestep end took %0d cycles, expected %0d", t0, exp_cyc));
    wait_idle();
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_sequence(1'b1);
    // second pass with learning off (LTP skipped, LTD written unchanged)
    rst_n = 0;
    @(posedge clk);
    rst_n = 1;
    run_sequence(1'b0);
    repeat (5) @(posedge clk);
    check(got_ops.size() == exp_ops.size(), $sformatf("%0d ops, expected %0d", got_ops.size(), exp_ops.size()));
    for (int k = 0; k < got_ops.size() && k < exp_ops.size(); k++)
      check(got_ops[k] == exp_ops[k], $sformatf("op %0d: got %p exp %p", k, got_ops[k], exp_ops[k]));
    check(got_out.size() == exp_out.size(), $sformatf("%0d output packets, expected %0d", got_out.size(), exp_out.size()));
    for (int k = 0; k < got_out.size() && k < exp_out.size(); k++)
      check(got_out[k] == exp_out[k], $sformatf("output packet %0d", k));
    check(n_full_stalls > 0, "output FIFO full stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
