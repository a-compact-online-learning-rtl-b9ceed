// tb_snn_processor: end-to-end self-checking test of snn_processor at a reduced size (12 inputs, 5 neurons, small FIFOs).
//
// The test loads random weights and a resting network through the host port,
// then streams input spikes (random, Poisson-like: each input fires with a
// fixed probability per timestep) over the four-phase AER input, closes the
// last timestep with a NULL_ID packet, and collects the AER output with a
// receiver that answers after random delays.  A reference model of the
// network written here (integrate with LTD, leak with lateral inhibition,
// fire with LTP, all in the same fixed-point arithmetic) predicts every output
// packet and the final contents of all three memories, which are read back
// through the host port and compared word by word.  The run has a learning
// part and an inference part (learn_en low).  It also counts how often each
// mechanism happened - integration, LTD, leak, inhibition, firing, LTP,
// input back-pressure, output FIFO stall, skipped (empty) timesteps, NULL_ID
// packets, inference mode - and counts a failure for any that never did.
module tb_snn_processor;
  import snn_pkg::*;
  localparam int N_PRE     = 12;
  localparam int N_POST    = 5;
  localparam int T_LEARN   = 20;   // timesteps with learning on
  localparam int T_INFER   = 8;   // timesteps with learning off
  localparam int P_SPIKE   = 35;   // input spike probability, percent
  localparam int WATCHDOG  = 2000000;
  localparam int STIM      = 0;      // 0 random, 1 image-like, 2 heartbeat-like
  localparam int T_SAMPLE  = 1000;  // timesteps per presented sample
  localparam bit REQ_ALL   = 1;   // require every mechanism, not only the core ones

  logic              clk = 0, rst_n = 1;
  logic              aer_in_req = 0;
  aer_pkt_t          aer_in_addr = '0;
  logic              aer_in_ack;
  logic              aer_out_req;
  aer_pkt_t          aer_out_addr;
  logic              aer_out_ack = 0;
  snn_cfg_t          cfg;
  logic              host_re = 0, host_we = 0;
  mem_sel_t          host_sel = MEM_PRE;
  maddr_t            host_addr = '0;
  logic [POST_W-1:0] host_wdata = '0;
  logic [POST_W-1:0] host_rdata;
  logic              busy;
  ts_t               cur_ts;

  snn_processor #(.N_PRE(N_PRE), .N_POST(N_POST), .IN_FIFO_DEPTH(2), .OUT_FIFO_DEPTH(2)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------- reference model
  int m_w [N_PRE][N_POST];
  int m_v [N_POST];
  int m_xq[N_POST];
  bit m_fired[N_POST];
  int m_xp[N_PRE];
  int m_nprev = 0;
  int m_ts = 0;
  aer_pkt_t exp_out[$];

  // mechanism counters
  int n_int = 0, n_ltd = 0, n_leak = 0, n_inh = 0, n_fire = 0, n_ltp = 0;
  int n_gap = 0, n_null = 0, n_infer_steps = 0;
  int n_in_stall = 0, n_out_stall = 0;

  function automatic int clamp(input int x, input int lo, input int hi);
    return (x < lo) ? lo : (x > hi) ? hi : x;
  endfunction

  function automatic int floor_div256(input int x);
    return (x >= 0) ? x / 256 : -((-x + 255) / 256);
  endfunction

  task automatic model_integrate(input int i);
    int nw;
    n_int++;
    for (int j = 0; j < N_POST; j++) begin
      m_v[j] = clamp(m_v[j] + m_w[i][j], -32768, 32767);
      if (cfg.learn_en) begin
        nw = clamp(m_w[i][j] - (int'(cfg.lr_post) * m_xq[j]) / 256, 0, 255);
        if (nw != m_w[i][j]) n_ltd++;
        m_w[i][j] = nw;
      end
    end
    m_xp[i] = clamp(m_xp[i] + int'(cfg.a_pre), 0, 255);
  endtask

  task automatic model_end_step();
    int nfire, inh, nw;
    n_leak++;
    if (!cfg.learn_en) n_infer_steps++;
    for (int i = 0; i < N_PRE; i++)
      m_xp[i] = m_xp[i] - (m_xp[i] * int'(cfg.k_pre) + 255) / 256;
    for (int j = 0; j < N_POST; j++) begin
      inh = int'(cfg.v_inh) * (m_nprev - int'(m_fired[j]));
      if (inh > 0) n_inh++;
      m_v[j] = clamp(m_v[j] - floor_div256((m_v[j] - int'(cfg.v_rest)) * int'(cfg.k_v)) - inh,
                     -32768, 32767);
      m_xq[j] = m_xq[j] - (m_xq[j] * int'(cfg.k_post) + 255) / 256;
    end
    nfire = 0;
    for (int j = 0; j < N_POST; j++) begin
      m_fired[j] = m_v[j] > int'(cfg.v_thresh);
      if (m_fired[j]) begin
        nfire++;
        n_fire++;
        m_v[j]  = int'(cfg.v_reset);
        m_xq[j] = clamp(m_xq[j] + int'(cfg.a_post), 0, 255);
        if (cfg.learn_en)
          for (int i = 0; i < N_PRE; i++) begin
            nw = clamp(m_w[i][j] + (int'(cfg.lr_pre) * m_xp[i]) / 256, 0, 255);
            if (nw != m_w[i][j]) n_ltp++;
            m_w[i][j] = nw;
          end
        exp_out.push_back('{ts: ts_t'(m_ts), id: nid_t'(j)});
      end
    end
    m_nprev = nfire;
    m_ts++;
  endtask

  task automatic model_packet(input int ts, input int id);
    if (ts > m_ts + 1) n_gap++;
    while (m_ts != ts) model_end_step();
    if (id == int'(NULL_ID)) n_null++;
    else model_integrate(id);
  endtask

  // ------------------------------------------------------------ host port
  task automatic host_write(input mem_sel_t s, input int a, input logic [POST_W-1:0] d);
    @(negedge clk);
    host_sel = s; host_addr = maddr_t'(a); host_wdata = d; host_we = 1;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic host_read(input mem_sel_t s, input int a, output logic [POST_W-1:0] d);
    @(negedge clk);
    host_sel = s; host_addr = maddr_t'(a); host_re = 1;
    @(negedge clk);
    host_re = 0;
    d = host_rdata;
  endtask

  // ------------------------------------------------------------ AER sides
  task automatic aer_send(input int ts, input int id);
    model_packet(ts, id);
    @(negedge clk);
    aer_in_addr = '{ts: ts_t'(ts), id: nid_t'(id)};
    aer_in_req = 1;
    while (!aer_in_ack) @(negedge clk);
    aer_in_req = 0;
    while (aer_in_ack) @(negedge clk);
  endtask

  aer_pkt_t got_out[$];
  initial begin
    forever begin
      @(negedge clk);
      if (aer_out_req) begin
        got_out.push_back(aer_out_addr);
        repeat ($urandom_range(0, 60)) @(negedge clk);
        aer_out_ack = 1;
        while (aer_out_req) @(negedge clk);
        aer_out_ack = 0;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (aer_in_req && dut.in_full) n_in_stall++;
    if (dut.out_full && int'(dut.u_ctrl.state) == 6) n_out_stall++;  // 6: S_EMIT
  end

  // Spike probability of input i in timestep t, in 1/1000.
  //  STIM 0: every input with P_SPIKE percent.
  //  STIM 1: a 28x28 image per sample: a bright bar through the centre whose
  //          angle is one of ten classes (class = sample mod 10); pixels
  //          within 1.5 of the bar fire with 20 %, others with 0.5 %.
  //  STIM 2: a 251-sample heartbeat per sample: P, QRS and T waves as
  //          Gaussians; the class (sample mod 4) changes QRS width and T
  //          height; the rate is 2 % + 30 % times the normalised amplitude.
  function automatic int spike_permille(input int t, input int i);
    int  s, c;
    real x, y, ang, d, a, qw, th;
    s = t / T_SAMPLE;
    if (STIM == 1) begin
      c   = s % 10;
      x   = real'(i % 28) - 13.5;
      y   = real'(i / 28) - 13.5;
      ang = 3.14159265 * real'(c) / 10.0;
      d   = x * $sin(ang) - y * $cos(ang);
      if (d < 0) d = -d;
      return (d < 1.5) ? 200 : 5;
    end else if (STIM == 2) begin
      c  = s % 4;
      qw = (c == 1 || c == 3) ? 9.0 : 4.0;
      th = (c >= 2) ? 0.15 : 0.35;
      x  = real'(i);
      a  = 0.12 * $exp(-((x - 70.0) * (x - 70.0)) / 200.0)
         + 1.00 * $exp(-((x - 125.0) * (x - 125.0)) / (2.0 * qw * qw))
         + th   * $exp(-((x - 190.0) * (x - 190.0)) / 450.0);
      return 20 + int'(300.0 * a);
    end
    return P_SPIKE * 10;
  endfunction

  task automatic run_steps(input int t0, input int t1);
    for (int t = t0; t < t1; t++) begin
      // leave one timestep without input spikes so a gap is crossed
      if (t == t0 + 2) continue;
      for (int i = 0; i < N_PRE; i++)
        if ($urandom_range(0, 999) < spike_permille(t, i)) aer_send(t, i);
    end
  endtask

  task automatic wait_drained();
    int quiet;
    quiet = 0;
    while (quiet < 200) begin
      @(posedge clk);
      quiet = (busy || !dut.in_empty || !dut.out_empty || aer_out_req) ? 0 : quiet + 1;
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [POST_W-1:0] d;
    post_state_t       ps;
    cfg = '{v_thresh: -16'sd100, v_rest: -16'sd200, v_reset: -16'sd220, v_inh: 8'd20,
            k_v: 8'd16, k_pre: 8'd32, k_post: 8'd32, a_pre: 8'd64, a_post: 8'd64,
            lr_pre: 8'd32, lr_post: 8'd24, learn_en: 1'b1};
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // initial state through the host port
    for (int i = 0; i < N_PRE; i++) begin
      m_xp[i] = 0;
      host_write(MEM_PRE, i, '0);
      for (int j = 0; j < N_POST; j++) begin
        m_w[i][j] = $urandom_range(0, 63);
        host_write(MEM_SYN, i * N_POST + j, POST_W'(m_w[i][j]));
      end
    end
    for (int j = 0; j < N_POST; j++) begin
      m_v[j] = int'(cfg.v_rest); m_xq[j] = 0; m_fired[j] = 0;
      ps = '{fired: 1'b0, xpost: 8'd0, v: cfg.v_rest};
      host_write(MEM_POST, j, POST_W'(ps));
    end
    // learning
    run_steps(0, T_LEARN);
    aer_send(T_LEARN, int'(NULL_ID));
    wait_drained();
    // inference with the learned weights
    cfg.learn_en = 1'b0;
    run_steps(T_LEARN, T_LEARN + T_INFER);
    aer_send(T_LEARN + T_INFER, int'(NULL_ID));
    wait_drained();
    check(int'(cur_ts) == (T_LEARN + T_INFER) % 256, "final timestep");
    $display("timesteps %0d, input spikes %0d, output spikes %0d, cycles %0d",
             T_LEARN + T_INFER, n_int, exp_out.size(), $time / 10);
    // output spikes
    check(got_out.size() == exp_out.size(),
          $sformatf("%0d output packets, expected %0d", got_out.size(), exp_out.size()));
    for (int k = 0; k < got_out.size() && k < exp_out.size(); k++)
      check(got_out[k] == exp_out[k], $sformatf("output %0d: got ts %0d id %0d, exp ts %0d id %0d",
            k, got_out[k].ts, got_out[k].id, exp_out[k].ts, exp_out[k].id));
    // final memory contents
    for (int i = 0; i < N_PRE; i++) begin
      host_read(MEM_PRE, i, d);
      check(int'(d[X_W-1:0]) == m_xp[i], $sformatf("X_pre[%0d] %0d exp %0d", i, d[X_W-1:0], m_xp[i]));
    end
    for (int j = 0; j < N_POST; j++) begin
      host_read(MEM_POST, j, d);
      ps = post_state_t'(d);
      check(int'(ps.v) == m_v[j] && int'(ps.xpost) == m_xq[j] && ps.fired == m_fired[j],
            $sformatf("post[%0d] v %0d/%0d x %0d/%0d f %0d/%0d", j, ps.v, m_v[j], ps.xpost, m_xq[j], ps.fired, m_fired[j]));
    end
    for (int i = 0; i < N_PRE; i++)
      for (int j = 0; j < N_POST; j++) begin
        host_read(MEM_SYN, i * N_POST + j, d);
        check(int'(d[W_W-1:0]) == m_w[i][j], $sformatf("w[%0d][%0d] %0d exp %0d", i, j, d[W_W-1:0], m_w[i][j]));
      end
    // every mechanism must have happened
    $display("mechanisms: integrate=%0d ltd=%0d leak=%0d inhibition=%0d fire=%0d ltp=%0d gap=%0d null=%0d infer_steps=%0d in_stall=%0d out_stall=%0d",
             n_int, n_ltd, n_leak, n_inh, n_fire, n_ltp, n_gap, n_null, n_infer_steps, n_in_stall, n_out_stall);
    check(n_int > 0, "integration happened");
    check(n_ltd > 0, "LTD happened");
    check(n_leak > 0, "leak happened");
    check(n_inh > 0, "inhibition happened");
    check(n_fire > 0, "firing happened");
    check(n_ltp > 0, "LTP happened");
    check(n_gap > 0, "empty timestep crossed");
    check(n_null > 0, "NULL_ID packet sent");
    check(n_infer_steps > 0, "inference mode used");
    if (REQ_ALL) begin
      check(n_in_stall > 0, "input back-pressure happened");
      check(n_out_stall > 0, "output FIFO stall happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
