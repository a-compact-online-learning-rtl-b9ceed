// tb_leaky_handler: self-checking test of leaky_handler.
// Random voltages, traces, leak coefficients, inhibition strengths and spike
// counts; the expected leak (floor for V, rounded-up decrement for traces)
// and inhibition are computed here with integer arithmetic.  Directed cases
// check that a trace decays to exactly zero and that a neuron's own spike does
// not inhibit it.
module tb_leaky_handler;
  import snn_pkg::*;

  snn_cfg_t    cfg;
  post_state_t post, post_new;
  trace_t      x_pre, x_pre_new;
  cnt_t        n_fired;
  int          checks = 0, failures = 0;

  leaky_handler dut (.*);

  function automatic int clamp(input int x, input int lo, input int hi);
    return (x < lo) ? lo : (x > hi) ? hi : x;
  endfunction

  function automatic int floor_div256(input int x);
    return (x >= 0) ? x / 256 : -((-x + 255) / 256);
  endfunction

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_one();
    int ev, exq, exp_pre, nother;
    #1;
    nother  = int'(n_fired) - int'(post.fired);
    ev      = clamp(int'(post.v) - floor_div256((int'(post.v) - int'(cfg.v_rest)) * int'(cfg.k_v))
                    - int'(cfg.v_inh) * nother, -32768, 32767);
    exq     = int'(post.xpost) - (int'(post.xpost) * int'(cfg.k_post) + 255) / 256;
    exp_pre = int'(x_pre) - (int'(x_pre) * int'(cfg.k_pre) + 255) / 256;
    check(int'(post_new.v) == ev, $sformatf("V: v=%0d got %0d exp %0d", post.v, post_new.v, ev));
    check(int'(post_new.xpost) == exq, $sformatf("X_post: got %0d exp %0d", post_new.xpost, exq));
    check(int'(x_pre_new) == exp_pre, $sformatf("X_pre: got %0d exp %0d", x_pre_new, exp_pre));
    check(post_new.fired == post.fired, "fired kept");
  endtask

  initial begin
    for (int i = 0; i < 3000; i++) begin
      cfg     = snn_cfg_t'({$urandom, $urandom, $urandom, $urandom});
      post    = post_state_t'($urandom);
      x_pre   = trace_t'($urandom);
      n_fired = cnt_t'($urandom_range(0, 100));
      if (!post.fired || n_fired == 0) post.fired = 1'b0;
      run_one();
    end
    // a small trace with a small coefficient still decays to zero
    cfg = '0;
    cfg.k_pre = 8'd10;
    cfg.k_post = 8'd10;
    x_pre = 8'd3;
    post = '{fired: 1'b1, xpost: 8'd1, v: 16'sd5};
    n_fired = cnt_t'(1);
    #1;
    check(x_pre_new == 8'd2 && post_new.xpost == 8'd0, "small traces decay");
    check(post_new.v == 16'sd5, "own spike does not inhibit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
