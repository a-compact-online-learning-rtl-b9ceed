// tb_integrate_handler: self-checking test of integrate_handler.
// Random stored states and configurations, plus saturation corners, are
// applied; the expected integration, LTD and pre-trace results are computed
// here with plain integer arithmetic and compared.
module tb_integrate_handler;
  import snn_pkg::*;

  snn_cfg_t    cfg;
  post_state_t post, post_new;
  weight_t     w, w_new;
  trace_t      x_pre, x_pre_new;
  int          checks = 0, failures = 0;

  integrate_handler dut (.*);

  function automatic int clamp(input int x, input int lo, input int hi);
    return (x < lo) ? lo : (x > hi) ? hi : x;
  endfunction

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_one();
    int ev, ew, ex;
    #1;
    ev = clamp(int'(post.v) + int'(w), -32768, 32767);
    ew = cfg.learn_en ? clamp(int'(w) - (int'(cfg.lr_post) * int'(post.xpost)) / 256, 0, 255) : int'(w);
    ex = clamp(int'(x_pre) + int'(cfg.a_pre), 0, 255);
    check(int'(post_new.v) == ev, $sformatf("V: got %0d exp %0d", post_new.v, ev));
    check(int'(w_new) == ew, $sformatf("w: got %0d exp %0d", w_new, ew));
    check(int'(x_pre_new) == ex, $sformatf("x_pre: got %0d exp %0d", x_pre_new, ex));
    check(post_new.xpost == post.xpost && post_new.fired == post.fired, "post trace and fired kept");
  endtask

  initial begin
    cfg = '0;
    for (int i = 0; i < 3000; i++) begin
      cfg          = snn_cfg_t'({$urandom, $urandom, $urandom, $urandom});
      post         = post_state_t'($urandom);
      w            = weight_t'($urandom);
      x_pre        = trace_t'($urandom);
      if (i < 4) begin   // corners: saturation of V, w and X_pre
        post.v      = (i[0]) ? 16'sh7ff0 : 16'sh8000;
        post.xpost  = 8'hff;
        cfg.lr_post = 8'hff;
        cfg.learn_en = 1'b1;
        x_pre       = 8'hf0;
        cfg.a_pre   = 8'h40;
      end
      run_one();
    end
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
