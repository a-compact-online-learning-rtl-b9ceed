// tb_fire_handler: self-checking test of fire_handler.
// Random voltages around random thresholds (including V equal to the
// threshold, which must not fire), random traces, weights and rates.  The
// expected spike, reset, post-trace step and LTP weight are computed here.
module tb_fire_handler;
  import snn_pkg::*;

  snn_cfg_t    cfg;
  post_state_t post, post_new;
  weight_t     w, w_new;
  trace_t      x_pre;
  logic        spike_out;
  int          checks = 0, failures = 0;
  int          n_spikes = 0;

  fire_handler dut (.*);

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

  initial begin
    for (int i = 0; i < 3000; i++) begin
      bit es;
      int ev, ex, ew;
      cfg   = snn_cfg_t'({$urandom, $urandom, $urandom, $urandom});
      post  = post_state_t'($urandom);
      w     = weight_t'($urandom);
      x_pre = trace_t'($urandom);
      case (i % 3)
        0: post.v = cfg.v_thresh;
        1: post.v = volt_t'(int'(cfg.v_thresh) + $urandom_range(0, 40) - 20);
        default: ;
      endcase
      #1;
      es = int'(post.v) > int'(cfg.v_thresh);
      ev = es ? int'(cfg.v_reset) : int'(post.v);
      ex = es ? clamp(int'(post.xpost) + int'(cfg.a_post), 0, 255) : int'(post.xpost);
      ew = cfg.learn_en ? clamp(int'(w) + (int'(cfg.lr_pre) * int'(x_pre)) / 256, 0, 255) : int'(w);
      n_spikes += int'(es);
      check(spike_out == es, $sformatf("spike: v=%0d th=%0d", post.v, cfg.v_thresh));
      check(post_new.fired == es, "fired flag");
      check(int'(post_new.v) == ev, $sformatf("V: got %0d exp %0d", post_new.v, ev));
      check(int'(post_new.xpost) == ex, $sformatf("X_post: got %0d exp %0d", post_new.xpost, ex));
      check(int'(w_new) == ew, $sformatf("w: got %0d exp %0d", w_new, ew));
    end
    check(n_spikes > 100 && n_spikes < 2900, "both outcomes exercised");
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
