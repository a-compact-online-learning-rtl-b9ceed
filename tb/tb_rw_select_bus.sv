// tb_rw_select_bus: self-checking test of rw_select_bus.
// For every phase the test drives distinct values from each handler and
// checks that the memories get the results of the handler that owns the
// phase and the controller's enables and addresses.  It then checks host
// ownership while the controller is idle: enables follow host_sel, write data
// come from host_wdata, and host_rdata returns the selected memory's read
// data one clock after the read.
module tb_rw_select_bus;
  import snn_pkg::*;

  logic              clk = 0, rst_n = 1;
  logic              ctl_idle;
  phase_t            phase_w;
  mem_ctl_t          pre_ctl_c, post_ctl_c, syn_ctl_c;
  post_state_t       int_post, leak_post, fire_post;
  weight_t           int_w, fire_w;
  trace_t            int_xpre, leak_xpre;
  logic              host_re, host_we;
  mem_sel_t          host_sel;
  maddr_t            host_addr;
  logic [POST_W-1:0] host_wdata, host_rdata;
  mem_ctl_t          pre_ctl, post_ctl, syn_ctl;
  trace_t            pre_wdata, pre_rdata;
  post_state_t       post_wdata, post_rdata;
  weight_t           syn_wdata, syn_rdata;
  int                checks = 0, failures = 0;

  rw_select_bus dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic randomize_inputs();
    pre_ctl_c  = mem_ctl_t'({$urandom, $urandom});
    post_ctl_c = mem_ctl_t'({$urandom, $urandom});
    syn_ctl_c  = mem_ctl_t'({$urandom, $urandom});
    int_post   = post_state_t'($urandom);
    leak_post  = post_state_t'($urandom);
    fire_post  = post_state_t'($urandom);
    int_w      = weight_t'($urandom);
    fire_w     = weight_t'($urandom);
    int_xpre   = trace_t'($urandom);
    leak_xpre  = trace_t'($urandom);
    pre_rdata  = trace_t'($urandom);
    post_rdata = post_state_t'($urandom);
    syn_rdata  = weight_t'($urandom);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phase_t phs[5] = '{PH_INT, PH_LEAK_PRE, PH_LEAK_POST, PH_FIRE, PH_LTP};
    host_re = 0; host_we = 0; host_sel = MEM_PRE; host_addr = '0; host_wdata = '0;
    ctl_idle = 0;
    phase_w = PH_IDLE;
    randomize_inputs();
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // controller owns the memories
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      randomize_inputs();
      phase_w = phs[k % 5];
      host_re = 1; host_we = 1;   // ignored while busy
      #1;
      check(pre_ctl == pre_ctl_c && post_ctl == post_ctl_c && syn_ctl == syn_ctl_c, "controller enables pass");
      unique case (phase_w)
        PH_INT: check(pre_wdata == int_xpre && post_wdata == int_post && syn_wdata == int_w, "INT data");
        PH_LEAK_PRE: check(pre_wdata == leak_xpre, "LEAK_PRE data");
        PH_LEAK_POST: check(post_wdata == leak_post, "LEAK_POST data");
        PH_FIRE: check(post_wdata == fire_post, "FIRE data");
        PH_LTP: check(syn_wdata == fire_w, "LTP data");
        default: ;
      endcase
    end
    // host owns the memories
    ctl_idle = 1;
    phase_w  = PH_IDLE;
    for (int k = 0; k < 500; k++) begin
      mem_sel_t s;
      logic [POST_W-1:0] exp_rd;
      @(negedge clk);
      randomize_inputs();
      s = mem_sel_t'($urandom_range(0, 2));
      host_sel = s; host_re = 1; host_we = $urandom_range(0, 1);
      host_addr = maddr_t'($urandom); host_wdata = POST_W'($urandom);
      #1;
      check(pre_ctl.we == (host_we && s == MEM_PRE) && pre_ctl.re == (s == MEM_PRE) &&
            post_ctl.we == (host_we && s == MEM_POST) && post_ctl.re == (s == MEM_POST) &&
            syn_ctl.we == (host_we && s == MEM_SYN) && syn_ctl.re == (s == MEM_SYN), "host enables");
      check(pre_ctl.raddr == host_addr && syn_ctl.waddr == host_addr && post_ctl.waddr == host_addr, "host address");
      check(pre_wdata == host_wdata[7:0] && post_wdata == post_state_t'(host_wdata) && syn_wdata == host_wdata[7:0], "host write data");
      @(posedge clk);
      #1;
      host_re = 0; host_we = 0;
      exp_rd = (s == MEM_POST) ? POST_W'(post_rdata) : (s == MEM_SYN) ? POST_W'(syn_rdata) : POST_W'(pre_rdata);
      check(host_rdata == exp_rd, "host read data follows the selected memory");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
