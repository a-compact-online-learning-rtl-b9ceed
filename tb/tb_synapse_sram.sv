// tb_synapse_sram: self-checking test of synapse_sram.
// Fills the memory through the write port, then runs random reads and writes
// (also to the same address in the same cycle) against an array model.
// Checks the one-clock read latency, that rdata holds when re is low, and
// that a read of the word being written returns the old word.
module tb_synapse_sram;
  import snn_pkg::*;
  localparam int N_PRE  = 20;
  localparam int N_POST = 7;
  localparam int DEPTH  = N_PRE * N_POST;

  logic     clk = 0;
  mem_ctl_t ctl = '0;
  weight_t  wdata = '0;
  weight_t  rdata;
  weight_t  model [DEPTH];
  int       checks = 0, failures = 0;

  synapse_sram #(.N_PRE(N_PRE), .N_POST(N_POST)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    weight_t exp_r;
    weight_t last_r;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      ctl   = '{re: 1'b0, raddr: '0, we: 1'b1, waddr: maddr_t'(a)};
      wdata = weight_t'($urandom);
      model[a] = wdata;
    end
    @(negedge clk);
    ctl = '0;
    last_r = '0;
    for (int i = 0; i < 3000; i++) begin
      int ra, wa;
      logic re, we;
      ra = $urandom_range(0, DEPTH - 1);
      wa = ($urandom_range(0, 3) == 0) ? ra : $urandom_range(0, DEPTH - 1);
      re = (i == 0) || ($urandom_range(0, 3) != 0);
      we = $urandom_range(0, 1) == 1;
      ctl   = '{re: re, raddr: maddr_t'(ra), we: we, waddr: maddr_t'(wa)};
      wdata = weight_t'($urandom);
      exp_r = re ? model[ra] : last_r;   // old data on a same-address write
      @(posedge clk);
      if (we) model[wa] = wdata;
      #1;
      check(rdata == exp_r, $sformatf("read %0d: got %h exp %h", ra, rdata, exp_r));
      last_r = exp_r;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
