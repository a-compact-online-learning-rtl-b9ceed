// tb_aer_output: self-checking test of aer_output.
// A FIFO model feeds packets; a four-phase receiver with random reply delays
// takes them.  Checks: every packet arrives once and in order, the address is
// stable for the whole time req is high, and req is never raised while ack is
// still high from the previous packet.
module tb_aer_output;
  import snn_pkg::*;

  logic     clk = 0, rst_n = 1;
  logic     fifo_empty;
  logic     fifo_pop;
  aer_pkt_t fifo_rdata;
  logic     aer_req;
  aer_pkt_t aer_addr;
  logic     aer_ack = 0;
  int       checks = 0, failures = 0;
  aer_pkt_t q[$];
  aer_pkt_t exp_q[$];
  int       n_got = 0;

  aer_output #(.SYNC_STAGES(2)) dut (.*);

  always #5 clk = ~clk;

  assign fifo_empty = (q.size() == 0);
  assign fifo_rdata = fifo_empty ? aer_pkt_t'('0) : q[0];

  always @(posedge clk) if (rst_n && fifo_pop) begin
    if (fifo_empty) begin
      failures++;
      $display("FAIL: pop while empty");
    end else void'(q.pop_front());
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // receiver
  initial begin
    aer_pkt_t a;
    forever begin
      @(negedge clk);
      if (aer_req) begin
        check(!aer_ack, "req raised while ack still high");
        a = aer_addr;
        repeat ($urandom_range(0, 4)) begin
          @(negedge clk);
          check(aer_addr == a, "address stable while req high");
        end
        check(exp_q.size() > 0 && a == exp_q[0], $sformatf("packet %0d", n_got));
        if (exp_q.size() > 0) void'(exp_q.pop_front());
        n_got++;
        aer_ack = 1;
        while (aer_req) @(negedge clk);
        repeat ($urandom_range(0, 3)) @(negedge clk);
        aer_ack = 0;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    aer_pkt_t p;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 150; i++) begin
      p = aer_pkt_t'($urandom);
      q.push_back(p);
      exp_q.push_back(p);
      if ($urandom_range(0, 2) == 0) repeat ($urandom_range(1, 30)) @(posedge clk);
    end
    while (n_got < 150) @(posedge clk);
    repeat (20) @(posedge clk);
    check(n_got == 150, "all packets sent once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
