// tb_aer_input: self-checking test of aer_input with a FIFO model.
// A four-phase AER sender sends random packets; the test checks that every
// packet reaches the FIFO exactly once and in order, that the acknowledge is
// withheld while the FIFO is full (back-pressure), and the handshake latency
// (ack SYNC_STAGES+1 clocks after req when there is room).
module tb_aer_input;
  import snn_pkg::*;

  logic     clk = 0, rst_n = 1;
  logic     aer_req = 0;
  aer_pkt_t aer_addr = '0;
  logic     aer_ack;
  logic     fifo_full = 0;
  logic     fifo_push;
  aer_pkt_t fifo_wdata;
  int       checks = 0, failures = 0;
  aer_pkt_t sent[$];
  aer_pkt_t got[$];
  int       stalled = 0;

  aer_input #(.SYNC_STAGES(2)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n && fifo_push) begin
    if (fifo_full) begin
      failures++;
      $display("FAIL: push while full");
    end
    got.push_back(fifo_wdata);
  end

  task automatic send(input aer_pkt_t p, input bit hold_full);
    int lat;
    aer_addr = p;
    fifo_full = hold_full;
    @(negedge clk);
    aer_req = 1;
    lat = 0;
    while (!aer_ack) begin
      @(negedge clk);
      lat++;
      if (hold_full && lat == 20) begin
        check(!aer_ack, "ack withheld while FIFO full");
        stalled++;
        fifo_full = 0;
      end
    end
    if (!hold_full) check(lat == 3, $sformatf("ack latency %0d, expected 3", lat));
    sent.push_back(p);
    aer_req = 0;
    while (aer_ack) @(negedge clk);
    repeat ($urandom_range(0, 3)) @(negedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) send(aer_pkt_t'($urandom), (i % 17) == 5);
    repeat (5) @(posedge clk);
    check(got.size() == sent.size(), $sformatf("received %0d of %0d", got.size(), sent.size()));
    for (int i = 0; i < sent.size() && i < got.size(); i++)
      check(got[i] == sent[i], $sformatf("packet %0d", i));
    check(stalled > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
