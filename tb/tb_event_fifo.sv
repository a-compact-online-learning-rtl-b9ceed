// tb_event_fifo: self-checking test of event_fifo.
// Random pushes and pops (never past full or empty) are compared with a
// queue model; full and empty flags are checked every cycle, and the FIFO is
// filled to DEPTH and drained to check both limits and the show-ahead read.
module tb_event_fifo;
  localparam int WIDTH = 18;
  localparam int DEPTH = 16;

  logic             clk = 0;
  logic             rst_n = 1;
  logic             push = 0, pop = 0;
  logic [WIDTH-1:0] wdata = '0;
  logic [WIDTH-1:0] rdata;
  logic             full, empty;
  int               checks = 0, failures = 0;
  logic [WIDTH-1:0] model[$];

  event_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic step(input logic do_push, input logic do_pop, input logic [WIDTH-1:0] d);
    push  = do_push;
    pop   = do_pop;
    wdata = d;
    @(posedge clk);
    if (do_pop)  void'(model.pop_front());
    if (do_push) model.push_back(d);
    #1;
    push = 0;
    pop  = 0;
    check(empty == (model.size() == 0), "empty flag");
    check(full == (model.size() == DEPTH), "full flag");
    if (model.size() > 0) check(rdata == model[0], $sformatf("head %h exp %h", rdata, model[0]));
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
    #1;
    check(empty && !full, "reset state");
    // fill completely, then drain
    for (int i = 0; i < DEPTH; i++) step(1, 0, WIDTH'(i * 7 + 3));
    check(full, "full after DEPTH pushes");
    step(1, 1, WIDTH'(18'h2a5a5));  // push and pop together while full
    for (int i = 0; i < DEPTH; i++) step(0, 1, '0);
    check(empty, "empty after drain");
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      logic pu, po;
      pu = ($urandom_range(0, 1) == 1) && (model.size() < DEPTH);
      po = ($urandom_range(0, 1) == 1) && (model.size() > 0);
      step(pu, po, WIDTH'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
