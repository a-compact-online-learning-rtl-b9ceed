// tb_snn_pkg: self-checking test of the arithmetic helpers in snn_pkg.
// mul_frac_floor and mul_frac_ceil are checked exhaustively over all 8-bit
// values and Q0.8 fractions against integer division; sat_v and sat_u8 are
// checked across and beyond their limits.  The packed layouts of aer_pkt_t
// and post_state_t are checked too, since the host port relies on them.
module tb_snn_pkg;
  import snn_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    post_state_t ps;
    aer_pkt_t    pk;
    for (int a = 0; a < 256; a++)
      for (int f = 0; f < 256; f++) begin
        check(int'(mul_frac_floor(8'(a), 8'(f))) == (a * f) / 256, $sformatf("floor %0d*%0d", a, f));
        check(int'(mul_frac_ceil(8'(a), 8'(f))) == (a * f + 255) / 256, $sformatf("ceil %0d*%0d", a, f));
      end
    for (int x = -40000; x <= 40000; x += 37) begin
      int ev, eu;
      ev = (x > 32767) ? 32767 : (x < -32768) ? -32768 : x;
      eu = (x > 255) ? 255 : (x < 0) ? 0 : x;
      check(int'(sat_v(25'(x))) == ev, $sformatf("sat_v %0d", x));
      check(int'(sat_u8(25'(x))) == eu, $sformatf("sat_u8 %0d", x));
    end
    check(int'(sat_v(25'(32768))) == 32767 && int'(sat_v(-25'sd32769)) == -32768, "sat_v edges");
    check(sat_u8(25'(256)) == 8'd255 && sat_u8(-25'sd1) == 8'd0 && sat_u8(25'(255)) == 8'd255, "sat_u8 edges");
    ps = '{fired: 1'b1, xpost: 8'h5a, v: 16'sh8001};
    check(POST_W == 25 && 25'(ps) == 25'h15a8001, "post_state_t layout");
    pk = '{ts: 8'hc3, id: 10'h2a5};
    check(AER_W == 18 && 18'(pk) == {8'hc3, 10'h2a5}, "aer_pkt_t layout");
    check(NULL_ID == 10'h3ff, "NULL_ID");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
