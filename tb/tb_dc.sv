// tb_dc: self-checking test of the decision circuit: equal and unequal EHD
// pairs, the sticky alarm that holds until cleared, no change without a
// check, and a violation winning over a simultaneous clear.
//
// The compare-and-warn rule is the published one; the clear input and the
// priority checked here are this design's own.
module tb_dc;
  int checks = 0, failures = 0;

  logic        clk = 0, rst_n = 0;
  logic        chk = 0, clr = 0;
  logic [31:0] ec = 0, es = 0;
  logic        match, viol, alarm;

  dc dut (.clk(clk), .rst_n(rst_n), .check_i(chk), .ehd_calc_i(ec), .ehd_stored_i(es),
          .clear_i(clr), .match_o(match), .violation_o(viol), .alarm_o(alarm));

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk) #1 check(!alarm, "alarm clear after reset");
    @(negedge clk) rst_n = 1;
    // matching pairs never raise the alarm
    for (int i = 0; i < 200; i++) begin
      @(negedge clk) begin chk = 1; ec = $urandom; es = ec; end
      #1 check(match && !viol, "equal EHDs match");
    end
    @(negedge clk) begin chk = 0; ec = 1; es = 2; end
    #1 check(!match && !viol, "no verdict without a check");
    @(negedge clk) check(!alarm, "no alarm after matches");
    // one mismatch sets the alarm, which holds
    @(negedge clk) begin chk = 1; ec = 32'd132; es = 32'd108; end
    #1 check(viol && !match, "unequal EHDs violate");
    @(negedge clk) chk = 0;
    check(alarm, "alarm set after violation");
    repeat (5) @(negedge clk);
    check(alarm, "alarm is sticky");
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    check(!alarm, "alarm cleared");
    // violation and clear together: violation wins
    @(negedge clk) begin chk = 1; clr = 1; ec = 5; es = 4; end
    @(negedge clk) begin chk = 0; clr = 0; end
    check(alarm, "violation wins over clear");
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    // random pairs with a single differing bit
    for (int i = 0; i < 100; i++) begin
      @(negedge clk) begin chk = 1; ec = $urandom; es = ec ^ (32'd1 << $urandom_range(0, 31)); end
      #1 check(viol && !match, "one-bit difference detected");
      @(negedge clk) begin chk = 0; clr = 1; end
      check(alarm, "alarm after one-bit difference");
      @(negedge clk) clr = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
