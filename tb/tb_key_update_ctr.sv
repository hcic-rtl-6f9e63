// tb_key_update_ctr: self-checking test of the call/ret counter that
// triggers the key_2 refresh. A random call/ret stream is checked against a
// reference count; update must pulse exactly on a ret taking the count from
// 1 to 0. Also checks clear, a ret at zero and saturation (CNT_W = 4 copy).
//
// The +1/-1 counting and the refresh on reaching zero are published; the
// clear, the ignored ret at zero and saturation are this design's own.
module tb_key_update_ctr;
  int checks = 0, failures = 0;

  logic        clk = 0, rst_n = 0;
  logic        clr = 0, call = 0, ret = 0;
  logic [31:0] cnt;
  logic        upd;
  logic [3:0]  cnt4;
  logic        upd4;

  key_update_ctr dut (.clk(clk), .rst_n(rst_n), .clear_i(clr), .call_i(call), .ret_i(ret),
                      .count_o(cnt), .update_o(upd));
  key_update_ctr #(.CNT_W(4)) dut4 (.clk(clk), .rst_n(rst_n), .clear_i(clr), .call_i(call),
                                    .ret_i(ret), .count_o(cnt4), .update_o(upd4));

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint model;
  int     updates;

  initial begin
    model = 0; updates = 0;
    @(negedge clk) rst_n = 1;
    check(cnt == 0 && !upd, "zero after reset");
    // ret at zero: nothing happens
    @(negedge clk) ret = 1;
    #1 check(!upd, "no update on ret at zero");
    @(negedge clk) ret = 0;
    check(cnt == 0, "count stays at zero");
    // call, ret -> update on the ret
    @(negedge clk) call = 1;
    @(negedge clk) begin call = 0; ret = 1; end
    check(cnt == 1, "count one after call");
    #1 check(upd, "update on ret from one to zero");
    @(negedge clk) ret = 0;
    check(cnt == 0, "count zero after ret");
    // random stream
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk) begin
        call = ($urandom_range(0, 99) < 50);
        ret  = ($urandom_range(0, 99) < 45);
        clr  = ($urandom_range(0, 999) == 0);
      end
      #1;
      check(upd == (!clr && ret && !call && model == 1), $sformatf("update at count %0d", model));
      if (upd) updates++;
      if (clr) model = 0;
      else if (call && !ret) model = model + 1;
      else if (ret && !call && model > 0) model = model - 1;
      @(posedge clk) #1;
      check(cnt == 32'(model), $sformatf("count %0d exp %0d", cnt, model));
    end
    check(updates > 0, "random stream produced updates");
    // saturation on the 4-bit copy
    @(negedge clk) begin clr = 1; call = 0; ret = 0; end
    @(negedge clk) begin clr = 0; call = 1; end
    repeat (20) @(negedge clk);
    call = 0;
    check(cnt4 == 4'hF, "4-bit counter saturates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
