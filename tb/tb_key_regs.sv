// tb_key_regs: self-checking test of the KEY_1/KEY_2/KEY_LEN_1/KEY_LEN_2
// registers: reset values, independent loads, one-cycle load timing, the
// keys_valid flag (needs both keys, cleared by invalidate) and a key_2-only
// rewrite that leaves key_1 alone.
//
// The four registers are the published ones; the flag and timing checked
// here are this design's own choices.
module tb_key_regs;
  int checks = 0, failures = 0;

  logic        clk = 0, rst_n = 0;
  logic        inv = 0, ld1 = 0, ld2 = 0, ldl = 0;
  logic [31:0] key = 0;
  logic [5:0]  l1 = 0, l2 = 0;
  logic [31:0] k1, k2;
  logic [5:0]  kl1, kl2;
  logic        kv;

  key_regs dut (.clk(clk), .rst_n(rst_n), .invalidate_i(inv), .ld_key_1_i(ld1),
                .ld_key_2_i(ld2), .key_i(key), .ld_len_i(ldl), .key_len_1_i(l1),
                .key_len_2_i(l2), .key_1_o(k1), .key_2_o(k2), .key_len_1_o(kl1),
                .key_len_2_o(kl2), .keys_valid_o(kv));

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] a, b, c;

  initial begin
    a = $urandom | 1; b = $urandom | 2; c = $urandom | 4;
    @(posedge clk) #1;   // a clock edge under reset
    check(k1 == 0 && k2 == 0 && kl1 == 0 && kl2 == 0 && !kv, "reset values");
    @(negedge clk) rst_n = 1;
    // load key_1
    @(negedge clk) begin ld1 = 1; key = a; end
    check(k1 == 0, "key_1 changes before the clock edge");
    @(negedge clk) begin ld1 = 0; key = 32'hDEAD_BEEF; end
    check(k1 == a && k2 == 0 && !kv, "key_1 loaded alone");
    // load key_2 with the lengths
    @(negedge clk) begin ld2 = 1; ldl = 1; key = b; l1 = 6'd7; l2 = 6'd32; end
    @(negedge clk) begin ld2 = 0; ldl = 0; key = 0; l1 = 0; l2 = 0; end
    check(k1 == a && k2 == b && kl1 == 7 && kl2 == 32 && kv, "key_2 and lengths loaded, keys valid");
    // hold
    repeat (3) @(negedge clk);
    check(k1 == a && k2 == b && kl1 == 7 && kl2 == 32 && kv, "values held");
    // update key_2 only
    @(negedge clk) begin ld2 = 1; key = c; end
    @(negedge clk) ld2 = 0;
    check(k1 == a && k2 == c && kv, "key_2 rewritten, key_1 kept");
    // invalidate
    @(negedge clk) inv = 1;
    @(negedge clk) inv = 0;
    check(!kv && k1 == a, "invalidate clears valid only");
    @(negedge clk) begin ld1 = 1; key = c; end
    @(negedge clk) begin ld1 = 0; end
    check(!kv && k1 == c, "one key is not enough for valid");
    @(negedge clk) begin ld2 = 1; key = a; end
    @(negedge clk) begin ld2 = 0; end
    check(kv && k2 == a, "valid after both reloaded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
