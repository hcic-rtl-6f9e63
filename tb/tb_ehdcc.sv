// tb_ehdcc: self-checking test of the EHD calculation circuit.
//
// Two instances: the main configuration (K = 5, 32-bit EHD) and the small
// one of the worked call/ret example (K = 3, 8-bit EHD). The published
// worked values are checked first, then random vectors against a reference
// that counts bits by clearing the lowest set bit and rotates one bit at a
// time.
module tb_ehdcc;
  int checks = 0, failures = 0;

  logic [31:0] x5, k5, x3, k3;
  logic [31:0] e5;
  logic [7:0]  e3;

  ehdcc #(.W(32), .K(5)) dut5 (.xor_i(x5), .key_2_i(k5), .ehd_o(e5));
  ehdcc #(.W(32), .K(3)) dut3 (.xor_i(x3), .key_2_i(k3), .ehd_o(e3));

  function automatic int popc(logic [31:0] v);
    int n = 0;
    while (v != 0) begin v = v & (v - 1); n++; end
    return n;
  endfunction

  function automatic logic [31:0] ref_ehd(logic [31:0] x, logic [31:0] key, int k);
    int w = 1 << k;
    int l = w - 6;
    logic [31:0] pre, msk;
    int m;
    msk = (w == 32) ? 32'hFFFF_FFFF : ((32'd1 << w) - 1);
    pre = ((32'(popc(x)) << l) | (key >> (32 - l))) & msk;
    m = int'(key) & ((1 << k) - 1);
    repeat (m) pre = ((pre >> 1) | ((pre & 32'd1) << (w - 1))) & msk;
    return pre;
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // worked example, K = 5: key_2 = 0x12345678, HD = 20
    k5 = 32'h1234_5678; x5 = 32'h000F_FFFF; #1;
    check(e5 == 32'h48D1_5950, $sformatf("K=5 example got %h", e5));
    // worked example, K = 3: key_2 = 0xA2156CF7, A1 = 0x0804854B -> 132
    k3 = 32'hA215_6CF7; x3 = 32'h0804_854B ^ k3; #1;
    check(e3 == 8'd132, $sformatf("K=3 EHD1 got %0d", e3));
    // attacker's address A2 = 0x080486F1 -> 108
    x3 = 32'h0804_86F1 ^ k3; #1;
    check(e3 == 8'd108, $sformatf("K=3 EHD2 got %0d", e3));
    // extremes of HD
    k5 = 32'hFFFF_FFE0; x5 = 32'hFFFF_FFFF; #1;   // m = 0, HD = 32
    check(e5 == {6'd32, 26'h3FF_FFFF}, $sformatf("HD=32 m=0 got %h", e5));
    // random vectors
    for (int i = 0; i < 2000; i++) begin
      x5 = $urandom; k5 = $urandom; x3 = $urandom; k3 = $urandom; #1;
      check(e5 == ref_ehd(x5, k5, 5), $sformatf("K=5 x=%h k=%h got %h exp %h", x5, k5, e5, ref_ehd(x5, k5, 5)));
      check(32'(e3) == ref_ehd(x3, k3, 3), $sformatf("K=3 x=%h k=%h got %h", x3, k3, e3));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
