// tb_xor_unit: self-checking test of the shared XOR unit. Random data, keys
// and key lengths (0..33) on both key selections, compared with a reference
// that builds the key mask arithmetically; also checks that XOR twice with
// the same key restores the data (encryption then decryption).
//
// The XOR with a key of programmable length is published; the low-bits
// masking checked here is this design's reading of it.
module tb_xor_unit;
  import hcic_pkg::*;
  int checks = 0, failures = 0;

  logic [31:0] d, k1, k2, q, q2;
  logic [5:0]  l1, l2;
  key_sel_e    sel;

  xor_unit dut  (.data_i(d), .sel_i(sel), .key_1_i(k1), .key_2_i(k2),
                 .key_len_1_i(l1), .key_len_2_i(l2), .data_o(q));
  xor_unit dut2 (.data_i(q), .sel_i(sel), .key_1_i(k1), .key_2_i(k2),
                 .key_len_1_i(l1), .key_len_2_i(l2), .data_o(q2));

  function automatic logic [31:0] ref_x(logic [31:0] dd, logic [31:0] kk, int len);
    logic [63:0] m = (64'd1 << (len > 32 ? 32 : len)) - 64'd1;
    return dd ^ (kk & m[31:0]);
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
    // the main configuration: key_1 on 7 bits, key_2 on 32 bits
    d = 32'h0000_D001; k1 = 32'hFFFF_FFFF; k2 = 32'h1234_5678; l1 = 6'd7; l2 = 6'd32;
    sel = SEL_KEY_1; #1;
    check(q == 32'h0000_D07E, $sformatf("key_1 7-bit got %h", q));
    sel = SEL_KEY_2; #1;
    check(q == (32'h0000_D001 ^ 32'h1234_5678), $sformatf("key_2 32-bit got %h", q));
    for (int i = 0; i < 3000; i++) begin
      d = $urandom; k1 = $urandom; k2 = $urandom;
      l1 = 6'($urandom_range(0, 33)); l2 = 6'($urandom_range(0, 33));
      sel = ($urandom & 1) ? SEL_KEY_2 : SEL_KEY_1; #1;
      check(q == ref_x(d, sel == SEL_KEY_1 ? k1 : k2, sel == SEL_KEY_1 ? int'(l1) : int'(l2)),
            $sformatf("sel=%0d l1=%0d l2=%0d d=%h got %h", sel, l1, l2, d, q));
      check(q2 == d, "XOR twice does not restore data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
