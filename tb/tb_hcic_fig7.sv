// tb_hcic_fig7: the published worked call/ret and jmp examples, reproduced
// through the whole unit in its small k = 3 configuration (8-bit EHD).
//
// The PUF model seed 32'h40868926 is chosen so that the model's two first
// responses are key_1 = 0xA5E23F17 and key_2 = 0xA2156CF7 (xorshift32 run
// backwards from the wanted key_2); key_2 is the key of the example.
//   call at 0x08048546, return address A1 = 0x0804854B -> EHD1 = 132
//   legitimate ret to A1                                 -> match
//   jmp [eax+0xe3] redirected to the unencrypted gadget "add %edx,%eax"
//                                                        -> decrypts to garbage
//   ret to the attacker's A2 = 0x080486F1 (int 0x80)     -> EHD2 = 108, alarm
//
// Addresses, instructions and EHD values are the published ones; key_1 is
// whatever the chosen seed gives, so the garbled gadget byte is this test's.
module tb_hcic_fig7;
  import hcic_pkg::*;

  int checks = 0, failures = 0;

  logic      clk = 0, rst_n = 0;
  logic      keygen = 0, keys_ready;
  logic      req_valid = 0, req_ready;
  hcic_req_t req = '0;
  logic      rsp_valid;
  hcic_rsp_t rsp;
  logic      alarm;
  logic      key_update;
  logic [31:0] call_count;

  hcic_top #(.K(3), .PUF_CHIP_ID(32'h4086_8926)) dut (
    .clk(clk), .rst_n(rst_n), .keygen_i(keygen), .keys_ready_o(keys_ready),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .rsp_valid_o(rsp_valid), .rsp_o(rsp), .alarm_o(alarm), .alarm_clear_i(1'b0),
    .key_update_o(key_update), .call_count_o(call_count)
  );

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input hcic_op_e op, input logic [31:0] data, input logic [31:0] ehd,
                      output hcic_rsp_t r);
    int w = 0;
    @(negedge clk);
    req_valid = 1'b1;
    req.op = op; req.data = data; req.ehd = ehd;
    while (!req_ready && w < 100) begin @(negedge clk); w++; end
    @(posedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    check(rsp_valid && rsp.op == op, "response follows request");
    r = rsp;
  endtask

  initial begin
    hcic_rsp_t r;
    logic [31:0] enc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk) keygen = 1'b1;
    @(negedge clk) keygen = 1'b0;
    while (!keys_ready) @(negedge clk);
    check(dut.u_keys.key_2_o == 32'hA215_6CF7, "key_2 of the example");
    check(dut.u_keys.key_1_o == 32'hA5E2_3F17, "key_1 from the chosen seed");

    // load time: encrypt the first instruction of func() (push %ebp; mov %esp,%ebp)
    send(OP_ENCRYPT, 32'h83E5_8955, '0, r);
    enc = r.data;
    check(enc == 32'h83E5_8942, $sformatf("encrypted entry %h", enc));  // 0x55 ^ 0x17

    // main(): call func twice from the same site
    repeat (2) begin
      send(OP_FETCH, 32'hFFFF_A8E8, '0, r);
      check(r.cls == CF_CALL, "call");
      send(OP_CALL, 32'h0804_854B, '0, r);
      check(r.data == 32'd132, $sformatf("EHD1 %0d exp 132", r.data));
      send(OP_FETCH, enc, '0, r);
      check(r.decrypted && r.data == 32'h83E5_8955, "func entry decrypted");
    end
    // legitimate return
    send(OP_FETCH, 32'h0000_00C3, '0, r);
    send(OP_RET, 32'h0804_854B, 32'd132, r);
    check(r.ehd_match && r.data == 32'd132, "legitimate return matches");
    @(negedge clk) check(!alarm, "no alarm after legitimate return");
    // jump-oriented attack: gadget 1 ends in jmp [eax+0xe3] (FF 60 E3), which
    // is steered to gadget 2, "add %edx,%eax" (01 D0), a plain unencrypted
    // instruction. The unit decrypts it with key_1 anyway: 0x01 ^ 0x17 = 0x16,
    // an opcode the program never meant, so the gadget is not executed as written.
    send(OP_FETCH, 32'h00E3_60FF, '0, r);
    check(r.cls == CF_JMP, "jmp [eax+0xe3] classified as jmp");
    send(OP_FETCH, 32'h0000_D001, '0, r);
    check(r.decrypted && r.data == 32'h0000_D016, $sformatf("gadget garbled to %h", r.data));
    // overflowed return address A2 with EHD1 left on the stack
    send(OP_FETCH, 32'h0000_00C3, '0, r);
    check(r.cls == CF_RET, "ret");
    send(OP_RET, 32'h0804_86F1, 32'd132, r);
    check(!r.ehd_match && r.data == 32'd108, $sformatf("EHD2 %0d exp 108", r.data));
    @(negedge clk);
    check(alarm, "attack warning");
    check(!req_ready, "requests held while the warning stands");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
