// tb_hcic_attack_campaign: a randomised attack campaign against hcic_top at
// its default parameters, sized like the RIPE suite (850 runs).
//
// Each run executes a random nest of 1..4 calls into an encrypted function
// and then unwinds it. One run in four is clean; the others carry one attack:
//   ROP-random : one return address on the stack replaced by a random
//                address, its EHD1 left in place
//   ROP-near   : one return address replaced by an address one bit away
//                (the "x = 1" gadget of the guessing analysis), EHD1 kept
//   JOP        : an indirect jmp redirected to a random unencrypted window
// Checks: no legitimate return is ever rejected (no false positive); the DC
// verdict on every tampered return equals the reference rule "EHD2 == EHD1",
// which for a fixed key_2 holds exactly when the two addresses have the same
// Hamming distance to key_2; one-bit changes are always caught; every JOP
// target decrypts to a different instruction. The fraction of random
// overwrites that happen to share the Hamming distance is printed and must
// lie near C(64,32)/2**64 ~ 0.099. key_2 refreshes happen at the end of
// every run and are counted.
//
// The attack kinds follow the published security analysis and the run count
// the size of the RIPE suite; the random mix and the reference rule are this
// test's own.
module tb_hcic_attack_campaign;
  import hcic_pkg::*;

  localparam int RUNS = 850;

  int checks = 0, failures = 0;

  logic      clk = 0, rst_n = 0;
  logic      keygen = 0, keys_ready;
  logic      req_valid = 0, req_ready;
  hcic_req_t req = '0;
  logic      rsp_valid;
  hcic_rsp_t rsp;
  logic      alarm, alarm_clear = 0;
  logic      key_update;
  logic [31:0] call_count;

  hcic_top dut (
    .clk(clk), .rst_n(rst_n), .keygen_i(keygen), .keys_ready_o(keys_ready),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .rsp_valid_o(rsp_valid), .rsp_o(rsp), .alarm_o(alarm), .alarm_clear_i(alarm_clear),
    .key_update_o(key_update), .call_count_o(call_count)
  );

  always #5 clk = ~clk;

  // the handler clears every alarm two cycles after it rises
  int   alarms = 0;
  logic alarm_q = 1'b0;
  always @(posedge clk) begin
    alarm_q <= alarm;
    if (rst_n && alarm && !alarm_q) alarms++;
  end
  initial forever begin
    @(posedge alarm);
    repeat (2) @(negedge clk);
    alarm_clear = 1'b1;
    @(negedge clk) alarm_clear = 1'b0;
  end

  int updates = 0;
  always @(posedge clk) if (key_update) updates++;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int hd(logic [31:0] a, logic [31:0] b);
    logic [31:0] v = a ^ b;
    int n = 0;
    for (int i = 0; i < 32; i++) n += int'(v[i]);
    return n;
  endfunction

  task automatic send(input hcic_op_e op, input logic [31:0] data, input logic [31:0] ehd,
                      output hcic_rsp_t r);
    int w = 0;
    @(negedge clk);
    req_valid = 1'b1;
    req.op = op; req.data = data; req.ehd = ehd;
    while (!req_ready && w < 1000) begin @(negedge clk); w++; end
    @(posedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    check(rsp_valid && rsp.op == op, "response follows request");
    r = rsp;
  endtask

  localparam logic [31:0] FUNC     = 32'h0804_84F3;
  localparam logic [31:0] PLAIN_F  = 32'h83E5_8955;
  localparam logic [31:0] W_CALL   = 32'hFFFF_A8E8;
  localparam logic [31:0] W_RET    = 32'h0000_00C3;
  localparam logic [31:0] W_JMPIND = 32'h0000_E1FF;
  localparam logic [31:0] W_SUB    = 32'h0078_EC83;

  typedef struct { logic [31:0] addr; logic [31:0] ehd; } frame_t;

  initial begin
    hcic_rsp_t r;
    logic [31:0] enc_f, key2, bad;
    frame_t stk[$];
    frame_t f;
    int depth, kind, victim;
    int n_clean = 0, n_legit_ret = 0, n_fp = 0;
    int n_rop = 0, n_rop_caught = 0, n_rop_samehd = 0;
    int n_near = 0, n_near_caught = 0, n_jop = 0, n_jop_garbled = 0;
    real frac;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk) keygen = 1'b1;
    @(negedge clk) keygen = 1'b0;
    while (!keys_ready) @(negedge clk);
    send(OP_ENCRYPT, PLAIN_F, '0, r);
    enc_f = r.data;

    for (int run = 0; run < RUNS; run++) begin
      depth  = $urandom_range(1, 4);
      kind   = $urandom_range(0, 3);      // 0 clean, 1 ROP-random, 2 ROP-near, 3 JOP
      victim = $urandom_range(0, depth - 1);
      if (kind == 0) n_clean++;
      // calls
      for (int d = 0; d < depth; d++) begin
        send(OP_FETCH, W_CALL, '0, r);
        send(OP_CALL, 32'h0804_0000 + 32'($urandom_range(0, 16'hFFFF)), '0, r);
        f.addr = req.data; f.ehd = r.data;
        stk.push_back(f);
        send(OP_FETCH, enc_f, '0, r);
        check(r.data == PLAIN_F, "function entry decrypts");
      end
      if (kind == 3) begin
        n_jop++;
        send(OP_FETCH, W_JMPIND, '0, r);
        bad = $urandom;
        send(OP_FETCH, bad, '0, r);
        check(r.decrypted, "JOP target forced through decryption");
        if (r.data != bad) n_jop_garbled++;
        send(OP_FETCH, W_SUB, '0, r);   // processor would fault here; keep going
      end
      // returns, innermost first
      for (int d = depth - 1; d >= 0; d--) begin
        logic tampered;
        f = stk.pop_back();
        key2 = dut.u_keys.key_2_o;
        tampered = 1'b0;
        if (d == victim && kind == 1) begin
          bad = $urandom;
          if (bad == f.addr) bad = ~bad;
          tampered = 1'b1; n_rop++;
          if (hd(bad, key2) == hd(f.addr, key2)) n_rop_samehd++;
        end else if (d == victim && kind == 2) begin
          bad = f.addr ^ (32'd1 << $urandom_range(0, 31));
          tampered = 1'b1; n_near++;
        end else begin
          bad = f.addr;
        end
        send(OP_FETCH, W_RET, '0, r);
        send(OP_RET, bad, f.ehd, r);
        if (!tampered) begin
          n_legit_ret++;
          if (!r.ehd_match) n_fp++;
        end else begin
          check(r.ehd_match == (hd(bad, key2) == hd(f.addr, key2)),
                "verdict follows the Hamming-distance rule");
          if (kind == 1 && !r.ehd_match) n_rop_caught++;
          if (kind == 2 && !r.ehd_match) n_near_caught++;
        end
      end
      check(call_count == 0, "balanced run leaves count zero");
    end
    send(OP_FETCH, W_SUB, '0, r);    // let the last refresh finish

    check(n_fp == 0, $sformatf("%0d legitimate returns rejected", n_fp));
    check(n_near_caught == n_near, "every one-bit overwrite caught");
    check(n_jop_garbled == n_jop, "every JOP target garbled");
    check(n_rop_caught + n_rop_samehd == n_rop, "ROP outcome fully explained");
    frac = (n_rop > 0) ? real'(n_rop_samehd) / real'(n_rop) : 0.0;
    check(frac > 0.03 && frac < 0.20, $sformatf("same-HD fraction %f", frac));
    check(updates == RUNS, $sformatf("key_2 refreshes %0d exp %0d", updates, RUNS));
    check(alarms == n_rop_caught + n_near_caught, $sformatf("alarms %0d exp %0d", alarms, n_rop_caught + n_near_caught));
    check(n_clean > 0 && n_rop > 0 && n_near > 0 && n_jop > 0, "all run kinds occurred");

    $display("runs %0d: clean %0d, legitimate returns %0d (rejected %0d)", RUNS, n_clean, n_legit_ret, n_fp);
    $display("ROP random overwrite: %0d, caught %0d, same HD (passes) %0d, fraction %f",
             n_rop, n_rop_caught, n_rop_samehd, frac);
    $display("ROP one-bit overwrite: %0d, caught %0d", n_near, n_near_caught);
    $display("JOP redirect: %0d, garbled %0d; key_2 refreshes %0d", n_jop, n_jop_garbled, updates);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
