// tb_hcic_top: end-to-end test of HCIC with every parameter at its default.
//
// The testbench plays the processor: it holds program memory as fetch
// windows indexed by byte address, a stack per thread of (return address,
// EHD1) pairs, and issues the HCIC operations a decode stage would. Expected
// values are computed here from the key registers' contents with an EHD and
// XOR reference of its own. Scenarios:
//   key generation at start-up (latency), load-time encryption of call/jmp
//   target instructions (PUFE), call/ret with EHD push and check, decryption
//   of call and jmp targets (PUFD), a target that is itself a call, nested
//   calls, key_2 refresh when the call count returns to zero (and the stall
//   it causes), a ROP return-address overwrite, a ret with no call, a JOP jump
//   to an unencrypted instruction, replay of a recorded address/EHD pair after
//   a key refresh, longjmp-style jmp to a return site, interleaved threads,
//   alarm blocking further requests, and a second key generation.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_hcic_top;
  import hcic_pkg::*;

  localparam int LAT = 4;      // PUF model latency at the default
  localparam int KK  = 5;      // EHD parameter k at the default

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

  // ------------------------------------------------------------ bookkeeping
  typedef enum int {
    M_KEYGEN, M_PUFE, M_PUFD_CALL, M_PUFD_JMP, M_EHDME, M_EHD_MATCH, M_NONCF,
    M_KEY_UPDATE, M_UPDATE_STALL, M_ROP, M_UNPAIRED_RET, M_JOP, M_REPLAY,
    M_ALARM_BLOCK, M_NESTED, M_LONGJMP, M_THREADS, M_TARGET_IS_CALL, M_NUM
  } mech_e;
  int mech[M_NUM];
  string mech_name[M_NUM] = '{"keygen", "PUFE", "PUFD after call", "PUFD after jmp",
    "EHDME", "EHD match", "non-control-flow", "key_2 update", "update stall", "ROP detected",
    "unpaired ret detected", "JOP garbled", "replay detected", "alarm blocks requests",
    "nested calls", "longjmp via jmp", "interleaved threads", "target is a call"};

  int updates_seen = 0;
  always @(posedge clk) if (key_update) updates_seen++;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ references
  function automatic int popc(logic [31:0] v);
    int n = 0;
    for (int i = 0; i < 32; i++) n += int'(v[i]);
    return n;
  endfunction

  function automatic logic [31:0] ref_ehd(logic [31:0] addr, logic [31:0] key);
    // {HD, first 26 bits of key}, rotated right by key[4:0]
    logic [31:0] pre;
    int m;
    pre = (32'(popc(addr ^ key)) << 26) | (key >> 6);
    m = int'(key[4:0]);
    return (m == 0) ? pre : ((pre >> m) | (pre << (32 - m)));
  endfunction

  function automatic logic [31:0] key_1();
    return dut.u_keys.key_1_o;
  endfunction
  function automatic logic [31:0] key_2();
    return dut.u_keys.key_2_o;
  endfunction

  // ------------------------------------------------------------ CPU side
  int last_stalls;

  task automatic send(input hcic_op_e op, input logic [31:0] data, input logic [31:0] ehd,
                      output hcic_rsp_t r);
    @(negedge clk);
    req_valid = 1'b1;
    req.op    = op;
    req.data  = data;
    req.ehd   = ehd;
    last_stalls = 0;
    while (!req_ready) begin
      @(negedge clk);
      last_stalls++;
      if (last_stalls > 1000) break;
    end
    @(posedge clk);             // accepted here
    @(negedge clk);
    req_valid = 1'b0;
    check(rsp_valid, "response one cycle after acceptance");
    check(rsp.op == op, "response carries the op");
    r = rsp;
  endtask

  // program memory: fetch windows by byte address, plaintext kept apart
  logic [31:0] imem  [logic [31:0]];
  logic [31:0] plain [logic [31:0]];
  typedef struct { logic [31:0] addr; logic [31:0] ehd; } frame_t;
  frame_t stack_a[$], stack_b[$];

  localparam logic [31:0] MAIN_CALL = 32'h0804_8546;
  localparam logic [31:0] MAIN_RET  = 32'h0804_854B;
  localparam logic [31:0] FUNC      = 32'h0804_84F3;
  localparam logic [31:0] FUNC2     = 32'h0804_8600;
  localparam logic [31:0] BB        = 32'h0804_8700;
  localparam logic [31:0] LJ_SITE   = 32'h0804_8800;
  localparam logic [31:0] CALLT     = 32'h0804_8900;
  localparam logic [31:0] GADGET2   = 32'h0847_53E0;
  localparam logic [31:0] INT80     = 32'h0804_86F1;

  localparam logic [31:0] W_CALL    = 32'hFFFF_A8E8;  // call rel32 (first 4 bytes)
  localparam logic [31:0] W_RET     = 32'h0000_00C3;  // ret
  localparam logic [31:0] W_JMP     = 32'h0000_10E9;  // jmp rel32
  localparam logic [31:0] W_JMPIND  = 32'h00E3_60FF;  // jmp [eax+0xe3]
  localparam logic [31:0] W_SUB     = 32'h0078_EC83;  // sub $0x78,%esp
  localparam logic [31:0] W_ADD     = 32'h0000_D001;  // add %edx,%eax (gadget)

  hcic_rsp_t r;

  // call at a site: fetch, EHDME, push, then fetch the target through PUFD
  task automatic do_call(input logic [31:0] call_window, input logic [31:0] ret_addr,
                         input logic [31:0] target, ref frame_t stk[$], input bit expect_dec);
    frame_t f;
    send(OP_FETCH, call_window, '0, r);
    check(r.cls == CF_CALL, "call classified");
    check(r.decrypted == expect_dec, "call decryption flag");
    send(OP_CALL, ret_addr, '0, r);
    check(r.data == ref_ehd(ret_addr, key_2()),
          $sformatf("EHD1 for %h got %h exp %h", ret_addr, r.data, ref_ehd(ret_addr, key_2())));
    mech[M_EHDME]++;
    f.addr = ret_addr; f.ehd = r.data;
    stk.push_back(f);
    send(OP_FETCH, imem[target], '0, r);
    check(r.decrypted, "call target decrypted");
    check(r.data == plain[target], $sformatf("call target %h decrypts to %h exp %h",
                                             target, r.data, plain[target]));
    mech[M_PUFD_CALL]++;
  endtask

  // ret: fetch, pop, EHDMD; returns the DC verdict
  task automatic do_ret(ref frame_t stk[$], output bit matched);
    frame_t f;
    send(OP_FETCH, W_RET, '0, r);
    check(r.cls == CF_RET && !r.decrypted, "ret classified");
    f = stk.pop_back();
    send(OP_RET, f.addr, f.ehd, r);
    check(r.data == ref_ehd(f.addr, key_2()), "EHD2 value");
    matched = r.ehd_match;
    check(matched == (ref_ehd(f.addr, key_2()) == f.ehd), "DC verdict");
    if (matched) mech[M_EHD_MATCH]++;
  endtask

  task automatic expect_alarm_and_clear();
    @(negedge clk);
    check(alarm, "alarm raised");
    check(!req_ready, "no request accepted during alarm");
    // a request waits while the alarm stands; the handler clears it later
    fork
      begin
        repeat (3) @(negedge clk);
        alarm_clear = 1'b1;
        @(negedge clk);
        alarm_clear = 1'b0;
      end
    join_none
    send(OP_FETCH, W_SUB, '0, r);
    check(last_stalls >= 3, $sformatf("request blocked by alarm for %0d cycles", last_stalls));
    if (last_stalls >= 3) mech[M_ALARM_BLOCK]++;
    check(!alarm, "alarm cleared");
  endtask

  task automatic wait_update();
    // key update runs in the background; the next request waits for it
    int n_before = updates_seen;
    logic [31:0] k_old = key_2();
    send(OP_FETCH, W_SUB, '0, r);
    // this request is offered one cycle after the ret's response, so of the
    // LAT + 1 cycles without ready it sees LAT
    check(last_stalls == LAT, $sformatf("update stall %0d exp %0d", last_stalls, LAT));
    if (last_stalls > 0) mech[M_UPDATE_STALL]++;
    check(updates_seen == n_before + 1, "key_2 update pulse");
    check(key_2() != k_old, "key_2 replaced");
    if (updates_seen == n_before + 1) mech[M_KEY_UPDATE]++;
    check(call_count == 0, "count zero after update");
  endtask

  task automatic keygen_and_load();
    int cyc = 0;
    logic [31:0] tg[5] = '{FUNC, FUNC2, BB, LJ_SITE, CALLT};
    @(negedge clk) keygen = 1'b1;
    @(negedge clk) keygen = 1'b0;
    cyc = 0;   // cycles after the edge that sampled keygen
    while (!keys_ready && cyc < 100) begin @(negedge clk); cyc++; end
    check(cyc == 2 * (LAT + 1), $sformatf("key generation took %0d cycles exp %0d", cyc, 2 * (LAT + 1)));
    check(key_1() != key_2(), "key_1 and key_2 differ");
    check(dut.u_keys.key_len_1_o == 7 && dut.u_keys.key_len_2_o == 32, "key lengths");
    check(call_count == 0, "count cleared by key generation");
    mech[M_KEYGEN]++;
    // load-time encryption of every first instruction at a call/jmp target
    foreach (tg[i]) begin
      send(OP_ENCRYPT, plain[tg[i]], '0, r);
      check(r.data == (plain[tg[i]] ^ (key_1() & 32'h7F)), "PUFE result");
      check(r.data[31:7] == plain[tg[i]][31:7], "PUFE touches only key_length_1 bits");
      imem[tg[i]] = r.data;
      mech[M_PUFE]++;
    end
  endtask

  // ------------------------------------------------------------ scenarios
  initial begin
    bit ok;
    frame_t f, old;
    logic [31:0] k1_first;
    int n_upd;

    plain[FUNC]    = 32'h83E5_8955;  // push %ebp; mov %esp,%ebp
    plain[FUNC2]   = 32'h8B57_5653;  // push %ebx; push %esi; push %edi
    plain[BB]      = 32'h0000_E589;  // mov %esp,%ebp
    plain[LJ_SITE] = 32'h0010_C483;  // add $0x10,%esp
    plain[CALLT]   = 32'hFFFF_F0E8;  // call rel32
    imem[GADGET2]  = W_ADD;          // never encrypted

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!req_ready && !keys_ready, "idle without keys");

    keygen_and_load();
    k1_first = key_1();

    // 1. call / ret pair, then key_2 refresh
    do_call(W_CALL, MAIN_RET, FUNC, stack_a, 1'b0);
    send(OP_FETCH, W_SUB, '0, r);
    check(r.cls == CF_NONE && !r.decrypted && r.data == W_SUB, "plain instruction passes");
    mech[M_NONCF]++;
    check(call_count == 1, "count one inside call");
    do_ret(stack_a, ok);
    check(ok, "legitimate return matches");
    wait_update();

    // 2. nested calls: one refresh, after the outer ret
    n_upd = updates_seen;
    do_call(W_CALL, MAIN_RET, FUNC, stack_a, 1'b0);
    do_call(W_CALL, 32'h0804_8500, FUNC2, stack_a, 1'b0);
    check(call_count == 2, "count two when nested");
    do_ret(stack_a, ok);
    check(ok && updates_seen == n_upd && call_count == 1, "inner return, no refresh");
    do_ret(stack_a, ok);
    check(ok, "outer return matches");
    wait_update();
    mech[M_NESTED]++;

    // 3. jmp to a BB, then jmp to a target whose first instruction is a call
    send(OP_FETCH, W_JMP, '0, r);
    check(r.cls == CF_JMP, "jmp classified");
    send(OP_FETCH, imem[BB], '0, r);
    check(r.decrypted && r.data == plain[BB] && r.cls == CF_NONE, "jmp target decrypted");
    mech[M_PUFD_JMP]++;
    send(OP_FETCH, W_JMP, '0, r);
    do_call(imem[CALLT], 32'h0804_8905, FUNC, stack_a, 1'b1);
    mech[M_TARGET_IS_CALL]++;
    do_ret(stack_a, ok);
    check(ok, "return from call at a jmp target");
    wait_update();

    // 4. ROP: the return address on the stack is overwritten
    do_call(W_CALL, MAIN_RET, FUNC, stack_a, 1'b0);
    stack_a[$].addr = INT80;
    do_ret(stack_a, ok);
    check(!ok, "overwritten return address rejected");
    if (!ok) mech[M_ROP]++;
    expect_alarm_and_clear();
    // the failed ret also took the count to zero: refresh already done
    check(call_count == 0, "count zero after the rejected ret");

    // 5. ret with no call: attacker-supplied address and EHD
    f.addr = 32'h0804_8123; f.ehd = $urandom;
    stack_b.push_back(f);
    do_ret(stack_b, ok);
    check(!ok, "unpaired ret rejected");
    if (!ok) mech[M_UNPAIRED_RET]++;
    expect_alarm_and_clear();

    // 6. JOP: indirect jmp redirected to an unencrypted gadget
    send(OP_FETCH, W_JMPIND, '0, r);
    check(r.cls == CF_JMP, "indirect jmp classified");
    send(OP_FETCH, imem[GADGET2], '0, r);
    check(r.decrypted, "gadget decrypted by force");
    check(r.data == (W_ADD ^ (key_1() & 32'h7F)), "gadget decryption value");
    check(r.data != W_ADD, "gadget instruction garbled");
    if (r.data != W_ADD) mech[M_JOP]++;

    // 7. replay of an address/EHD pair recorded n_before a key_2 refresh
    do_call(W_CALL, MAIN_RET, FUNC, stack_a, 1'b0);
    old = stack_a[$];
    do_ret(stack_a, ok);
    check(ok, "recorded call returns");
    wait_update();
    do_call(W_CALL, 32'h0804_8500, FUNC2, stack_a, 1'b0);
    stack_a[$] = old;                // full-function reuse with a recorded pair
    do_ret(stack_a, ok);
    check(!ok, "stale EHD rejected after key refresh");
    if (!ok) mech[M_REPLAY]++;
    expect_alarm_and_clear();

    // 8. longjmp: leave a function by jmp to an encrypted return site
    do_call(W_CALL, MAIN_RET, FUNC, stack_a, 1'b0);
    send(OP_FETCH, W_JMPIND, '0, r);
    send(OP_FETCH, imem[LJ_SITE], '0, r);
    check(r.decrypted && r.data == plain[LJ_SITE] && !alarm, "longjmp target runs");
    void'(stack_a.pop_back());       // frame reclaimed without a ret
    check(call_count == 1, "count keeps the abandoned call");
    mech[M_LONGJMP]++;

    // 9. two threads, returns in the opposite order of the calls
    do_call(W_CALL, 32'h0804_8A05, FUNC, stack_a, 1'b0);
    do_call(W_CALL, 32'h0804_8B05, FUNC2, stack_b, 1'b0);
    do_ret(stack_a, ok);
    check(ok, "thread A returns first");
    do_ret(stack_b, ok);
    check(ok, "thread B returns second");
    check(!alarm && call_count == 1, "threads leave no alarm");
    mech[M_THREADS]++;

    // 10. next program: new keys, count cleared
    keygen_and_load();
    check(key_1() != k1_first, "new key_1 for the next program");
    do_call(W_CALL, MAIN_RET, FUNC, stack_a, 1'b0);
    do_ret(stack_a, ok);
    check(ok, "call/ret with the new keys");
    wait_update();

    for (int i = 0; i < M_NUM; i++) begin
      check(mech[i] > 0, $sformatf("mechanism '%s' never happened", mech_name[i]));
      $display("mechanism %-24s %0d", mech_name[i], mech[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
