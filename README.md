# HCIC: a hardware control-flow integrity checker in SystemVerilog

Code-reuse attacks rebuild malicious behaviour from existing code. Return-oriented
programming (ROP) does it by overwriting return addresses on the stack. Jump-oriented
programming (JOP) does it by redirecting indirect `jmp` and `call` instructions. HCIC
stops both with a small unit beside the processor. It needs no new instructions and no
compiler changes. Its secrets are two keys drawn from a physical unclonable function
(PUF):

* **Backward edges (ROP).** At every `call`, HCIC computes an *encrypted Hamming
  distance* (EHD1) between the return address and `key_2`. The processor pushes EHD1 on
  the stack beside the return address. At the `ret`, HCIC computes the EHD again from
  the popped address (EHD2), and a decision circuit compares it with the popped EHD1.
  An overwritten address, or a `ret` with no `call`, gives a mismatch and raises an alarm.
  The attacker sees both the address and its EHD, but without `key_2` cannot produce the
  EHD for another address.
* **Forward edges (JOP).** Before the program is loaded, the first instruction at every
  legitimate `call`/`jmp` target is XOR-encrypted with `key_1`. At run time, the
  instruction fetched right after a `call` or `jmp` is XOR-decrypted with `key_1`. A
  hijacked jump lands on an instruction that was never encrypted. It "decrypts" into a
  wrong instruction, which fails when it executes.
* **Key refresh.** A counter tracks calls minus returns. When a `ret` brings it back to
  zero, no EHD made with the current `key_2` is still live, and `key_2` is replaced by a
  fresh PUF response. Address/EHD pairs an attacker recorded earlier then stop working.
  This closes the return-based full-function reuse attack.

This RTL implements the method as published by Zhang, Qi, Qin and Qu ("HCIC:
Hardware-assisted Control-flow Integrity Checking", IEEE Internet of Things Journal,
2018). That publication describes the unit's blocks and the order of its operations. It
gives no signal-level interface, timing or instruction decoding. Those parts are this
implementation's own, and each one is marked as such below.

## The encrypted Hamming distance

This is the part that needs the most care. For a 32-bit return address `A` and a 32-bit
`key_2`:

1. `HD = popcount(A ^ key_2)`. This lies in 0..32, so it needs 6 bits.
2. Append the *first* (most significant) `l` bits of `key_2` below HD:
   `pre = {HD[5:0], key_2[31 -: l]}`.
3. Rotate `pre` right by `m`, the *last* `k` bits of `key_2`:
   `EHD = rotr(pre, key_2[k-1:0])`.

The EHD is `2^k` bits wide, and `l = 2^k - 6`. The main configuration is `k = 5`,
`l = 26`, giving a 32-bit EHD (`K = 5` in `ehdcc` and `hcic_top`). Worked values that
the testbenches check:

| k | key_2 | input | EHD |
|---|-------|-------|-----|
| 5 | `0x12345678` | HD = 20 | `0x48D15950` |
| 3 | `0xA2156CF7` | A = `0x0804854B` (HD 16) | 132 (`8'b10000100`) |
| 3 | `0xA2156CF7` | A = `0x080486F1` (HD 13) | 108 |

The last two rows are a return address and an attacker's replacement address. They
give different EHDs, so the return is rejected.

The rotation and the appended key bits hide HD from anyone who sees an EHD. One design
point follows directly: `key_2` bits `[31-l .. k]` (bit 5 at `k = 5`) only reach the
EHD through HD.

Keep in mind what the check does and does not prove. For a fixed `key_2`, the EHD is a
one-to-one function of HD alone. A forged return address therefore passes if it has the
same Hamming distance to `key_2` as the genuine one. The attacker does not know `key_2`,
so it cannot pick such an address on purpose, but it can be lucky:

* An address one bit away from the genuine one always changes HD by exactly 1, so it is
  always caught.
* A uniformly random replacement address shares the HD with probability
  C(64,32)/2^64, about 0.099.

The published security analysis accounts for this. It treats a successful guess as
needing both `m` (probability 2^-k) and HD (probability 1/(x+1) for a gadget x bits
away). The attack-campaign testbench measures the random-overwrite case and checks that
the hardware's verdict follows exactly this rule.

## How the processor uses HCIC

`hcic_top` has one request port (valid/ready) and one response port. The processor's
decode stage sends four kinds of request (`hcic_op_e` in `hcic_pkg`):

| op | when | request fields | response `data` |
|----|------|----------------|-----------------|
| `OP_ENCRYPT` | loading: every first instruction at a call/jmp target | `data` = plaintext fetch window | encrypted window, to be written to memory |
| `OP_FETCH` | every instruction reaching decode | `data` = fetch window | IR content, decrypted if the previous fetch was a call or jmp; `cls` = Judger class, `decrypted` flag |
| `OP_CALL` | after a fetch classed `CF_CALL` | `data` = return address | EHD1, to be pushed after the return address |
| `OP_RET` | after a fetch classed `CF_RET` | `data` = popped return address, `ehd` = popped EHD1 | EHD2; `ehd_match` = DC verdict |

Timing:

* Every accepted request (`req_valid_i && req_ready_o` at a rising edge) produces
  `rsp_valid_o` with the response at the next edge. The XOR unit is shared by both keys
  but used once per request, so there are no internal stalls.
* `keygen_i` (a one-cycle pulse at program start-up) draws `key_1` and then `key_2` from
  the PUF. It loads `KEY_LEN_1` and `KEY_LEN_2` and clears the counter. `keys_ready_o`
  rises `2*(PUF_LATENCY+1)` cycles later, which is 10 with the default model.
* The `OP_RET` that brings the counter to zero is still checked with the old `key_2`.
  After it, `req_ready_o` stays low for `PUF_LATENCY+1` cycles while the new `key_2`
  arrives. `key_update_o` pulses when it is loaded.
* When the decision circuit sees a mismatch, `alarm_o` rises at the next edge and stays
  high until `alarm_clear_i`. No request is accepted while it is high. This is how this
  implementation models the system "waiting to be processed" after an attack.
* `req_ready_o` is also low before the first key generation and while one is running.

Protocol assertions in `hcic_top` check that `OP_CALL`/`OP_RET` follow a fetched
call/ret, that no request is accepted without keys, that the PUF is never asked while
busy, and that every DC violation raises the alarm.

HCIC itself does not detect JOP. It hands the processor a wrongly decrypted
instruction, and the processor faults on it. The response's `decrypted` flag and `cls`
show what happened.

## Keys and their lengths

`KEY_1` and `KEY_2` hold different PUF responses. If an attacker recovers `key_1` by
debugging (the plain and encrypted instruction are both visible), that says nothing
about `key_2`. `KEY_LEN_2` is 32: the whole of `key_2` is XORed with the address.
`KEY_LEN_1` must be shorter than the shortest first instruction. Otherwise decryption
would also change bytes of the following instruction. x86 has one-byte instructions, so
the default is `KEY1_LEN = 7`, and `key_1[6:0]` covers bits `[6:0]` of the fetch window
(the first byte in little-endian order). The published text also mentions, in a 32-bit
illustration, encrypting n-bit instructions with an n-bit key. `KEY1_LEN = 32` gives
that variant.

## Blocks and files

| file | block | what it is |
|------|-------|-----------|
| `rtl/hcic_pkg.sv` | - | widths, `cf_class_e`, `hcic_op_e`, `key_sel_e`, request/response structs |
| `rtl/hcic_top.sv` | CFI module | key generation/refresh control, PUFD tracking, wiring of the blocks below |
| `rtl/judger.sv` | Judger | x86 opcode classifier: call (`E8`, `FF/2`, `FF/3`), ret (`C3`, `C2`, `CB`, `CA`), jmp (`E9`, `EB`, `FF/4`, `FF/5`) |
| `rtl/xor_unit.sv` | XOR unit | data XOR (selected key masked to its length) |
| `rtl/key_regs.sv` | KEY_1, KEY_2, KEY_LEN_1, KEY_LEN_2 | load-enabled registers and a keys-valid flag |
| `rtl/ehdcc.sv` | EHDCC | popcount, append, rotate (above) |
| `rtl/dc.sv` | DC | comparator with sticky alarm |
| `rtl/key_update_ctr.sv` | key-update counter | +1 per call, -1 per ret, update request on 1 -> 0 |
| `rtl/puf_model.sv` | PUF | **behavioural model**: xorshift sequence seeded by `CHIP_ID`, one response per request after `LATENCY` cycles |

The four operations of the published method map onto this hardware as follows:
load-time encryption (PUFE) is `OP_ENCRYPT`, EHD encoding at calls (EHDME) is
`OP_CALL`, EHD checking at returns (EHDMD) is `OP_RET` together with DC, and decryption
at targets (PUFD) is `OP_FETCH` after a call or jmp.

The processor pipeline, caches and memory are not part of this RTL. HCIC connects to
them only through the ports above.

## Parameters of `hcic_top`

| parameter | default | meaning | origin |
|-----------|---------|---------|--------|
| `K` | 5 | EHD is `2^K` bits; `m` = `key_2[K-1:0]`, `l = 2^K-6` | published main example; 3..5 are legal |
| `KEY1_LEN` | 7 | value loaded into `KEY_LEN_1` | chosen (shorter than a one-byte instruction) |
| `KEY2_LEN` | 32 | value loaded into `KEY_LEN_2` | published |
| `CNT_W` | 32 | counter width | chosen |
| `PUF_LATENCY` | 4 | PUF model latency | chosen |
| `PUF_CHIP_ID` | `32'h5EED_C0DE` | seed of the PUF model | chosen |

## Where this implementation departs from, or goes beyond, the published design

* **Interface, op codes, one-cycle latency, sticky alarm, stall during key refresh.**
  The publication names none of these. They are this implementation's own.
* **Judger decoding.** This implementation chose the x86 opcode set. Prefixes are not
  decoded, and conditional jumps are not treated as `jmp`.
* **Counter trigger.** The algorithm listing counts only *indirect* calls, but the prose
  counts every call. Every call pushes an EHD made with `key_2`, so the counter here
  counts every call.
* **PUF.** A real PUF is a process-specific circuit. `puf_model` only mimics its
  behaviour: chip-unique, fresh response per request, no reliability requirement. Its
  output is not random in any security sense. Replace it with the real PUF's wrapper,
  keeping the `req_i`/`busy_o`/`valid_o`/`resp_o` handshake.
* **Return sites that are also jmp targets.** Code that leaves a function by `jmp` to a
  return site (longjmp, some exception paths) needs that site's first instruction
  encrypted. A normal `ret` to the same site would then fetch it without decrypting it.
  The published method does not resolve this case, and neither does this RTL. The
  testbench uses a return site reached only by `jmp`.
* **Fall-through into an encrypted block.** Decryption happens only after a `call` or
  `jmp`. A block whose first instruction is encrypted must therefore never be entered
  by straight-line execution. The published method handles this in software: the
  binary rewriter inserts a `jmp` to the block just before it. The hardware relies on
  that rewrite being done.
* **Unpaired `ret` at count 0** leaves the counter at 0 and requests no refresh. The
  counter saturates at its maximum.

## Verification

Every block has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each ends with
one `TB_RESULT checks=N failures=M` line and has a watchdog.

* `tb_ehdcc`: the three worked values above, plus 2000 random vectors at k = 5 and
  k = 3, compared with a bit-serial reference.
* `tb_xor_unit`, `tb_judger`, `tb_key_regs`, `tb_dc`, `tb_key_update_ctr`,
  `tb_puf_model`: reference tables and models of their own. `tb_puf_model` checks the
  exact latency.
* `tb_hcic_top`: runs the whole unit at its default parameters. The testbench plays the
  processor, with program memory as fetch windows and one stack per thread. It covers:
  key generation (exact latency), load-time encryption, call/ret, call and jmp target
  decryption, a jmp target whose first instruction is a call, nested calls, key refresh
  with its exact stall, a ROP overwrite, a `ret` with no `call`, a JOP jump to an
  unencrypted gadget, replay of a recorded address/EHD pair after a refresh,
  longjmp-style exit, two interleaved threads, alarm blocking, and a second key
  generation. It counts each of these 18 mechanisms and fails if any never occurs.
* `tb_hcic_fig7`: the worked call/ret and jmp example, through the whole unit at
  k = 3. The PUF model is seeded so that `key_2` = 0xA2156CF7. The checks are:
  * the call at return address 0x0804854B stores EHD 132, and the honest `ret` matches;
  * the overwritten return address 0x080486F1 gives EHD 108 and raises the alarm;
  * `jmp [eax+0xe3]` into the unencrypted `add %edx,%eax` is decrypted into a
    different opcode (0x01 becomes 0x16).
* `tb_hcic_attack_campaign`: 850 randomised runs at the default parameters, sized like
  the RIPE attack suite. A quarter of the runs are clean nests of 1-4 calls. The rest
  carry one attack each: a random return-address overwrite, a one-bit overwrite, or a
  JOP redirect to a random unencrypted word. Pass criteria:
  * no legitimate return is ever rejected;
  * every one-bit overwrite and every JOP target is caught;
  * the verdict on every random overwrite matches the Hamming-distance rule above, and
    the fraction that slips through is about 0.09, as expected;
  * `key_2` is refreshed after every run, 850 refreshes in all.

Run one with plain Verilator (5.x), from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hcic_pkg.sv tb/tb_hcic_top.sv \
          --top-module tb_hcic_top -Mdir obj_top
./obj_top/Vtb_hcic_top
```

Replace `hcic_top` with any other module name to run that block's testbench. Verilator
finds the block files through `-Irtl`.

The published evaluation consists of software benchmarks (SPEC CPU2006, BioBench,
MiBench and Stream programs) and the RIPE attack suite, run on a processor. None of it
can be simulated here. HCIC keeps no program or stack state of its own, so program size
does not limit it. The only capacity limit is the 32-bit call counter. A 32-bit address
space can hold at most 2^29 outstanding frames of 8 bytes each (return address plus
EHD), which is well below the counter's range.
