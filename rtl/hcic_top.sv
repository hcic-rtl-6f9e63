// hcic_top: the hardware-assisted CFI module attached to the processor.
//
// HCIC defends a program against code-reuse attacks with two checks that need
// no new instructions and no compiler change:
//   * returns (ROP): at every call the encrypted Hamming distance EHD1 between
//     the return address and the secret PUF key key_2 is computed and pushed
//     on the stack beside the return address. At the ret the EHD of the popped
//     address (EHD2) is computed again and compared with the popped EHD1; a
//     mismatch raises the attack alarm.
//   * forward edges (JOP): before loading, the first instruction at every
//     call/jmp target is XOR-encrypted with a second PUF key key_1. At run
//     time the instruction fetched right after a call or jmp is XOR-decrypted
//     with key_1; a hijacked call/jmp lands on an unencrypted instruction,
//     which decrypts to a wrong instruction and fails when executed.
// key_2 is replaced by a fresh PUF response whenever the count of calls minus
// returns falls back to zero, so recorded address/EHD pairs go stale.
//
// Blocks: PUF (behavioural model), key registers KEY_1/KEY_2/KEY_LEN_1/
// KEY_LEN_2, the Judger, one shared XOR unit, EHDCC, the decision circuit DC,
// and the key-update counter. The control logic below sequences them.
//
// Interface to the processor (a valid/ready request, a one-cycle-later
// response; see hcic_pkg for the fields):
//   keygen_i      program start-up: draw key_1 and key_2 from the PUF, load
//                 KEY_LEN_1 = KEY1_LEN and KEY_LEN_2 = 32, clear the counter.
//                 keys_ready_o rises when done (2*(PUF_LATENCY+1) cycles).
//   req_*         one operation per accepted request (valid && ready):
//                 OP_ENCRYPT  PUFE, data XOR key_1 returned (load time)
//                 OP_FETCH    instruction at decode; PUFD when the previously
//                             fetched instruction was a call or jmp; the IR
//                             content and its Judger class are returned
//                 OP_CALL     return address of the call just fetched; EHD1
//                             returned to be pushed (EHDME)
//                 OP_RET      popped address and popped EHD1; EHD2 and the DC
//                             verdict returned (EHDMD)
//   rsp_*         rsp_valid_o is high one cycle after each accepted request.
//   alarm_o       sticky attack warning from DC; while it is set no request
//                 is accepted until alarm_clear_i.
// req_ready_o is low while keys are missing or being generated, during a
// key_2 update (PUF_LATENCY+1 cycles after the ret that triggered it), and
// while alarm_o is set. Every accepted request takes one cycle: the XOR unit
// is used once per request, so sharing it costs nothing.
//
// What follows the method: the two keys and their length registers, one XOR
// unit for both keys, EHD = rotate-right({HD, first l bits of key_2}, last k
// bits of key_2), comparison in DC, decryption of the first instruction after
// call/jmp, the call/ret counter and key_2 refresh at zero. This design's own
// choices: the request/response protocol and op codes, one-cycle latency,
// KEY1_LEN = 7 (shorter than the shortest, one-byte, x86 instruction), the
// x86 opcode decoding in the Judger, the sticky alarm that blocks further
// requests, and a PUF model in place of a real PUF.
module hcic_top
  import hcic_pkg::*;
#(
  parameter int unsigned K           = 5,             // m = last K bits of key_2, EHD is 2**K bits
  parameter int unsigned KEY1_LEN    = 7,             // KEY_LEN_1 value x
  parameter int unsigned KEY2_LEN    = 32,            // KEY_LEN_2 value
  parameter int unsigned CNT_W       = 32,            // key-update counter width
  parameter int unsigned PUF_LATENCY = 4,             // PUF model response latency (cycles)
  parameter logic [31:0] PUF_CHIP_ID = 32'h5EED_C0DE  // PUF model chip-unique seed
) (
  input  logic             clk,
  input  logic             rst_n,
  // key generation at program start-up
  input  logic             keygen_i,
  output logic             keys_ready_o,
  // requests from the processor's decode stage
  input  logic             req_valid_i,
  output logic             req_ready_o,
  input  hcic_req_t        req_i,
  // responses
  output logic             rsp_valid_o,
  output hcic_rsp_t        rsp_o,
  // attack warning
  output logic             alarm_o,
  input  logic             alarm_clear_i,
  // status
  output logic             key_update_o,   // pulses when a new key_2 is loaded
  output logic [CNT_W-1:0] call_count_o
);

  localparam int unsigned EHD_W = 1 << K;

  typedef enum logic [2:0] {
    S_NOKEY,     // no valid keys (after reset)
    S_GEN_1,     // waiting for the PUF response that becomes key_1
    S_GEN_2,     // waiting for the PUF response that becomes key_2
    S_RUN,       // accepting requests
    S_UPDATE     // waiting for the PUF response that replaces key_2
  } state_e;

  state_e state_q, state_d;

  // ---------------------------------------------------------------- PUF
  logic            puf_req, puf_busy, puf_valid;
  logic [XLEN-1:0] puf_resp;

  puf_model #(
    .W       (XLEN),
    .LATENCY (PUF_LATENCY),
    .CHIP_ID (PUF_CHIP_ID)
  ) u_puf (
    .clk     (clk),
    .rst_n   (rst_n),
    .req_i   (puf_req),
    .busy_o  (puf_busy),
    .valid_o (puf_valid),
    .resp_o  (puf_resp)
  );

  // ---------------------------------------------------------------- keys
  logic             ld_key_1, ld_key_2, ld_len, keys_invalidate, keys_valid;
  logic [XLEN-1:0]  key_1, key_2;
  logic [LEN_W-1:0] key_len_1, key_len_2;

  key_regs #(
    .W     (XLEN),
    .KLW   (LEN_W)
  ) u_keys (
    .clk          (clk),
    .rst_n        (rst_n),
    .invalidate_i (keys_invalidate),
    .ld_key_1_i   (ld_key_1),
    .ld_key_2_i   (ld_key_2),
    .key_i        (puf_resp),
    .ld_len_i     (ld_len),
    .key_len_1_i  (LEN_W'(KEY1_LEN)),
    .key_len_2_i  (LEN_W'(KEY2_LEN)),
    .key_1_o      (key_1),
    .key_2_o      (key_2),
    .key_len_1_o  (key_len_1),
    .key_len_2_o  (key_len_2),
    .keys_valid_o (keys_valid)
  );

  // ---------------------------------------------------------------- datapath
  logic            fire;
  logic            dec_pending_q;   // previous fetched instruction was call/jmp
  key_sel_e        xor_sel;
  logic [XLEN-1:0] xor_out;
  cf_class_e       cls;
  logic [EHD_W-1:0] ehd;
  logic            dc_check, dc_match, dc_violation;

  assign fire = req_valid_i && req_ready_o;

  always_comb begin
    unique case (req_i.op)
      OP_CALL, OP_RET: xor_sel = SEL_KEY_2;
      default:         xor_sel = SEL_KEY_1;
    endcase
  end

  xor_unit #(
    .W     (XLEN),
    .KLW   (LEN_W)
  ) u_xor (
    .data_i      (req_i.data),
    .sel_i       (xor_sel),
    .key_1_i     (key_1),
    .key_2_i     (key_2),
    .key_len_1_i (key_len_1),
    .key_len_2_i (key_len_2),
    .data_o      (xor_out)
  );

  // IR content: decrypted only for the first instruction after a call/jmp
  logic            do_decrypt;
  logic [XLEN-1:0] ir;

  assign do_decrypt = (req_i.op == OP_FETCH) && dec_pending_q;
  assign ir         = do_decrypt ? xor_out : req_i.data;

  judger u_judger (
    .inst_i (ir),
    .cls_o  (cls)
  );

  ehdcc #(
    .W (XLEN),
    .K (K)
  ) u_ehdcc (
    .xor_i   (xor_out),
    .key_2_i (key_2),
    .ehd_o   (ehd)
  );

  assign dc_check = fire && (req_i.op == OP_RET);

  dc #(
    .EHD_W (EHD_W)
  ) u_dc (
    .clk          (clk),
    .rst_n        (rst_n),
    .check_i      (dc_check),
    .ehd_calc_i   (ehd),
    .ehd_stored_i (req_i.ehd[EHD_W-1:0]),
    .clear_i      (alarm_clear_i),
    .match_o      (dc_match),
    .violation_o  (dc_violation),
    .alarm_o      (alarm_o)
  );

  // ---------------------------------------------------------------- key update counter
  logic cnt_clear, cnt_call, cnt_ret, cnt_update;

  assign cnt_call = fire && (req_i.op == OP_CALL);
  assign cnt_ret  = fire && (req_i.op == OP_RET);

  key_update_ctr #(
    .CNT_W (CNT_W)
  ) u_cnt (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear_i  (cnt_clear),
    .call_i   (cnt_call),
    .ret_i    (cnt_ret),
    .count_o  (call_count_o),
    .update_o (cnt_update)
  );

  // ---------------------------------------------------------------- control
  assign req_ready_o  = (state_q == S_RUN) && !alarm_o && !keygen_i;
  assign keys_ready_o = keys_valid && (state_q == S_RUN || state_q == S_UPDATE);
  // kept out of the FSM block: the counter's update_o depends on it
  assign cnt_clear    = keygen_i && state_q != S_GEN_1 && state_q != S_GEN_2;

  always_comb begin
    state_d         = state_q;
    puf_req         = 1'b0;
    ld_key_1        = 1'b0;
    ld_key_2        = 1'b0;
    ld_len          = 1'b0;
    keys_invalidate = 1'b0;
    key_update_o    = 1'b0;

    if (cnt_clear) begin
      // step 1: program start-up, draw key_1 then key_2
      state_d         = S_GEN_1;
      keys_invalidate = 1'b1;
      puf_req         = 1'b1;
    end else begin
      unique case (state_q)
        S_NOKEY: ;
        S_GEN_1: if (puf_valid) begin
          ld_key_1 = 1'b1;
          puf_req  = 1'b1;
          state_d  = S_GEN_2;
        end
        S_GEN_2: if (puf_valid) begin
          ld_key_2 = 1'b1;
          ld_len   = 1'b1;
          state_d  = S_RUN;
        end
        S_RUN: if (cnt_update) begin
          // key-updating: the ret just checked used the old key_2
          puf_req = 1'b1;
          state_d = S_UPDATE;
        end
        S_UPDATE: if (puf_valid) begin
          ld_key_2     = 1'b1;
          key_update_o = 1'b1;
          state_d      = S_RUN;
        end
        default: state_d = S_NOKEY;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_NOKEY;
      dec_pending_q <= 1'b0;
    end else begin
      state_q <= state_d;
      if (keygen_i) begin
        dec_pending_q <= 1'b0;
      end else if (fire && req_i.op == OP_FETCH) begin
        dec_pending_q <= (cls == CF_CALL) || (cls == CF_JMP);
      end
    end
  end

  // ---------------------------------------------------------------- response
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid_o <= 1'b0;
      rsp_o       <= '0;
    end else begin
      rsp_valid_o <= fire;
      if (fire) begin
        rsp_o.op        <= req_i.op;
        rsp_o.cls       <= (req_i.op == OP_FETCH) ? cls : CF_NONE;
        rsp_o.decrypted <= do_decrypt;
        rsp_o.ehd_match <= dc_match;
        unique case (req_i.op)
          OP_ENCRYPT:      rsp_o.data <= xor_out;
          OP_FETCH:        rsp_o.data <= ir;
          OP_CALL, OP_RET: rsp_o.data <= XLEN'(ehd);
          default:         rsp_o.data <= '0;
        endcase
      end
    end
  end

  // ---------------------------------------------------------------- protocol rules
  // EHD work is only requested for the call or ret the Judger has just seen.
  cf_class_e last_cls_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                               last_cls_q <= CF_NONE;
    else if (fire && req_i.op == OP_FETCH)    last_cls_q <= cls;
  end

  a_call_after_call: assert property (@(posedge clk) disable iff (!rst_n)
    (fire && req_i.op == OP_CALL) |-> (last_cls_q == CF_CALL))
    else $error("hcic_top: OP_CALL without a fetched call");

  a_ret_after_ret: assert property (@(posedge clk) disable iff (!rst_n)
    (fire && req_i.op == OP_RET) |-> (last_cls_q == CF_RET))
    else $error("hcic_top: OP_RET without a fetched ret");

  a_keys_before_use: assert property (@(posedge clk) disable iff (!rst_n)
    fire |-> keys_valid)
    else $error("hcic_top: request accepted without keys");

  a_puf_not_busy: assert property (@(posedge clk) disable iff (!rst_n)
    puf_req |-> !puf_busy)
    else $error("hcic_top: PUF requested while busy");

  a_no_violation_unnoticed: assert property (@(posedge clk) disable iff (!rst_n)
    dc_violation |=> alarm_o)
    else $error("hcic_top: DC violation did not raise the alarm");

endmodule
