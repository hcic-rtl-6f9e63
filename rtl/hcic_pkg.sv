// hcic_pkg: types and constants shared by the HCIC (hardware-assisted
// control-flow integrity checking) blocks.
//
// HCIC sits beside a 32-bit CISC (x86-like) processor. Addresses, the fetch
// window that holds an instruction and both PUF keys are XLEN = 32 bits wide,
// as in the design this RTL follows. A Hamming distance between two 32-bit
// words lies in 0..32 and therefore needs 6 bits. The encrypted
// Hamming distance (EHD) is 2**K bits wide; K is at most 5, so every EHD fits
// in an XLEN-wide field, which is how it travels in the request and response
// structs below (upper bits zero when K < 5).
//
// The operation codes name the four jobs the CPU hands to HCIC. They are this
// design's own encoding of the sequence of steps the method describes:
//   OP_ENCRYPT  load-time encryption of a first instruction at a call/jmp
//               target with key_1 (PUFE)
//   OP_FETCH    an instruction reaching decode: decrypted with key_1 when it
//               follows a call or jmp (PUFD), then classified by the Judger
//   OP_CALL     return address of a call: EHD1 is computed with key_2 and
//               handed back to be pushed on the stack (EHDME)
//   OP_RET      popped return address and popped EHD1 of a ret: EHD2 is
//               computed and compared with EHD1 (EHDMD)
package hcic_pkg;

  localparam int unsigned XLEN  = 32;
  localparam int unsigned LEN_W = 6;   // width of KEY_LEN_1 / KEY_LEN_2 (0..32)

  typedef enum logic [1:0] {
    CF_NONE = 2'd0,   // non-control-flow instruction
    CF_CALL = 2'd1,
    CF_RET  = 2'd2,
    CF_JMP  = 2'd3
  } cf_class_e;

  typedef enum logic [1:0] {
    OP_ENCRYPT = 2'd0,
    OP_FETCH   = 2'd1,
    OP_CALL    = 2'd2,
    OP_RET     = 2'd3
  } hcic_op_e;

  typedef enum logic {
    SEL_KEY_1 = 1'b0,  // instruction path, key_1 limited to key_length_1 bits
    SEL_KEY_2 = 1'b1   // return-address path, key_2 limited to key_length_2 bits
  } key_sel_e;

  typedef struct packed {
    hcic_op_e          op;
    logic [XLEN-1:0]   data;  // instruction (ENCRYPT, FETCH) or return address (CALL, RET)
    logic [XLEN-1:0]   ehd;   // RET only: EHD1 popped from the stack
  } hcic_req_t;

  typedef struct packed {
    hcic_op_e          op;
    logic [XLEN-1:0]   data;       // ENCRYPT: encrypted instruction; FETCH: IR content;
                                   // CALL/RET: computed EHD (EHD1 / EHD2)
    cf_class_e         cls;        // FETCH: Judger verdict on the IR content
    logic              decrypted;  // FETCH: PUFD was applied
    logic              ehd_match;  // RET: EHD2 equals EHD1
  } hcic_rsp_t;

endpackage
