// xor_unit: the single XOR operation unit that HCIC shares between its two
// defences.
//
// With sel_i = SEL_KEY_1 it XORs an instruction with key_1 (encryption of a
// first instruction at a call/jmp target before loading, and its decryption
// in the IR at run time; XOR is its own inverse). With sel_i = SEL_KEY_2 it
// XORs a return address with key_2, the first step of the encrypted Hamming
// distance. Only the low key_len bits of the selected key take part, as set by
// the KEY_LEN_1 / KEY_LEN_2 registers: key_1 must be shorter than the shortest
// instruction so that it never touches the bytes of the instruction after it,
// key_2 is the full 32 bits. Which end of the word the key covers is not
// stated by the method; this design uses the low bits, i.e. the first bytes
// of a little-endian fetch window. A length of W or more selects the whole key.
//
// Purely combinational.
module xor_unit
  import hcic_pkg::*;
#(
  parameter int unsigned W     = XLEN,
  parameter int unsigned KLW   = LEN_W
) (
  input  logic [W-1:0]     data_i,
  input  key_sel_e         sel_i,
  input  logic [W-1:0]     key_1_i,
  input  logic [W-1:0]     key_2_i,
  input  logic [KLW-1:0] key_len_1_i,
  input  logic [KLW-1:0] key_len_2_i,
  output logic [W-1:0]     data_o
);

  logic [W-1:0]     key;
  logic [KLW-1:0] len;
  logic [W-1:0]     mask;

  always_comb begin
    key = (sel_i == SEL_KEY_1) ? key_1_i : key_2_i;
    len = (sel_i == SEL_KEY_1) ? key_len_1_i : key_len_2_i;
    for (int unsigned i = 0; i < W; i++) begin
      mask[i] = (i < 32'(len));
    end
    data_o = data_i ^ (key & mask);
  end

endmodule
