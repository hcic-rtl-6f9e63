// key_regs: the four HCIC key registers KEY_1, KEY_2, KEY_LEN_1 and KEY_LEN_2.
//
// KEY_1 holds the PUF response that encrypts/decrypts first instructions at
// call and jmp targets; KEY_2 holds a second, different PUF response used for
// the encrypted Hamming distance of return addresses. Using two keys means a
// key_1 recovered by debugging says nothing about key_2. KEY_LEN_1 and
// KEY_LEN_2 hold the number of key bits the XOR unit applies.
//
// Each register loads on its own enable at the rising clock edge; the new
// value is visible on the outputs from the next cycle. KEY_1 and KEY_2 are
// written from the PUF response bus; KEY_LEN_1/2 are written together when
// the keys are generated. key_2 alone is rewritten by the key-updating
// mechanism. Reset (active low, asynchronous) clears all four and the
// keys_valid_o flag, which is set once both keys have been loaded after
// reset and cleared when a new generation starts (invalidate_i).
//
// The four registers, their contents and the rule that only KEY_2 is
// refreshed follow the published design. The load enables, the
// keys_valid_o flag and the reset value of zero are this design's own.
module key_regs
  import hcic_pkg::*;
#(
  parameter int unsigned W     = XLEN,
  parameter int unsigned KLW   = LEN_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             invalidate_i,
  input  logic             ld_key_1_i,
  input  logic             ld_key_2_i,
  input  logic [W-1:0]     key_i,
  input  logic             ld_len_i,
  input  logic [KLW-1:0] key_len_1_i,
  input  logic [KLW-1:0] key_len_2_i,
  output logic [W-1:0]     key_1_o,
  output logic [W-1:0]     key_2_o,
  output logic [KLW-1:0] key_len_1_o,
  output logic [KLW-1:0] key_len_2_o,
  output logic             keys_valid_o
);

  logic have_1, have_2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_1_o     <= '0;
      key_2_o     <= '0;
      key_len_1_o <= '0;
      key_len_2_o <= '0;
      have_1      <= 1'b0;
      have_2      <= 1'b0;
    end else begin
      if (invalidate_i) begin
        have_1 <= 1'b0;
        have_2 <= 1'b0;
      end
      if (ld_key_1_i) begin
        key_1_o <= key_i;
        have_1  <= 1'b1;
      end
      if (ld_key_2_i) begin
        key_2_o <= key_i;
        have_2  <= 1'b1;
      end
      if (ld_len_i) begin
        key_len_1_o <= key_len_1_i;
        key_len_2_o <= key_len_2_i;
      end
    end
  end

  assign keys_valid_o = have_1 && have_2;

endmodule
