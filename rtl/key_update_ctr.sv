// key_update_ctr: the counter of the key-updating algorithm.
//
// The count is cleared when key_2 is generated. Every call adds one, every ret
// removes one; when a ret brings the count down to zero, no EHD computed with
// the current key_2 is still on the stack, and update_o asks for a fresh
// key_2. Replacing key_2 then invalidates any return address / EHD pairs an
// attacker recorded earlier (return-based full-function reuse).
//
// Timing: call_i / ret_i are sampled at the rising edge; update_o is
// combinational and is high in the cycle of the ret that takes the count from
// 1 to 0, so the ret is still checked with the old key. Choices of this
// design: a ret at count 0 (a ret with no call, which fails its EHD check
// anyway) leaves the count at 0 and requests nothing; the count saturates at
// its maximum; a call and a ret in the same cycle cancel. clear_i has
// priority over both.
module key_update_ctr #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear_i,
  input  logic             call_i,
  input  logic             ret_i,
  output logic [CNT_W-1:0] count_o,
  output logic             update_o
);

  logic inc, dec;

  assign inc      = call_i && !ret_i && (count_o != '1);
  assign dec      = ret_i && !call_i && (count_o != '0);
  assign update_o = !clear_i && dec && (count_o == CNT_W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       count_o <= '0;
    else if (clear_i) count_o <= '0;
    else if (inc)     count_o <= count_o + CNT_W'(1);
    else if (dec)     count_o <= count_o - CNT_W'(1);
  end

endmodule
