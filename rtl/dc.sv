// dc: decision circuit. On a ret, compares EHD2 (recomputed by EHDCC from the
// popped return address) with EHD1 (computed at the call and popped from the
// stack). Equal values let the return proceed; a difference means the return
// address was overwritten or the ret has no matching call, and the circuit
// raises the attack warning.
//
// check_i marks a cycle with a comparison. match_o and violation_o are
// combinational and valid in that cycle. alarm_o is set at the clock edge
// after a violation and stays set - the system "waits to be processed" -
// until clear_i. A violation in the same cycle as clear_i wins. Reset is
// active low and asynchronous. The sticky alarm and its clear input are this
// design's reading of that waiting state.
module dc #(
  parameter int unsigned EHD_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             check_i,
  input  logic [EHD_W-1:0] ehd_calc_i,
  input  logic [EHD_W-1:0] ehd_stored_i,
  input  logic             clear_i,
  output logic             match_o,
  output logic             violation_o,
  output logic             alarm_o
);

  assign match_o     = check_i && (ehd_calc_i == ehd_stored_i);
  assign violation_o = check_i && (ehd_calc_i != ehd_stored_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           alarm_o <= 1'b0;
    else if (violation_o) alarm_o <= 1'b1;
    else if (clear_i)     alarm_o <= 1'b0;
  end

endmodule
