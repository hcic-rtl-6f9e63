// judger: classifies the instruction in the fetch window as call, ret, jmp or
// a non-control-flow instruction, so that control-flow instructions are handed
// to the CFI logic while all others go straight on to the processor.
//
// The method only says what the Judger decides; the opcode decoding is this
// design's own and assumes x86 encoding, with the first instruction byte in
// inst_i[7:0] and the ModRM byte in inst_i[15:8]. Prefix bytes are not
// decoded. Recognised forms:
//   call : E8 (call rel32), FF /2 (call r/m), FF /3 (call far m)
//   ret  : C3, C2 iw (near), CB, CA iw (far)
//   jmp  : E9 (jmp rel32), EB (jmp rel8), FF /4 (jmp r/m), FF /5 (jmp far m)
// Conditional jumps are not classed as jmp: their fall-through path reaches
// the next instruction without a transfer, so it cannot carry an encrypted
// first instruction.
//
// Purely combinational; cls_o follows inst_i in the same cycle.
module judger
  import hcic_pkg::*;
(
  input  logic [XLEN-1:0] inst_i,
  output cf_class_e       cls_o
);

  logic [7:0] opcode;
  logic [2:0] modrm_reg;

  assign opcode    = inst_i[7:0];
  assign modrm_reg = inst_i[13:11];

  always_comb begin
    unique case (opcode)
      8'hE8:                      cls_o = CF_CALL;
      8'hC3, 8'hC2, 8'hCB, 8'hCA: cls_o = CF_RET;
      8'hE9, 8'hEB:               cls_o = CF_JMP;
      8'hFF: begin
        unique case (modrm_reg)
          3'd2, 3'd3: cls_o = CF_CALL;
          3'd4, 3'd5: cls_o = CF_JMP;
          default:    cls_o = CF_NONE;
        endcase
      end
      default:                    cls_o = CF_NONE;
    endcase
  end

endmodule
