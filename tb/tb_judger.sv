// tb_judger: self-checking test of the instruction classifier. Every first
// byte 00..FF is tried with random following bytes and every ModRM reg field
// for opcode FF; expected classes come from a table written out here.
//
// The three classes follow the published Judger; the opcode table is this
// design's own, taken from the x86 encoding.
module tb_judger;
  import hcic_pkg::*;
  int checks = 0, failures = 0;

  logic [31:0] inst;
  cf_class_e   cls;

  judger dut (.inst_i(inst), .cls_o(cls));

  function automatic cf_class_e expect_cls(logic [31:0] i);
    case (i[7:0])
      8'hE8: return CF_CALL;
      8'hC3, 8'hC2, 8'hCB, 8'hCA: return CF_RET;
      8'hE9, 8'hEB: return CF_JMP;
      8'hFF: begin
        if (i[13:11] == 3'd2 || i[13:11] == 3'd3) return CF_CALL;
        if (i[13:11] == 3'd4 || i[13:11] == 3'd5) return CF_JMP;
        return CF_NONE;
      end
      default: return CF_NONE;
    endcase
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // instructions of the worked examples
    inst = 32'h0000_00E8; #1; check(cls == CF_CALL, "call rel32");
    inst = 32'h0000_00C3; #1; check(cls == CF_RET,  "ret");
    inst = 32'h0000_E1FF; #1; check(cls == CF_JMP,  "jmp ecx (FF E1)");
    inst = 32'h00E3_60FF; #1; check(cls == CF_JMP,  "jmp [eax+0xe3] (FF 60 E3)");
    inst = 32'h0000_D001; #1; check(cls == CF_NONE, "add edx,eax");
    inst = 32'h0000_0061; #1; check(cls == CF_NONE, "popa");
    inst = 32'h0000_80CD; #1; check(cls == CF_NONE, "int 0x80");
    inst = 32'h0000_D0FF; #1; check(cls == CF_CALL, "call eax (FF D0)");
    for (int b = 0; b < 256; b++) begin
      for (int r = 0; r < 8; r++) begin
        inst = {$urandom} & 32'hFFFF_C700;
        inst = inst | 32'(b) | (32'(r) << 11) | (32'($urandom_range(0, 7)) << 8);
        #1;
        check(cls == expect_cls(inst), $sformatf("inst %h got %0d", inst, cls));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
