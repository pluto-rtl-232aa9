// pluto_cmd_rom: the pLUTo Controller's command ROM.
//
// Maps (opcode, step) to one DRAM-side command template. The controller walks
// the steps of an instruction until an entry marked `last`; row operands are
// named symbolically (source, destination, compute rows T0-T2, constant rows
// C0/C1, dual-contact row DCC) and resolved to addresses by the controller.
//   MOVE   AAP src1->dst
//   NOT    AAP src1->DCC ; AAP ~DCC->dst
//   AND    AAP src1->T0 ; AAP src2->T1 ; AAP C0->T2 ; TRA T0,T1,T2 ; AAP T0->dst
//   OR     as AND with C1 in place of C0
//   shifts SHIFT src1->src1, repeated imm times (1-bit or 8-bit steps)
//   PLUTO  SWEEP (open src1, Row Sweep the LUT) ; LISA result->dst
//   LUT_LOAD  LOAD src1+i -> LUT row i, repeated imm times (the controller
//          adds the repetition count to both row numbers)
// Allocation instructions need no DRAM command; their single entry is a NOP.
// Timing: combinational. The sequences for NOT/AND/OR follow the published
// triple-row-activation scheme the design reuses; their exact order is this
// implementation's.
module pluto_cmd_rom
  import pluto_pkg::*;
(
  input  opcode_e    op,
  input  logic [2:0] step,
  output uop_t       uop
);

  function automatic uop_t mk(cmd_op_e o, rowsel_e a, rowsel_e b, rowsel_e c,
                              logic neg, logic sl, logic sb, logic rep, logic last);
    uop_t u;
    u.op = o; u.a = a; u.b = b; u.c = c; u.neg = neg;
    u.shift_left = sl; u.shift_byte = sb; u.repeat_imm = rep; u.last = last;
    return u;
  endfunction

  always_comb begin
    uop = mk(CMD_NOP, SEL_NONE, SEL_NONE, SEL_NONE, 1'b0, 1'b0, 1'b0, 1'b0, 1'b1);
    case (op)
      OP_MOVE: uop = mk(CMD_AAP, SEL_SRC1, SEL_DST, SEL_NONE, 1'b0, 1'b0, 1'b0, 1'b0, 1'b1);
      OP_NOT: case (step)
        3'd0:    uop = mk(CMD_AAP, SEL_SRC1, SEL_DCC, SEL_NONE, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0);
        default: uop = mk(CMD_AAP, SEL_DCC,  SEL_DST, SEL_NONE, 1'b1, 1'b0, 1'b0, 1'b0, 1'b1);
      endcase
      OP_AND, OP_OR: case (step)
        3'd0:    uop = mk(CMD_AAP, SEL_SRC1, SEL_T0, SEL_NONE, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0);
        3'd1:    uop = mk(CMD_AAP, SEL_SRC2, SEL_T1, SEL_NONE, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0);
        3'd2:    uop = mk(CMD_AAP, (op == OP_AND) ? SEL_C0 : SEL_C1, SEL_T2, SEL_NONE,
                          1'b0, 1'b0, 1'b0, 1'b0, 1'b0);
        3'd3:    uop = mk(CMD_TRA, SEL_T0, SEL_T1, SEL_T2, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0);
        default: uop = mk(CMD_AAP, SEL_T0, SEL_DST, SEL_NONE, 1'b0, 1'b0, 1'b0, 1'b0, 1'b1);
      endcase
      OP_BIT_SHL:  uop = mk(CMD_SHIFT, SEL_SRC1, SEL_SRC1, SEL_NONE, 1'b0, 1'b1, 1'b0, 1'b1, 1'b1);
      OP_BIT_SHR:  uop = mk(CMD_SHIFT, SEL_SRC1, SEL_SRC1, SEL_NONE, 1'b0, 1'b0, 1'b0, 1'b1, 1'b1);
      OP_BYTE_SHL: uop = mk(CMD_SHIFT, SEL_SRC1, SEL_SRC1, SEL_NONE, 1'b0, 1'b1, 1'b1, 1'b1, 1'b1);
      OP_BYTE_SHR: uop = mk(CMD_SHIFT, SEL_SRC1, SEL_SRC1, SEL_NONE, 1'b0, 1'b0, 1'b1, 1'b1, 1'b1);
      OP_PLUTO: case (step)
        3'd0:    uop = mk(CMD_SWEEP, SEL_SRC1, SEL_NONE, SEL_NONE, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0);
        default: uop = mk(CMD_LISA,  SEL_NONE, SEL_DST,  SEL_NONE, 1'b0, 1'b0, 1'b0, 1'b0, 1'b1);
      endcase
      OP_LUT_LOAD: uop = mk(CMD_LOAD, SEL_SRC1, SEL_NONE, SEL_NONE, 1'b0, 1'b0, 1'b0, 1'b1, 1'b1);
      default: ;
    endcase
  end

endmodule
