// tb_pluto_cmd_rom: self-checking test of the controller's command ROM.
// Walks every opcode's sequence and compares it with the expected list of
// (command, operand rows, flags), written out independently below.
// The ROM is combinational, so each step is read after a short settle delay.
// The expected sequences are this design's Ambit-style lowering; the test
// pins them down so that any change to them is deliberate.
module tb_pluto_cmd_rom;
  import pluto_pkg::*;

  opcode_e op;
  logic [2:0] step;
  uop_t uop;
  int checks = 0, failures = 0;

  pluto_cmd_rom dut (.op, .step, .uop);

  // Expected sequence entry as text: "OP a b c neg sl sb rep".
  function automatic string fmt(uop_t u);
    return $sformatf("%s %s %s %s %0d%0d%0d%0d", u.op.name(), u.a.name(), u.b.name(), u.c.name(),
                     u.neg, u.shift_left, u.shift_byte, u.repeat_imm);
  endfunction

  task automatic expect_seq(opcode_e o, string exp[$]);
    for (int s = 0; s < exp.size(); s++) begin
      op = o; step = 3'(s);
      #1;
      checks += 2;
      if (fmt(uop) != exp[s]) begin
        failures++; $display("FAIL %s step %0d: '%s' exp '%s'", o.name(), s, fmt(uop), exp[s]);
      end
      if (uop.last != (s == exp.size() - 1)) begin
        failures++; $display("FAIL %s step %0d: last=%0d", o.name(), s, uop.last);
      end
    end
  endtask

  initial begin
    expect_seq(OP_MOVE, '{"CMD_AAP SEL_SRC1 SEL_DST SEL_NONE 0000"});
    expect_seq(OP_NOT,  '{"CMD_AAP SEL_SRC1 SEL_DCC SEL_NONE 0000",
                          "CMD_AAP SEL_DCC SEL_DST SEL_NONE 1000"});
    expect_seq(OP_AND,  '{"CMD_AAP SEL_SRC1 SEL_T0 SEL_NONE 0000",
                          "CMD_AAP SEL_SRC2 SEL_T1 SEL_NONE 0000",
                          "CMD_AAP SEL_C0 SEL_T2 SEL_NONE 0000",
                          "CMD_TRA SEL_T0 SEL_T1 SEL_T2 0000",
                          "CMD_AAP SEL_T0 SEL_DST SEL_NONE 0000"});
    expect_seq(OP_OR,   '{"CMD_AAP SEL_SRC1 SEL_T0 SEL_NONE 0000",
                          "CMD_AAP SEL_SRC2 SEL_T1 SEL_NONE 0000",
                          "CMD_AAP SEL_C1 SEL_T2 SEL_NONE 0000",
                          "CMD_TRA SEL_T0 SEL_T1 SEL_T2 0000",
                          "CMD_AAP SEL_T0 SEL_DST SEL_NONE 0000"});
    expect_seq(OP_BIT_SHL,  '{"CMD_SHIFT SEL_SRC1 SEL_SRC1 SEL_NONE 0101"});
    expect_seq(OP_BIT_SHR,  '{"CMD_SHIFT SEL_SRC1 SEL_SRC1 SEL_NONE 0001"});
    expect_seq(OP_BYTE_SHL, '{"CMD_SHIFT SEL_SRC1 SEL_SRC1 SEL_NONE 0111"});
    expect_seq(OP_BYTE_SHR, '{"CMD_SHIFT SEL_SRC1 SEL_SRC1 SEL_NONE 0011"});
    expect_seq(OP_PLUTO, '{"CMD_SWEEP SEL_SRC1 SEL_NONE SEL_NONE 0000",
                           "CMD_LISA SEL_NONE SEL_DST SEL_NONE 0000"});
    expect_seq(OP_LUT_LOAD, '{"CMD_LOAD SEL_SRC1 SEL_NONE SEL_NONE 0001"});
    expect_seq(OP_ROW_ALLOC,      '{"CMD_NOP SEL_NONE SEL_NONE SEL_NONE 0000"});
    expect_seq(OP_SUBARRAY_ALLOC, '{"CMD_NOP SEL_NONE SEL_NONE SEL_NONE 0000"});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
