// tb_pluto_controller: self-checking test of the pLUTo Controller.
// A small responder acknowledges each DRAM command after a random delay. The
// test allocates row and subarray registers (including running out of both),
// runs every instruction kind and compares the issued command list, written
// out by hand with the physical rows the allocation must have produced, and
// the reported status. Error cases: unallocated register, LUT larger than its
// allocation or than 2^bitw, unsupported bit width, unknown opcode. LUT
// loading must issue one LOAD per entry with both row numbers advancing.
// Runs at 64-bit rows, 32 rows and two groups, so one row register covers
// 16 bytes. Encodings and command sequences are this design's own.
module tb_pluto_controller;
  import pluto_pkg::*;

  localparam int unsigned RB = 64, NR = 32, G = 2;   // one row spans 16 bytes
  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, instr_done, cmd_valid, cmd_done, busy;
  instr_t instr;
  err_e instr_err;
  dram_cmd_t cmd;
  string issued [$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pluto_controller #(.ROW_BITS(RB), .ROWS(NR), .GROUPS(G), .LUT_SA(2)) dut (
    .clk, .rst_n, .instr_valid, .instr, .instr_ready, .instr_done, .instr_err,
    .cmd_valid, .cmd, .cmd_done, .busy);

  // Command responder.
  initial begin
    cmd_done = 0;
    forever begin
      @(posedge clk);
      if (cmd_valid) begin
        string s;
        case (cmd.op)
          CMD_AAP:   if (cmd.neg) s = $sformatf("AAP %0d->%0d neg", cmd.row_a, cmd.row_b);
                     else         s = $sformatf("AAP %0d->%0d", cmd.row_a, cmd.row_b);
          CMD_TRA:   s = $sformatf("TRA %0d %0d %0d", cmd.row_a, cmd.row_b, cmd.row_c);
          CMD_SHIFT: s = $sformatf("SHIFT %0d->%0d %s%0d", cmd.row_a, cmd.row_b,
                                   cmd.shift_left ? "L" : "R", cmd.shift_byte ? 8 : 1);
          CMD_SWEEP: s = $sformatf("SWEEP %0d lut%0d n=%0d w=%0d", cmd.row_a, cmd.lut_sel,
                                   cmd.lut_size, 1 << int'(cmd.width));
          CMD_LISA:  s = $sformatf("LISA lut%0d->%0d", cmd.lut_sel, cmd.row_b);
          CMD_LOAD:  s = $sformatf("LOAD %0d->lut%0d:%0d", cmd.row_a, cmd.lut_sel, cmd.row_b);
          default:   s = "NOP";
        endcase
        issued.push_back(s);
        repeat ($urandom_range(0, 4)) @(posedge clk);
        #1 cmd_done = 1;
        @(posedge clk);
        #1 cmd_done = 0;
      end
    end
  end

  task automatic exec(opcode_e op, int dst, int s1, int s2, int lut, int imm, int bitw,
                      err_e exp_err, string exp[$]);
    int cyc = 0;
    issued.delete();
    @(negedge clk);
    instr = '0;
    instr.op = op; instr.dst = 4'(dst); instr.src1 = 4'(s1); instr.src2 = 4'(s2);
    instr.lut = 4'(lut); instr.imm = imm; instr.bitw = 5'(bitw);
    instr_valid = 1;
    while (!instr_ready) @(negedge clk);
    @(negedge clk);
    instr_valid = 0;
    while (!instr_done && cyc < 5000) begin @(negedge clk); cyc++; end
    checks += 2;
    if (instr_err != exp_err) begin
      failures++; $display("FAIL %s: err %s exp %s", op.name(), instr_err.name(), exp_err.name());
    end
    if (issued != exp) begin
      failures++;
      $display("FAIL %s: issued %p exp %p", op.name(), issued, exp);
    end
  endtask

  initial begin
    instr_valid = 0; instr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Rows 0..25 are data rows (26..31 reserved: DCC=26, C1=27, C0=28, T2=29, T1=30, T0=31).
    exec(OP_ROW_ALLOC, 0, 0, 0, 0, 16, 8, ERR_NONE, '{});        // r0 -> row 0
    exec(OP_ROW_ALLOC, 1, 0, 0, 0, 40, 8, ERR_NONE, '{});        // r1 -> rows 1..3
    exec(OP_ROW_ALLOC, 2, 0, 0, 0, 0, 8, ERR_NONE, '{});         // r2 -> row 4
    exec(OP_ROW_ALLOC, 3, 0, 0, 0, 400, 8, ERR_ALLOC, '{});      // 25 rows: too many
    exec(OP_ROW_ALLOC, 3, 0, 0, 0, 21 * 16, 8, ERR_NONE, '{});   // r3 -> rows 5..25
    exec(OP_ROW_ALLOC, 4, 0, 0, 0, 1, 8, ERR_ALLOC, '{});        // full
    exec(OP_SUBARRAY_ALLOC, 0, 0, 0, 0, 16, 0, ERR_NONE, '{});   // s0 -> LUT subarray 0
    exec(OP_SUBARRAY_ALLOC, 1, 0, 0, 0, 32, 0, ERR_NONE, '{});   // s1 -> LUT subarray 1
    exec(OP_SUBARRAY_ALLOC, 2, 0, 0, 0, 4, 0, ERR_ALLOC, '{});   // none left
    exec(OP_AND, 2, 0, 1, 0, 0, 0, ERR_NONE,
         '{"AAP 0->31", "AAP 1->30", "AAP 28->29", "TRA 31 30 29", "AAP 31->4"});
    exec(OP_OR, 0, 3, 2, 0, 0, 0, ERR_NONE,
         '{"AAP 5->31", "AAP 4->30", "AAP 27->29", "TRA 31 30 29", "AAP 31->0"});
    exec(OP_NOT, 1, 2, 0, 0, 0, 0, ERR_NONE, '{"AAP 4->26", "AAP 26->1 neg"});
    exec(OP_MOVE, 3, 1, 0, 0, 0, 0, ERR_NONE, '{"AAP 1->5"});
    exec(OP_BIT_SHL, 0, 1, 0, 0, 3, 0, ERR_NONE, '{"SHIFT 1->1 L1", "SHIFT 1->1 L1", "SHIFT 1->1 L1"});
    exec(OP_BYTE_SHR, 0, 2, 0, 0, 2, 0, ERR_NONE, '{"SHIFT 4->4 R8", "SHIFT 4->4 R8"});
    exec(OP_BIT_SHR, 0, 2, 0, 0, 0, 0, ERR_NONE, '{});
    exec(OP_PLUTO, 2, 0, 0, 1, 16, 4, ERR_NONE, '{"SWEEP 0 lut1 n=16 w=4", "LISA lut1->4"});
    exec(OP_PLUTO, 3, 1, 0, 0, 16, 8, ERR_NONE, '{"SWEEP 1 lut0 n=16 w=8", "LISA lut0->5"});
    exec(OP_PLUTO, 3, 1, 0, 0, 17, 8, ERR_LUT_SIZE, '{});        // above s0's 16 rows
    exec(OP_PLUTO, 3, 1, 0, 1, 4, 1, ERR_LUT_SIZE, '{});         // 4 > 2^1
    exec(OP_PLUTO, 3, 1, 0, 1, 4, 3, ERR_BITW, '{});
    exec(OP_PLUTO, 3, 9, 0, 1, 4, 8, ERR_BAD_REG, '{});
    exec(OP_PLUTO, 3, 1, 0, 5, 4, 8, ERR_BAD_REG, '{});
    exec(OP_LUT_LOAD, 0, 3, 0, 1, 3, 0, ERR_NONE, '{"LOAD 5->lut1:0", "LOAD 6->lut1:1", "LOAD 7->lut1:2"});
    exec(OP_LUT_LOAD, 0, 3, 0, 0, 17, 0, ERR_LUT_SIZE, '{});     // above s0's 16 rows
    exec(OP_LUT_LOAD, 0, 3, 0, 1, 22, 0, ERR_LUT_SIZE, '{});     // rows 5..26 pass the data rows
    exec(OP_LUT_LOAD, 0, 9, 0, 1, 2, 0, ERR_BAD_REG, '{});
    exec(OP_AND, 2, 0, 7, 0, 0, 0, ERR_BAD_REG, '{});
    exec(opcode_e'(4'd15), 0, 0, 0, 0, 0, 0, ERR_OPCODE, '{});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
