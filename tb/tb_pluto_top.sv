// tb_pluto_top: end-to-end test of the pLUTo bank, at reduced size (two
// subarray groups of 64-bit rows and 256 rows), for each row-buffer design
// (BSA, GSA, GMC), driving the same program into three instances.
//
// Program: the multiply-and-add out = A*B + C over 2-bit A, B and 4-bit C
// held in 8-bit elements, as a compiler would lower it:
//   shift A left by 2, OR with B, query a 16-entry multiply LUT -> tmp;
//   shift tmp left by 4, OR with C, query a 256-entry add LUT   -> out.
// Then NOT, AND, byte shifts and MOVE, each checked against a reference, and
// the error paths (running out of rows and of LUT subarrays, a LUT query
// longer than its allocation, an unallocated register), and loading a LUT
// from data rows with pluto_lut_load followed by a query on it. LUTs are written again
// before every query, which GSA needs because its sweep destroys them. The
// test counts how often each mechanism ran (Row Sweep, LISA-RBM transfer,
// triple-row activation, negated copy, bit and byte shift, each error kind)
// and counts a failure for any that never happened. The sweep latency of
// every query is checked against the design's formula.
module tb_pluto_top;
  import pluto_pkg::*;

  localparam int unsigned RB = 64, NR = 256, G = 2, RCD = 2, RP = 1, LISA = 3;
  localparam int unsigned NE = RB / 8;
  localparam int unsigned GW = 1;

  logic clk = 0, rst_n = 0;
  logic              instr_valid [3];
  instr_t            instr       [3];
  logic              instr_ready [3], instr_done [3], host_ready [3], busy [3];
  err_e              instr_err   [3];
  logic              host_valid  [3], host_we [3];
  logic [GW-1:0]     host_group  [3];
  logic [3:0]        host_target [3];
  logic [ADDR_W-1:0] host_row    [3];
  logic [RB-1:0]     host_wdata  [3], host_rdata [3];
  int checks = 0, failures = 0;
  int n_sweep [3], n_lisa [3], n_tra [3], n_neg [3], n_shl1 [3], n_shr8 [3];
  int n_err_alloc [3], n_err_size [3], n_err_reg [3], n_load [3];

  always #5 clk = ~clk;

  for (genvar d = 0; d < 3; d++) begin : g_dut
    localparam design_e DES = design_e'(d);
    pluto_top #(.ROW_BITS(RB), .ROWS(NR), .GROUPS(G), .LUT_SA(2), .T_RCD(RCD), .T_RP(RP),
                .T_LISA(LISA), .DESIGN(DES)) dut (
      .clk, .rst_n,
      .instr_valid (instr_valid[d]), .instr (instr[d]), .instr_ready (instr_ready[d]),
      .instr_done (instr_done[d]), .instr_err (instr_err[d]),
      .host_valid (host_valid[d]), .host_we (host_we[d]), .host_group (host_group[d]),
      .host_target (host_target[d]), .host_row (host_row[d]), .host_wdata (host_wdata[d]),
      .host_rdata (host_rdata[d]), .host_ready (host_ready[d]), .busy (busy[d]));

    // Mechanism counters, from the command bus inside the bank.
    always @(posedge clk) if (rst_n && dut.cmd_valid) begin
      case (dut.cmd.op)
        CMD_SWEEP: n_sweep[d]++;
        CMD_LISA:  n_lisa[d]++;
        CMD_LOAD:  n_load[d]++;
        CMD_TRA:   n_tra[d]++;
        CMD_AAP:   if (dut.cmd.neg) n_neg[d]++;
        CMD_SHIFT: begin
          if (dut.cmd.shift_left && !dut.cmd.shift_byte) n_shl1[d]++;
          if (!dut.cmd.shift_left && dut.cmd.shift_byte) n_shr8[d]++;
        end
        default: ;
      endcase
    end
    always @(posedge clk) if (rst_n && instr_done[d]) begin
      if (instr_err[d] == ERR_ALLOC)    n_err_alloc[d]++;
      if (instr_err[d] == ERR_LUT_SIZE) n_err_size[d]++;
      if (instr_err[d] == ERR_BAD_REG)  n_err_reg[d]++;
    end
  end

  // ---- reference data ----
  logic [7:0] A [G][NE], B [G][NE], C [G][NE];

  function automatic logic [RB-1:0] pack(logic [7:0] v [NE]);
    logic [RB-1:0] r;
    for (int e = 0; e < int'(NE); e++) r[e*8 +: 8] = v[e];
    return r;
  endfunction

  task automatic hwrite(int d, int g, int t, int r, logic [RB-1:0] v);
    @(negedge clk);
    while (!host_ready[d]) @(negedge clk);
    host_valid[d] = 1; host_we[d] = 1; host_group[d] = GW'(g); host_target[d] = 4'(t);
    host_row[d] = ADDR_W'(r); host_wdata[d] = v;
    @(negedge clk);
    host_valid[d] = 0; host_we[d] = 0;
  endtask

  task automatic hread(int d, int g, int t, int r, output logic [RB-1:0] v);
    @(negedge clk);
    host_group[d] = GW'(g); host_target[d] = 4'(t); host_row[d] = ADDR_W'(r);
    #1 v = host_rdata[d];
  endtask

  // Returns the number of cycles the instruction took.
  task automatic exec(int d, opcode_e op, int dst, int s1, int s2, int lut, int imm, int bitw,
                      err_e exp_err, output int cycles);
    cycles = 0;
    @(negedge clk);
    instr[d] = '0;
    instr[d].op = op; instr[d].dst = 4'(dst); instr[d].src1 = 4'(s1); instr[d].src2 = 4'(s2);
    instr[d].lut = 4'(lut); instr[d].imm = imm; instr[d].bitw = 5'(bitw);
    instr_valid[d] = 1;
    while (!instr_ready[d]) @(negedge clk);
    @(negedge clk);
    instr_valid[d] = 0;
    while (!instr_done[d] && cycles < 100000) begin @(negedge clk); cycles++; end
    checks++;
    if (instr_err[d] != exp_err) begin
      failures++;
      $display("FAIL design %0d %s: err %s exp %s", d, op.name(), instr_err[d].name(), exp_err.name());
    end
  endtask

  task automatic load_luts(int d);
    for (int g = 0; g < int'(G); g++) begin
      for (int i = 0; i < 16; i++) hwrite(d, g, 1, i, {NE{8'((i >> 2) * (i & 3))}});
      for (int i = 0; i < 256; i++) hwrite(d, g, 2, i, {NE{8'((i >> 4) + (i & 15))}});
    end
  endtask

  task automatic check_row(int d, int r, logic [RB-1:0] exp [G], string what);
    logic [RB-1:0] v;
    for (int g = 0; g < int'(G); g++) begin
      hread(d, g, 0, r, v);
      checks++;
      if (v !== exp[g]) begin
        failures++; $display("FAIL design %0d %s group %0d: %h exp %h", d, what, g, v, exp[g]);
      end
    end
  endtask

  // Cycles of a pluto_op as counted by exec: decode, issue, source row open
  // (tRCD), Row Sweep, issue, LISA-RBM and store (tLISA + tRCD + tRP), retire;
  // the first sweep cycle overlaps the source open's last.
  function automatic int op_cycles(int d, int n);
    automatic int sweep = (d == 0) ? (RCD + RP) * n : RCD * n + RP;
    return 1 + 1 + RCD + sweep + 1 + (LISA + RCD + RP);
  endfunction

  task automatic run(int d);
    int cyc;
    logic [RB-1:0] exp [G];
    logic [RB-1:0] v;
    // Allocation: rows 0..5 hold A, B, C, tmp, out, scratch (span 16 bytes per row).
    for (int r = 0; r < 6; r++) exec(d, OP_ROW_ALLOC, r, 0, 0, 0, 16, 8, ERR_NONE, cyc);
    exec(d, OP_SUBARRAY_ALLOC, 0, 0, 0, 0, 16, 0, ERR_NONE, cyc);
    exec(d, OP_SUBARRAY_ALLOC, 1, 0, 0, 0, 256, 0, ERR_NONE, cyc);
    exec(d, OP_SUBARRAY_ALLOC, 2, 0, 0, 0, 4, 0, ERR_ALLOC, cyc);
    for (int g = 0; g < int'(G); g++) begin
      for (int e = 0; e < int'(NE); e++) begin
        A[g][e] = 8'($urandom_range(0, 3));
        B[g][e] = 8'($urandom_range(0, 3));
        C[g][e] = 8'($urandom_range(0, 15));
      end
      hwrite(d, g, 0, 0, pack(A[g]));
      hwrite(d, g, 0, 1, pack(B[g]));
      hwrite(d, g, 0, 2, pack(C[g]));
    end
    // out = A*B + C
    load_luts(d);
    exec(d, OP_BIT_SHL, 0, 0, 0, 0, 2, 0, ERR_NONE, cyc);
    exec(d, OP_OR, 5, 0, 1, 0, 0, 0, ERR_NONE, cyc);
    exec(d, OP_PLUTO, 3, 5, 0, 0, 16, 8, ERR_NONE, cyc);
    checks++;
    if (cyc != op_cycles(d, 16)) begin failures++; $display("FAIL design %0d mul query took %0d cycles, exp %0d", d, cyc, op_cycles(d, 16)); end
    for (int g = 0; g < int'(G); g++) for (int e = 0; e < int'(NE); e++) exp[g][e*8 +: 8] = A[g][e] * B[g][e];
    check_row(d, 3, exp, "A*B");
    load_luts(d);
    exec(d, OP_BIT_SHL, 0, 3, 0, 0, 4, 0, ERR_NONE, cyc);
    exec(d, OP_OR, 5, 3, 2, 0, 0, 0, ERR_NONE, cyc);
    exec(d, OP_PLUTO, 4, 5, 0, 1, 256, 8, ERR_NONE, cyc);
    checks++;
    if (cyc != op_cycles(d, 256)) begin failures++; $display("FAIL design %0d add query took %0d cycles, exp %0d", d, cyc, op_cycles(d, 256)); end
    for (int g = 0; g < int'(G); g++) for (int e = 0; e < int'(NE); e++) exp[g][e*8 +: 8] = A[g][e] * B[g][e] + C[g][e];
    check_row(d, 4, exp, "A*B+C");
    // NOT, AND, byte shift, MOVE on the rows above.
    exec(d, OP_NOT, 5, 2, 0, 0, 0, 0, ERR_NONE, cyc);
    for (int g = 0; g < int'(G); g++) exp[g] = ~pack(C[g]);
    check_row(d, 5, exp, "NOT C");
    exec(d, OP_AND, 5, 5, 1, 0, 0, 0, ERR_NONE, cyc);
    for (int g = 0; g < int'(G); g++) exp[g] = ~pack(C[g]) & pack(B[g]);
    check_row(d, 5, exp, "~C & B");
    exec(d, OP_BYTE_SHR, 0, 5, 0, 0, 3, 0, ERR_NONE, cyc);
    for (int g = 0; g < int'(G); g++) exp[g] = (~pack(C[g]) & pack(B[g])) >> 24;
    check_row(d, 5, exp, "byte shift");
    exec(d, OP_MOVE, 0, 5, 0, 0, 0, 0, ERR_NONE, cyc);
    check_row(d, 0, exp, "move");
    // Errors.
    exec(d, OP_PLUTO, 4, 5, 0, 0, 32, 8, ERR_LUT_SIZE, cyc);
    exec(d, OP_PLUTO, 4, 9, 0, 0, 16, 8, ERR_BAD_REG, cyc);
    exec(d, OP_ROW_ALLOC, 7, 0, 0, 0, NR * 16, 8, ERR_ALLOC, cyc);
    // The constant rows were not disturbed: C0 still reads zero via AND.
    exec(d, OP_AND, 5, 4, 4, 0, 0, 0, ERR_NONE, cyc);
    for (int g = 0; g < int'(G); g++) for (int e = 0; e < int'(NE); e++) exp[g][e*8 +: 8] = A[g][e] * B[g][e] + C[g][e];
    check_row(d, 5, exp, "x & x");
    // LUT loading from memory: the multiply LUT is kept in data rows 6..21 and
    // copied into LUT subarray 0 (cleared first) by pluto_lut_load.
    exec(d, OP_ROW_ALLOC, 6, 0, 0, 0, 16 * 16, 8, ERR_NONE, cyc);
    for (int g = 0; g < int'(G); g++)
      for (int i = 0; i < 16; i++) begin
        hwrite(d, g, 0, 6 + i, {NE{8'((i >> 2) * (i & 3))}});
        hwrite(d, g, 1, i, '0);
      end
    exec(d, OP_LUT_LOAD, 0, 6, 0, 0, 17, 0, ERR_LUT_SIZE, cyc);
    exec(d, OP_LUT_LOAD, 0, 6, 0, 0, 16, 0, ERR_NONE, cyc);
    checks++;
    if (cyc != 1 + 16 * (1 + LISA + RCD + RP)) begin
      failures++; $display("FAIL design %0d LUT load took %0d cycles", d, cyc);
    end
    for (int g = 0; g < int'(G); g++) begin
      logic [7:0] idx [NE];
      for (int e = 0; e < int'(NE); e++) begin
        idx[e] = 8'($urandom_range(0, 15));
        exp[g][e*8 +: 8] = 8'((idx[e] >> 2) * (idx[e] & 3));
      end
      hwrite(d, g, 0, 5, pack(idx));
    end
    exec(d, OP_PLUTO, 3, 5, 0, 0, 16, 8, ERR_NONE, cyc);
    check_row(d, 3, exp, "query after LUT load");
  endtask

  task automatic need(int d, string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL design %0d: mechanism '%s' never happened", d, what); end
    else $display("design %0d: %s x%0d", d, what, n);
  endtask

  initial begin
    for (int d = 0; d < 3; d++) begin
      instr_valid[d] = 0; instr[d] = '0; host_valid[d] = 0; host_we[d] = 0; host_group[d] = '0;
      host_target[d] = '0; host_row[d] = '0; host_wdata[d] = '0;
      n_sweep[d] = 0; n_lisa[d] = 0; n_tra[d] = 0; n_neg[d] = 0; n_shl1[d] = 0; n_shr8[d] = 0;
      n_err_alloc[d] = 0; n_err_size[d] = 0; n_err_reg[d] = 0; n_load[d] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int d = 0; d < 3; d++) run(d);
    repeat (2) @(negedge clk);
    for (int d = 0; d < 3; d++) begin
      need(d, "row sweep", n_sweep[d]);
      need(d, "LISA-RBM transfer", n_lisa[d]);
      need(d, "triple-row activation", n_tra[d]);
      need(d, "negated copy (NOT)", n_neg[d]);
      need(d, "1-bit left shift", n_shl1[d]);
      need(d, "8-bit right shift", n_shr8[d]);
      need(d, "LUT load over LISA-RBM", n_load[d]);
      need(d, "allocation overflow", n_err_alloc[d]);
      need(d, "LUT size error", n_err_size[d]);
      need(d, "unallocated register error", n_err_reg[d]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
