// tb_pluto_top_full: one complete LUT query on the bank at its full size
// (16 subarray groups, 8 KB rows, 512-row subarrays, DDR4-2400 timing).
// Workload: 8-bit bit counting (a 256-entry LUT of population counts). The
// LUT is loaded into the first pLUTo-enabled subarray of every group, one
// 128 KB input row of random bytes is queried with a single pluto_op, and all
// 131072 results are compared with $countones. The Row Sweep must take
// (tRCD + tRP) * 256 = 8704 DRAM cycles.
module tb_pluto_top_full;
  import pluto_pkg::*;

  localparam int unsigned RB = 65536, G = 16, NE = RB / 8;
  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, instr_done, host_valid, host_we, host_ready, busy;
  instr_t instr;
  err_e instr_err;
  logic [3:0] host_group, host_target;
  logic [ADDR_W-1:0] host_row;
  logic [RB-1:0] host_wdata, host_rdata;
  logic [RB-1:0] src [G];
  int checks = 0, failures = 0, sweep_cycles = 0;

  always #5 clk = ~clk;

  pluto_top dut (
    .clk, .rst_n, .instr_valid, .instr, .instr_ready, .instr_done, .instr_err,
    .host_valid, .host_we, .host_group, .host_target, .host_row, .host_wdata,
    .host_rdata, .host_ready, .busy);

  // Row Sweep cycles of group 0's pLUTo-enabled subarray 0.
  always @(posedge clk) if (dut.g_grp[0].u_group.l_busy[0]) sweep_cycles++;

  task automatic hwrite(int g, int t, int r, logic [RB-1:0] v);
    @(negedge clk);
    host_valid = 1; host_we = 1; host_group = 4'(g); host_target = 4'(t); host_row = ADDR_W'(r);
    host_wdata = v;
    @(negedge clk);
    host_valid = 0; host_we = 0;
  endtask

  task automatic exec(opcode_e op, int dst, int s1, int lut, int imm, int bitw);
    @(negedge clk);
    instr = '0;
    instr.op = op; instr.dst = 4'(dst); instr.src1 = 4'(s1); instr.lut = 4'(lut);
    instr.imm = imm; instr.bitw = 5'(bitw);
    instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    while (!instr_done) @(negedge clk);
    checks++;
    if (instr_err != ERR_NONE) begin failures++; $display("FAIL %s: %s", op.name(), instr_err.name()); end
  endtask

  initial begin
    instr_valid = 0; instr = '0; host_valid = 0; host_we = 0; host_group = '0; host_target = '0;
    host_row = '0; host_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    exec(OP_ROW_ALLOC, 0, 0, 0, G * NE, 8);      // input row
    exec(OP_ROW_ALLOC, 1, 0, 0, G * NE, 8);      // output row
    exec(OP_SUBARRAY_ALLOC, 0, 0, 0, 256, 0);
    for (int g = 0; g < int'(G); g++) begin
      for (int i = 0; i < 256; i++) hwrite(g, 1, i, {NE{8'($countones(8'(i)))}});
      for (int w = 0; w < int'(RB / 32); w++) src[g][w*32 +: 32] = $urandom;
      hwrite(g, 0, 0, src[g]);
    end
    sweep_cycles = 0;
    exec(OP_PLUTO, 1, 0, 0, 256, 8);
    checks++;
    if (sweep_cycles != (T_RCD_DEF + T_RP_DEF) * 256) begin
      failures++; $display("FAIL sweep took %0d cycles", sweep_cycles);
    end
    for (int g = 0; g < int'(G); g++) begin
      automatic int bad = 0;
      @(negedge clk);
      host_group = 4'(g); host_target = 4'd0; host_row = ADDR_W'(1);
      #1;
      for (int e = 0; e < int'(NE); e++)
        if (host_rdata[e*8 +: 8] != 8'($countones(src[g][e*8 +: 8]))) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("FAIL group %0d: %0d wrong elements", g, bad); end
    end
    $display("sweep cycles %0d, elements queried %0d", sweep_cycles, G * NE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
