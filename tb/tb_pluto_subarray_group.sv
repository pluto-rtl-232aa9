// tb_pluto_subarray_group: self-checking test of one subarray group.
// Loads two different LUTs into the two pLUTo-enabled subarrays, writes
// random index rows into the data subarray and runs SWEEP + LISA pairs on
// either LUT, checking the destination rows through the host port, that the
// source rows and LUT rows are untouched, and the SWEEP and LISA latencies.
// LUT loading (CMD_LOAD) copies data rows into one LUT subarray and no other.
// A RowClone copy checks that other commands reach the data subarray.
// Runs at 64-bit rows, 16 rows, tRCD=2, tRP=1, T_LISA=3 cycles; expected
// SWEEP latency tRCD + (tRCD+tRP)*N (source open, then BSA sweep).
module tb_pluto_subarray_group;
  import pluto_pkg::*;

  localparam int unsigned RB = 64, NR = 16, RCD = 2, RP = 1, LISA = 3;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, busy, done, host_we;
  dram_cmd_t cmd;
  logic [3:0] host_target;
  logic [ADDR_W-1:0] host_row;
  logic [RB-1:0] host_wdata, host_rdata;
  logic [7:0] lut [2][NR];
  logic [RB-1:0] data [NR];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pluto_subarray_group #(.ROW_BITS(RB), .ROWS(NR), .LUT_SA(2), .T_RCD(RCD), .T_RP(RP), .T_LISA(LISA)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .busy, .done,
    .host_we, .host_target, .host_row, .host_wdata, .host_rdata);

  task automatic hwrite(int t, int r, logic [RB-1:0] v);
    @(negedge clk);
    host_we = 1; host_target = 4'(t); host_row = ADDR_W'(r); host_wdata = v;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic hread(int t, int r, output logic [RB-1:0] v);
    host_target = 4'(t); host_row = ADDR_W'(r);
    #1 v = host_rdata;
  endtask

  task automatic run(dram_cmd_t c, int lat);
    int cyc = 0, dones = 0;
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (busy) begin
      cyc++;
      if (done) dones++;
      @(negedge clk);
      if (cyc > 10000) break;
    end
    checks += 2;
    if (cyc != lat) begin failures++; $display("FAIL %s latency %0d exp %0d", c.op.name(), cyc, lat); end
    if (dones != 1) begin failures++; $display("FAIL %s done pulses %0d", c.op.name(), dones); end
  endtask

  initial begin
    logic [RB-1:0] v;
    cmd_valid = 0; cmd = '0; host_we = 0; host_target = '0; host_row = '0; host_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 2; k++)
      for (int i = 0; i < int'(NR); i++) begin
        lut[k][i] = (k == 0) ? 8'($countones(i)) : 8'($urandom);
        hwrite(k + 1, i, {(RB / 8){lut[k][i]}});
      end
    for (int n = 0; n < 20; n++) begin
      automatic int k = n % 2, sz = (n < 10) ? NR : $urandom_range(1, NR), src = $urandom_range(0, 5), dst = $urandom_range(6, 9);
      automatic dram_cmd_t c = '0;
      automatic logic [RB-1:0] exp = '0;
      for (int e = 0; e < int'(RB / 8); e++) begin
        automatic int idx = $urandom_range(0, NR - 1);
        data[src][e*8 +: 8] = 8'(idx);
        if (idx < sz) exp[e*8 +: 8] = lut[k][idx];
      end
      hwrite(0, src, data[src]);
      c.op = CMD_SWEEP; c.row_a = ADDR_W'(src); c.lut_sel = 4'(k); c.lut_size = ADDR_W'(sz); c.width = W8;
      run(c, RCD + (RCD + RP) * sz);
      c = '0;
      c.op = CMD_LISA; c.row_b = ADDR_W'(dst); c.lut_sel = 4'(k);
      run(c, LISA + RCD + RP);
      hread(0, dst, v);
      checks++;
      if (v !== exp) begin failures++; $display("FAIL query %0d on LUT %0d: %h exp %h", n, k, v, exp); end
      hread(0, src, v);
      checks++;
      if (v !== data[src]) begin failures++; $display("FAIL source row %0d changed", src); end
    end
    for (int k = 0; k < 2; k++)
      for (int i = 0; i < int'(NR); i++) begin
        hread(k + 1, i, v);
        checks++;
        if (v !== {(RB / 8){lut[k][i]}}) begin failures++; $display("FAIL LUT %0d row %0d changed", k, i); end
      end
    // LUT loading over LISA-RBM: data rows 0..3 into LUT subarray 1, rows 5..8.
    for (int i = 0; i < 4; i++) begin
      automatic dram_cmd_t c = '0;
      automatic logic [RB-1:0] r = {$urandom, $urandom};
      hwrite(0, i, r);
      c.op = CMD_LOAD; c.row_a = ADDR_W'(i); c.row_b = ADDR_W'(5 + i); c.lut_sel = 4'd1;
      run(c, LISA + RCD + RP);
      hread(2, 5 + i, v);
      checks++;
      if (v !== r) begin failures++; $display("FAIL LUT load row %0d: %h exp %h", i, v, r); end
      hread(1, 5 + i, v);
      checks++;
      if (v !== {(RB / 8){lut[0][5 + i]}}) begin failures++; $display("FAIL LUT load hit LUT 0"); end
    end
    begin
      automatic dram_cmd_t c = '0;
      c.op = CMD_AAP; c.row_a = 3; c.row_b = 10;
      hread(0, 3, data[3]);
      run(c, 2 * RCD + RP);
      hread(0, 10, v);
      checks++;
      if (v !== data[3]) begin failures++; $display("FAIL RowClone copy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
