// tb_pluto_workloads: LUT-based kernels of the kind pLUTo is evaluated on,
// run as instruction programs on a bank with 256-bit rows and two subarray
// groups (the default 512-row subarrays, DDR4-2400 timing and BSA design).
//   * BC-4       4-bit population count: one query, 16-entry LUT, width 4.
//   * XOR        1-bit logic via a 4-entry LUT: align a by a 1-bit shift,
//                merge with b by OR, query at width 2.
//   * ImgBin     8-bit threshold at 128: one query, 256-entry LUT. This LUT
//                is loaded from memory: written into 256 data rows, then
//                copied into the LUT subarray by pluto_lut_load (LISA-RBM).
//   * ColorGrade three 8-bit channels, each through its own 256-entry curve;
//                two LUT subarrays, the first reloaded for the third channel.
//   * CRC-8      polynomial 0x07 over 128-byte packets, one packet per 8-bit
//                lane: per byte, x = crc XOR byte built from OR, AND and NOT,
//                then crc = T[x] by one query (byte-wise table CRC).
// Every result row of both groups is compared with a reference computed here.
// The data rows are written through the host port, as a CPU would fill them.
// Kernels, packet layout and curves are this test's choices; the packet size
// and the 8-bit image format follow the evaluated workloads.
module tb_pluto_workloads;
  import pluto_pkg::*;

  localparam int unsigned RB = 256, G = 2, NE = RB / 8, PKT = 128;
  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, instr_done, host_valid, host_we, host_ready, busy;
  instr_t instr;
  err_e instr_err;
  logic [0:0] host_group;
  logic [3:0] host_target;
  logic [ADDR_W-1:0] host_row;
  logic [RB-1:0] host_wdata, host_rdata;
  int checks = 0, failures = 0, queries = 0;

  always #5 clk = ~clk;

  pluto_top #(.ROW_BITS(RB), .GROUPS(G)) dut (
    .clk, .rst_n, .instr_valid, .instr, .instr_ready, .instr_done, .instr_err,
    .host_valid, .host_we, .host_group, .host_target, .host_row, .host_wdata,
    .host_rdata, .host_ready, .busy);

  always @(posedge clk) if (rst_n && dut.cmd_valid && dut.cmd.op == CMD_SWEEP) queries++;

  task automatic hwrite(int g, int t, int r, logic [RB-1:0] v);
    @(negedge clk);
    while (!host_ready) @(negedge clk);
    host_valid = 1; host_we = 1; host_group = 1'(g); host_target = 4'(t); host_row = ADDR_W'(r);
    host_wdata = v;
    @(negedge clk);
    host_valid = 0; host_we = 0;
  endtask

  task automatic hread(int g, int r, output logic [RB-1:0] v);
    @(negedge clk);
    host_group = 1'(g); host_target = 4'd0; host_row = ADDR_W'(r);
    #1 v = host_rdata;
  endtask

  task automatic exec(opcode_e op, int dst, int s1, int s2, int lut, int imm, int bitw);
    @(negedge clk);
    instr = '0;
    instr.op = op; instr.dst = 4'(dst); instr.src1 = 4'(s1); instr.src2 = 4'(s2);
    instr.lut = 4'(lut); instr.imm = imm; instr.bitw = 5'(bitw);
    instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    while (!instr_done) @(negedge clk);
    if (instr_err != ERR_NONE) begin
      failures++; $display("FAIL %s returned %s", op.name(), instr_err.name());
    end
  endtask

  // LUT row i holds entry i replicated in every w-bit element.
  task automatic load_lut(int t, int n, int w, int f);
    for (int g = 0; g < int'(G); g++)
      for (int i = 0; i < n; i++) begin
        logic [RB-1:0] r;
        for (int e = 0; e < int'(RB) / w; e++)
          for (int b = 0; b < w; b++) r[e*w + b] = 1'(lut_fn(f, i) >> b);
        hwrite(g, t, i, r);
      end
  endtask

  function automatic int lut_fn(int f, int i);
    case (f)
      0: return $countones(4'(i));                       // BC-4
      1: return (i & 1) ^ ((i >> 1) & 1);                // XOR of the two index bits
      2: return (i >= 128) ? 255 : 0;                    // binarization
      3: return (i * i) >> 8;                            // curve, red
      4: return 255 - i;                                 // curve, green
      5: return (i + 40 > 255) ? 255 : i + 40;           // curve, blue
      default: return crc8_byte(8'(i));                  // CRC-8 table
    endcase
  endfunction

  function automatic logic [7:0] crc8_byte(logic [7:0] v);
    logic [7:0] c = v;
    for (int k = 0; k < 8; k++) c = c[7] ? ((c << 1) ^ 8'h07) : (c << 1);
    return c;
  endfunction

  function automatic logic [RB-1:0] rand_row();
    logic [RB-1:0] r;
    for (int k = 0; k < int'(RB) / 32; k++) r[k*32 +: 32] = $urandom;
    return r;
  endfunction

  // Compares row r of every group with exp[g]; w-bit elements.
  task automatic check(string what, int r, logic [RB-1:0] exp [G]);
    logic [RB-1:0] v;
    for (int g = 0; g < int'(G); g++) begin
      hread(g, r, v);
      checks++;
      if (v !== exp[g]) begin failures++; $display("FAIL %s group %0d: %h exp %h", what, g, v, exp[g]); end
    end
  endtask

  // Row registers 0..6 are allocated in order, so register k is row k.
  localparam int R_A = 0, R_B = 1, R_X = 2, R_Y = 3, R_T = 4, R_C = 5, R_D = 6;

  initial begin
    logic [RB-1:0] a [G], b [G], exp [G], crc [G];
    logic [7:0] pkt [G][NE][PKT];
    instr_valid = 0; instr = '0; host_valid = 0; host_we = 0; host_group = '0; host_target = '0;
    host_row = '0; host_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 7; k++) exec(OP_ROW_ALLOC, k, 0, 0, 0, G * NE, 8);
    exec(OP_ROW_ALLOC, 7, 0, 0, 0, 256 * G * NE, 8);  // rows 7..262: a LUT image
    exec(OP_SUBARRAY_ALLOC, 0, 0, 0, 0, 256, 0);
    exec(OP_SUBARRAY_ALLOC, 1, 0, 0, 0, 256, 0);

    // BC-4.
    load_lut(1, 16, 4, 0);
    for (int g = 0; g < int'(G); g++) begin
      a[g] = rand_row();
      for (int e = 0; e < int'(RB) / 4; e++) exp[g][e*4 +: 4] = 4'($countones(a[g][e*4 +: 4]));
      hwrite(g, 0, R_A, a[g]);
    end
    exec(OP_PLUTO, R_X, R_A, 0, 0, 16, 4);
    check("BC-4", R_X, exp);

    // XOR of 1-bit values held in 2-bit elements.
    load_lut(2, 4, 2, 1);
    for (int g = 0; g < int'(G); g++) begin
      a[g] = rand_row() & {(RB / 2){2'b01}};
      b[g] = rand_row() & {(RB / 2){2'b01}};
      exp[g] = a[g] ^ b[g];
      hwrite(g, 0, R_A, a[g]);
      hwrite(g, 0, R_B, b[g]);
    end
    exec(OP_BIT_SHL, 0, R_A, 0, 0, 1, 0);
    exec(OP_OR, R_Y, R_A, R_B, 0, 0, 0);
    exec(OP_PLUTO, R_X, R_Y, 0, 1, 4, 2);
    check("XOR", R_X, exp);

    // ImgBin.
    for (int g = 0; g < int'(G); g++)
      for (int i = 0; i < 256; i++) hwrite(g, 0, 7 + i, {NE{8'(lut_fn(2, i))}});
    exec(OP_LUT_LOAD, 0, 7, 0, 0, 256, 0);
    for (int g = 0; g < int'(G); g++) begin
      a[g] = rand_row();
      for (int e = 0; e < int'(NE); e++) exp[g][e*8 +: 8] = (a[g][e*8 +: 8] >= 128) ? 8'hff : 8'h00;
      hwrite(g, 0, R_A, a[g]);
    end
    exec(OP_PLUTO, R_X, R_A, 0, 0, 256, 8);
    check("ImgBin", R_X, exp);

    // ColorGrade: channel c in row R_A + c, result in R_X + ... one at a time.
    for (int c = 0; c < 3; c++) begin
      automatic int t = (c == 1) ? 2 : 1;
      load_lut(t, 256, 8, 3 + c);
      for (int g = 0; g < int'(G); g++) begin
        a[g] = rand_row();
        for (int e = 0; e < int'(NE); e++) exp[g][e*8 +: 8] = 8'(lut_fn(3 + c, int'(a[g][e*8 +: 8])));
        hwrite(g, 0, R_A, a[g]);
      end
      exec(OP_PLUTO, R_X, R_A, 0, t - 1, 256, 8);
      check($sformatf("ColorGrade channel %0d", c), R_X, exp);
    end

    // CRC-8 over one 128-byte packet per lane.
    load_lut(1, 256, 8, 6);
    for (int g = 0; g < int'(G); g++) begin
      for (int e = 0; e < int'(NE); e++)
        for (int k = 0; k < int'(PKT); k++) pkt[g][e][k] = 8'($urandom);
      crc[g] = '0;
      hwrite(g, 0, R_C, '0);
    end
    for (int k = 0; k < int'(PKT); k++) begin
      for (int g = 0; g < int'(G); g++) begin
        logic [RB-1:0] d;
        for (int e = 0; e < int'(NE); e++) d[e*8 +: 8] = pkt[g][e][k];
        hwrite(g, 0, R_D, d);
      end
      exec(OP_OR,  R_X, R_C, R_D, 0, 0, 0);      // crc | byte
      exec(OP_AND, R_Y, R_C, R_D, 0, 0, 0);      // crc & byte
      exec(OP_NOT, R_T, R_Y, 0, 0, 0, 0);        // ~(crc & byte)
      exec(OP_AND, R_Y, R_X, R_T, 0, 0, 0);      // crc ^ byte
      exec(OP_PLUTO, R_C, R_Y, 0, 0, 256, 8);    // crc = T[crc ^ byte]
    end
    for (int g = 0; g < int'(G); g++)
      for (int e = 0; e < int'(NE); e++) begin
        automatic logic [7:0] c = 8'h00;
        for (int k = 0; k < int'(PKT); k++) c = crc8_byte(c ^ pkt[g][e][k]);
        exp[g][e*8 +: 8] = c;
      end
    check("CRC-8", R_C, exp);

    checks++;
    if (queries != 6 + PKT) begin failures++; $display("FAIL %0d queries issued", queries); end
    $display("queries %0d, elements per 8-bit query %0d", queries, G * NE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
