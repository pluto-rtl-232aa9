// tb_pluto_lut_subarray: self-checking test of a pLUTo-enabled subarray in
// all three row-buffer designs (BSA, GSA, GMC), driven with the same queries.
//   * The four-prime example: LUT {2,3,5,7}, indices [1,0,1,3] -> [3,2,3,7].
//   * Random LUTs and index rows at element widths 2, 4, 8 and 16; indices
//     beyond the LUT give zero.
//   * Sweep latency: (tRCD+tRP)*N for BSA, tRCD*N+tRP for GSA and GMC.
//   * After a query the GSA LUT rows keep only their matched elements (the
//     rest is lost) while BSA and GMC rows are unchanged.
// The LUT is written again before every query, as GSA requires.
module tb_pluto_lut_subarray;
  import pluto_pkg::*;

  localparam int unsigned RB = 64, NR = 16, RCD = 2, RP = 1;
  logic clk = 0, rst_n = 0;
  logic start, host_we;
  logic [ADDR_W-1:0] lut_size, host_row;
  ewidth_e width;
  logic [RB-1:0] src, host_wdata;
  logic [RB-1:0] res [3], rdata [3];
  logic [2:0] busy, done;
  int checks = 0, failures = 0;
  logic [15:0] lut [NR];

  always #5 clk = ~clk;

  pluto_lut_subarray #(.ROW_BITS(RB), .ROWS(NR), .T_RCD(RCD), .T_RP(RP), .DESIGN(DESIGN_BSA)) dut_bsa (
    .clk, .rst_n, .start, .lut_size, .width, .src_row(src), .busy(busy[0]), .done(done[0]),
    .result(res[0]), .host_we, .host_row, .host_wdata, .host_rdata(rdata[0]));
  pluto_lut_subarray #(.ROW_BITS(RB), .ROWS(NR), .T_RCD(RCD), .T_RP(RP), .DESIGN(DESIGN_GSA)) dut_gsa (
    .clk, .rst_n, .start, .lut_size, .width, .src_row(src), .busy(busy[1]), .done(done[1]),
    .result(res[1]), .host_we, .host_row, .host_wdata, .host_rdata(rdata[1]));
  pluto_lut_subarray #(.ROW_BITS(RB), .ROWS(NR), .T_RCD(RCD), .T_RP(RP), .DESIGN(DESIGN_GMC)) dut_gmc (
    .clk, .rst_n, .start, .lut_size, .width, .src_row(src), .busy(busy[2]), .done(done[2]),
    .result(res[2]), .host_we, .host_row, .host_wdata, .host_rdata(rdata[2]));

  function automatic logic [RB-1:0] rep(logic [15:0] v, int w);
    logic [RB-1:0] r = '0;
    for (int b = 0; b < int'(RB); b++) r[b] = v[b % w];
    return r;
  endfunction

  function automatic int elem(logic [RB-1:0] row, int e, int w);
    int v = 0;
    for (int b = 0; b < w; b++) v |= int'(row[e*w + b]) << b;
    return v;
  endfunction

  task automatic load_lut(int n, int w);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      host_we = 1; host_row = ADDR_W'(i); host_wdata = rep(lut[i], w);
    end
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic query(int n, int w, string tag);
    int cyc [3];
    logic [RB-1:0] exp = '0;
    for (int e = 0; e < int'(RB) / w; e++) begin
      int i = elem(src, e, w);
      if (i < n) for (int b = 0; b < w; b++) exp[e*w + b] = lut[i][b];
    end
    cyc = '{0, 0, 0};
    @(negedge clk);
    lut_size = ADDR_W'(n);
    width = ewidth_e'($clog2(w));
    start = 1;
    @(negedge clk);
    start = 0;
    while (|busy) begin
      for (int d = 0; d < 3; d++) if (busy[d]) cyc[d]++;
      @(negedge clk);
    end
    for (int d = 0; d < 3; d++) begin
      checks++;
      if (res[d] !== exp) begin
        failures++;
        $display("FAIL %s design %0d: result %h exp %h (src %h)", tag, d, res[d], exp, src);
      end
      checks++;
      if (cyc[d] != ((d == 0) ? (RCD + RP) * n : RCD * n + RP)) begin
        failures++;
        $display("FAIL %s design %0d: %0d sweep cycles", tag, d, cyc[d]);
      end
    end
    // Cell contents after the sweep.
    for (int i = 0; i < n; i++) begin
      automatic logic [RB-1:0] keep = '0;
      for (int e = 0; e < int'(RB) / w; e++)
        if (elem(src, e, w) == i) for (int b = 0; b < w; b++) keep[e*w + b] = 1'b1;
      host_row = ADDR_W'(i);
      #1;
      checks += 3;
      if (rdata[0] !== rep(lut[i], w)) begin failures++; $display("FAIL %s BSA row %0d changed", tag, i); end
      if (rdata[2] !== rep(lut[i], w)) begin failures++; $display("FAIL %s GMC row %0d changed", tag, i); end
      if (rdata[1] !== (rep(lut[i], w) & keep)) begin
        failures++; $display("FAIL %s GSA row %0d: %h exp %h", tag, i, rdata[1], rep(lut[i], w) & keep);
      end
    end
  endtask

  initial begin
    start = 0; host_we = 0; host_row = '0; host_wdata = '0; lut_size = '0; width = W8; src = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Four-prime example, 8-bit elements, element 0 in the low byte.
    lut[0] = 2; lut[1] = 3; lut[2] = 5; lut[3] = 7;
    load_lut(4, 8);
    src = {8'd9, 8'd2, 8'd3, 8'd2, 8'd3, 8'd1, 8'd0, 8'd1};
    query(4, 8, "primes");
    checks++;
    if (res[0][31:0] !== {8'd7, 8'd3, 8'd2, 8'd3}) begin failures++; $display("FAIL primes vector"); end
    // Random queries.
    for (int n = 0; n < 40; n++) begin
      automatic int w = 2 << (n % 4);        // 2, 4, 8, 16
      automatic int sz = (w >= 4) ? NR : 4;
      if ($urandom_range(0, 3) == 0) sz = $urandom_range(1, sz);
      for (int i = 0; i < int'(NR); i++) lut[i] = 16'($urandom) & 16'((32'd1 << w) - 1);
      load_lut(sz, w);
      for (int e = 0; e < int'(RB) / w; e++) begin
        automatic int v = $urandom_range(0, sz + (sz / 4));
        for (int b = 0; b < w; b++) src[e*w + b] = 1'(v >> b);
      end
      query(sz, w, $sformatf("random %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
