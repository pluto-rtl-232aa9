// tb_pluto_match_logic: self-checking test of the match logic.
// Checks the four-element prime-number example (indices [1,0,1,3] against
// rows 0..3) and random rows at every element width against a bit-by-bit
// reference, including row indices too large for the element width.
// The rule under test is the comparator definition: all N matchlines of an
// element high on an exact match with the row index, all low otherwise.
// Rows are 64 bits here; the logic is combinational, read after #1.
module tb_pluto_match_logic;
  import pluto_pkg::*;

  localparam int unsigned RB = 64;
  logic [RB-1:0]     src, ml;
  logic [ADDR_W-1:0] idx;
  ewidth_e           width;
  int checks = 0, failures = 0;

  pluto_match_logic #(.ROW_BITS(RB)) dut (.src_row(src), .row_idx(idx), .width, .matchlines(ml));

  function automatic logic [RB-1:0] ref_ml(logic [RB-1:0] s, int unsigned i, int unsigned w);
    logic [RB-1:0] r = '0;
    for (int e = 0; e < int'(RB / w); e++) begin
      int unsigned v = 0;
      for (int b = 0; b < int'(w); b++) v |= int'(s[e*w + b]) << b;
      if (w < 32 && i < (32'd1 << w) && v == i)
        for (int b = 0; b < int'(w); b++) r[e*w + b] = 1'b1;
    end
    return r;
  endfunction

  task automatic check(string what, logic [RB-1:0] exp);
    #1;
    checks++;
    if (ml !== exp) begin
      failures++;
      $display("FAIL %s: src=%h idx=%0d width=%s got %h exp %h", what, src, idx, width.name(), ml, exp);
    end
  endtask

  initial begin
    // Prime example: 8-bit elements, element 0 in the low byte.
    src = '0;
    src[31:0] = {8'd3, 8'd1, 8'd0, 8'd1};
    src[63:32] = {4{8'hFF}};
    width = W8;
    idx = 0; check("example row 0", {32'h0, 32'h0000FF00});
    idx = 1; check("example row 1", {32'h0, 32'h00FF00FF});
    idx = 2; check("example row 2", {32'h0, 32'h00000000});
    idx = 3; check("example row 3", {32'h0, 32'hFF000000});
    idx = 255; check("example row 255", {32'hFFFFFFFF, 32'h0});
    // Random rows at every width.
    for (int n = 0; n < 2000; n++) begin
      int unsigned w;
      width = ewidth_e'($urandom_range(0, 4));
      w = 1 << int'(width);
      src = {$urandom, $urandom};
      // Bias towards hits: copy an element's value into the index sometimes.
      if ($urandom_range(0, 3) != 0) begin
        automatic int e = $urandom_range(0, RB / w - 1);
        idx = '0;
        for (int b = 0; b < int'(w); b++) idx[b] = src[e*w + b];
        if ($urandom_range(0, 9) == 0) idx = idx | (ADDR_W'(1) << w);  // out of range
      end else idx = ADDR_W'($urandom_range(0, 600));
      check("random", ref_ml(src, int'(idx), w));
    end
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
