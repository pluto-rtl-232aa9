// pluto_match_logic: the pLUTo Match Logic.
//
// One comparator per element of the source row buffer. Every comparator
// compares its element with the index of the row that is currently open in the
// pLUTo-enabled subarray; on equality it drives all of the element's matchlines
// high, otherwise all low. The matchlines then gate the row-buffer switches so
// that exactly the matching LUT entries reach the query output.
//
// Interface: src_row is the source row buffer; row_idx the swept row's index
// (the LUT index, rows counted from the start of the LUT); width selects the
// element width (1, 2, 4, 8 or 16 bits). Elements are packed from bit 0 upwards,
// least significant bit first. An element matches only if row_idx fits in the
// element width (row_idx < 2^W), so narrow inputs are compared against a
// zero-extended row index.
//
// Timing: purely combinational.
//
// The comparator-per-element structure and the all-N-matchlines output follow
// the design; supporting five run-time widths on one set of wires (the
// comparators are built from per-bit XNORs reduced over each element) is this
// implementation's choice.
module pluto_match_logic
  import pluto_pkg::*;
#(
  parameter int unsigned ROW_BITS = 65536
) (
  input  logic [ROW_BITS-1:0] src_row,
  input  logic [ADDR_W-1:0]   row_idx,
  input  ewidth_e             width,
  output logic [ROW_BITS-1:0] matchlines
);

  localparam int unsigned NW = 5;

  initial begin
    assert (ROW_BITS % 16 == 0) else $fatal(1, "ROW_BITS must be a multiple of 16");
  end

  for (genvar k = 0; k < NW; k++) begin : g_w
    localparam int unsigned W = 1 << k;
    localparam logic [W-1:0] ONE = W'(1);
    localparam logic [ROW_BITS-1:0] LSB_MASK = {(ROW_BITS / W){ONE}};
    logic [ROW_BITS-1:0] pattern;
    logic [ROW_BITS-1:0] red;
    logic [ROW_BITS-1:0] ml;
    logic                idx_ok;

    assign pattern = {(ROW_BITS / W){row_idx[W-1:0]}};
    assign idx_ok  = (32'(row_idx) >> W) == 0;

    always_comb begin
      // Bitwise equality, then AND-reduce each W-bit group into its lowest bit.
      red = ~(src_row ^ pattern);
      for (int s = 1; s < int'(W); s = s * 2) red = red & (red >> s);
      // Keep one result bit per element and spread it over the element's bits.
      ml = red & LSB_MASK;
      for (int s = 1; s < int'(W); s = s * 2) ml = ml | (ml << s);
      if (!idx_ok) ml = '0;
    end
  end

  always_comb begin
    case (width)
      W1:      matchlines = g_w[0].ml;
      W2:      matchlines = g_w[1].ml;
      W4:      matchlines = g_w[2].ml;
      W8:      matchlines = g_w[3].ml;
      W16:     matchlines = g_w[4].ml;
      default: matchlines = '0;
    endcase
  end

endmodule
