// pluto_lut_subarray: one pLUTo-enabled subarray with everything that makes
// it answer LUT queries: its cell array, its row buffer, the Row Sweep row
// decoder, the match logic that compares the source row with the swept row
// index and, for pLUTo-BSA, the FF buffer.
//
// A LUT with lut_size entries is held in rows 0 .. lut_size-1; row i holds
// entry i repeated across the whole row, one copy per element position. A query
// (`start`) sweeps those rows. At every sensed row the match logic marks the
// element positions whose source index equals the row index, and those
// positions of the sensed row are kept:
//   * BSA (default): the full row is sensed and restored as in normal DRAM; the
//     matched bits are copied into the FF buffer, which holds the result.
//   * GSA: each sense amplifier is gated from its bitline by the matchline.
//     Only matched bits are sensed, so the sense amplifiers themselves collect
//     the result; unmatched cells of every swept row lose their charge (the
//     cell content is modelled as zero afterwards) and the LUT must be written
//     again before the next query.
//   * GMC: a matchline transistor in every cell lets only matched cells share
//     charge and enables only matched sense amplifiers: the sense amplifiers
//     collect the result and the LUT is kept.
// result is the FF buffer (BSA) or the sense amplifiers (GSA/GMC); it is what a
// LISA-RBM transfer moves to the destination row buffer.
//
// Interface: start / lut_size / width begin a query against src_row (the
// source row buffer, held stable during the sweep); busy and done (pulse in the
// last sweep cycle) as in pluto_row_decoder. host_we / host_row / host_wdata
// write one whole row (LUT loading); host_rdata reads host_row combinationally.
// Timing: sweep latency as pluto_row_decoder; result valid from the cycle after
// done. Modelling the analog parts (cells, sense amplifiers, switches) as
// registers and masks is this implementation's choice; the zero value left in
// destroyed GSA cells stands for "contents lost".
module pluto_lut_subarray
  import pluto_pkg::*;
#(
  parameter int unsigned ROW_BITS = 65536,
  parameter int unsigned ROWS     = 512,
  parameter int unsigned T_RCD    = T_RCD_DEF,
  parameter int unsigned T_RP     = T_RP_DEF,
  parameter design_e     DESIGN   = DESIGN_BSA
) (
  input  logic                clk,
  input  logic                rst_n,
  // query
  input  logic                start,
  input  logic [ADDR_W-1:0]   lut_size,
  input  ewidth_e             width,
  input  logic [ROW_BITS-1:0] src_row,
  output logic                busy,
  output logic                done,
  output logic [ROW_BITS-1:0] result,
  // row-wide host access
  input  logic                host_we,
  input  logic [ADDR_W-1:0]   host_row,
  input  logic [ROW_BITS-1:0] host_wdata,
  output logic [ROW_BITS-1:0] host_rdata
);

  localparam int unsigned RA_W = $clog2(ROWS);

  logic [ROW_BITS-1:0] cells [ROWS];
  logic [ROW_BITS-1:0] sa;          // sense amplifiers = pLUTo-enabled row buffer
  logic [ROW_BITS-1:0] matchlines;
  logic [ADDR_W-1:0]   row_idx;
  logic                sense;
  ewidth_e             width_q;
  logic [RA_W-1:0]     ra;

  assign ra = row_idx[RA_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) width_q <= W8;
    else if (start && !busy) width_q <= width;
  end

  pluto_row_decoder #(.T_RCD(T_RCD), .T_RP(T_RP), .DESIGN(DESIGN)) u_rowdec (
    .clk, .rst_n,
    .start     (start && !busy),
    .count     (lut_size),
    .busy,
    .row_idx,
    .wl_active (),
    .sense,
    .done
  );

  pluto_match_logic #(.ROW_BITS(ROW_BITS)) u_match (
    .src_row,
    .row_idx,
    .width     (width_q),
    .matchlines
  );

  // Cell array: host writes, and the destructive GSA activation.
  always_ff @(posedge clk) begin
    if (host_we && !busy) cells[host_row[RA_W-1:0]] <= host_wdata;
    else if (DESIGN == DESIGN_GSA && sense) cells[ra] <= cells[ra] & matchlines;
  end

  // Sense amplifiers.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sa <= '0;
    else if (start && !busy) begin
      if (DESIGN != DESIGN_BSA) sa <= '0;  // precharged; collects matched bits
    end else if (sense) begin
      if (DESIGN == DESIGN_BSA) sa <= cells[ra];
      else                      sa <= (sa & ~matchlines) | (cells[ra] & matchlines);
    end
  end

  if (DESIGN == DESIGN_BSA) begin : g_bsa
    logic [ROW_BITS-1:0] ff_q;
    pluto_ff_buffer #(.ROW_BITS(ROW_BITS)) u_ff (
      .clk, .rst_n,
      .clear     (start && !busy),
      .capture   (sense),
      .matchlines,
      .sa_data   (cells[ra]),
      .q         (ff_q)
    );
    assign result = ff_q;
  end else begin : g_sa
    assign result = sa;
  end

  assign host_rdata = cells[host_row[RA_W-1:0]];

  initial begin
    assert (ROWS >= 2 && (1 << RA_W) == ROWS) else $fatal(1, "ROWS must be a power of two");
  end

endmodule
