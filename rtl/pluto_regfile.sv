// pluto_regfile: the pLUTo Row Registers and Subarray Registers.
//
// A Row Register names a run of contiguously allocated rows used as a query
// input or output (here: a row address that is the same in every subarray
// group, the number of rows and the element width). A Subarray Register names
// a LUT-holding pLUTo-enabled subarray (its index within a group and the number
// of LUT rows reserved in it). The controller writes them on allocation and
// reads up to three row registers and one subarray register per instruction.
//
// Interface: one write port per register kind, combinational reads, valid bits
// cleared by reset. Timing: writes take effect at the next clock edge.
// The fields and sizes are this implementation's; the register kinds are the
// design's.
module pluto_regfile
  import pluto_pkg::*;
#(
  parameter int unsigned NUM_ROW_REGS = 16,
  parameter int unsigned NUM_SA_REGS  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // row register write
  input  logic              rw_en,
  input  logic [3:0]        rw_idx,
  input  logic [ADDR_W-1:0] rw_row,
  input  logic [ADDR_W-1:0] rw_nrows,
  input  logic [4:0]        rw_bitw,
  // subarray register write
  input  logic              sw_en,
  input  logic [3:0]        sw_idx,
  input  logic [3:0]        sw_sel,
  input  logic [ADDR_W-1:0] sw_nrows,
  // row register reads
  input  logic [3:0]        rr_idx   [3],
  output logic              rr_valid [3],
  output logic [ADDR_W-1:0] rr_row   [3],
  output logic [4:0]        rr_bitw  [3],
  // subarray register read
  input  logic [3:0]        sr_idx,
  output logic              sr_valid,
  output logic [3:0]        sr_sel,
  output logic [ADDR_W-1:0] sr_nrows
);

  logic              r_valid [NUM_ROW_REGS];
  logic [ADDR_W-1:0] r_row   [NUM_ROW_REGS];
  logic [ADDR_W-1:0] r_nrows [NUM_ROW_REGS];
  logic [4:0]        r_bitw  [NUM_ROW_REGS];
  logic              s_valid [NUM_SA_REGS];
  logic [3:0]        s_sel   [NUM_SA_REGS];
  logic [ADDR_W-1:0] s_nrows [NUM_SA_REGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NUM_ROW_REGS); i++) begin
        r_valid[i] <= 1'b0; r_row[i] <= '0; r_nrows[i] <= '0; r_bitw[i] <= '0;
      end
      for (int i = 0; i < int'(NUM_SA_REGS); i++) begin
        s_valid[i] <= 1'b0; s_sel[i] <= '0; s_nrows[i] <= '0;
      end
    end else begin
      if (rw_en && 32'(rw_idx) < NUM_ROW_REGS) begin
        r_valid[rw_idx] <= 1'b1;
        r_row[rw_idx]   <= rw_row;
        r_nrows[rw_idx] <= rw_nrows;
        r_bitw[rw_idx]  <= rw_bitw;
      end
      if (sw_en && 32'(sw_idx) < NUM_SA_REGS) begin
        s_valid[sw_idx] <= 1'b1;
        s_sel[sw_idx]   <= sw_sel;
        s_nrows[sw_idx] <= sw_nrows;
      end
    end
  end

  always_comb begin
    for (int p = 0; p < 3; p++) begin
      rr_valid[p] = 1'b0; rr_row[p] = '0; rr_bitw[p] = '0;
      for (int i = 0; i < int'(NUM_ROW_REGS); i++)
        if (rr_idx[p] == 4'(i)) begin
          rr_valid[p] = r_valid[i]; rr_row[p] = r_row[i]; rr_bitw[p] = r_bitw[i];
        end
    end
    sr_valid = 1'b0; sr_sel = '0; sr_nrows = '0;
    for (int i = 0; i < int'(NUM_SA_REGS); i++)
      if (sr_idx == 4'(i)) begin
        sr_valid = s_valid[i]; sr_sel = s_sel[i]; sr_nrows = s_nrows[i];
      end
  end

  initial begin
    assert (NUM_ROW_REGS <= 16 && NUM_SA_REGS <= 16) else $fatal(1, "at most 16 registers of each kind");
  end

endmodule
