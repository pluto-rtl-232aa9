// tb_pluto_regfile: self-checking test of the pLUTo Row / Subarray Registers.
// Random writes on both ports and reads on all four read ports, against a
// reference copy; registers read as invalid until written and after reset.
// The register counts (16 + 16) are this design's choice. Writes take
// effect at the clock edge; reads are combinational.
module tb_pluto_regfile;
  import pluto_pkg::*;

  logic clk = 0, rst_n = 0;
  logic rw_en, sw_en;
  logic [3:0] rw_idx, sw_idx, sw_sel, sr_idx, sr_sel;
  logic [ADDR_W-1:0] rw_row, rw_nrows, sw_nrows, sr_nrows;
  logic [4:0] rw_bitw;
  logic [3:0] rr_idx [3];
  logic rr_valid [3];
  logic [ADDR_W-1:0] rr_row [3];
  logic [4:0] rr_bitw [3];
  logic sr_valid;
  bit m_rv [16], m_sv [16];
  logic [ADDR_W-1:0] m_row [16], m_snr [16];
  logic [4:0] m_bw [16];
  logic [3:0] m_sel [16];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pluto_regfile dut (.clk, .rst_n, .rw_en, .rw_idx, .rw_row, .rw_nrows, .rw_bitw,
    .sw_en, .sw_idx, .sw_sel, .sw_nrows, .rr_idx, .rr_valid, .rr_row, .rr_bitw,
    .sr_idx, .sr_valid, .sr_sel, .sr_nrows);

  task automatic check_reads();
    for (int p = 0; p < 3; p++) rr_idx[p] = 4'($urandom);
    sr_idx = 4'($urandom);
    #1;
    for (int p = 0; p < 3; p++) begin
      checks++;
      if (rr_valid[p] !== m_rv[rr_idx[p]] ||
          (m_rv[rr_idx[p]] && (rr_row[p] !== m_row[rr_idx[p]] || rr_bitw[p] !== m_bw[rr_idx[p]]))) begin
        failures++; $display("FAIL row reg %0d", rr_idx[p]);
      end
    end
    checks++;
    if (sr_valid !== m_sv[sr_idx] || (m_sv[sr_idx] && (sr_sel !== m_sel[sr_idx] || sr_nrows !== m_snr[sr_idx]))) begin
      failures++; $display("FAIL subarray reg %0d", sr_idx);
    end
  endtask

  initial begin
    rw_en = 0; sw_en = 0; rw_idx = '0; sw_idx = '0; sw_sel = '0; rw_row = '0; rw_nrows = '0;
    rw_bitw = '0; sw_nrows = '0; sr_idx = '0; rr_idx = '{default: '0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      check_reads();
      rw_en = 1'($urandom); sw_en = 1'($urandom);
      rw_idx = 4'($urandom); rw_row = ADDR_W'($urandom); rw_nrows = ADDR_W'($urandom); rw_bitw = 5'($urandom);
      sw_idx = 4'($urandom); sw_sel = 4'($urandom); sw_nrows = ADDR_W'($urandom);
      @(posedge clk);
      if (rw_en) begin m_rv[rw_idx] = 1; m_row[rw_idx] = rw_row; m_bw[rw_idx] = rw_bitw; end
      if (sw_en) begin m_sv[sw_idx] = 1; m_sel[sw_idx] = sw_sel; m_snr[sw_idx] = sw_nrows; end
      #1 rw_en = 0; sw_en = 0;
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
