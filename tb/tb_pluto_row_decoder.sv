// tb_pluto_row_decoder: self-checking test of the Row Sweep sequencer.
// Runs sweeps of several lengths on a BSA decoder (latency (tRCD+tRP)*N) and
// on a GSA decoder (tRCD*N + tRP), checking the busy time, that every row
// 0..N-1 is sensed once and in order, that sensing happens tRCD cycles after
// the row opens, and that done pulses once in the last cycle.
// tRCD=3 and tRP=2 cycles here; the two latency formulas are the published
// ones, the sensing point in the last tRCD cycle is this design's choice.
module tb_pluto_row_decoder;
  import pluto_pkg::*;

  localparam int unsigned RCD = 3, RP = 2;
  logic clk = 0, rst_n = 0;
  logic start_b, start_g;
  logic [ADDR_W-1:0] count;
  logic busy_b, busy_g, wl_b, wl_g, sense_b, sense_g, done_b, done_g;
  logic [ADDR_W-1:0] idx_b, idx_g;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pluto_row_decoder #(.T_RCD(RCD), .T_RP(RP), .DESIGN(DESIGN_BSA)) dut_b (
    .clk, .rst_n, .start(start_b), .count, .busy(busy_b), .row_idx(idx_b),
    .wl_active(wl_b), .sense(sense_b), .done(done_b));
  pluto_row_decoder #(.T_RCD(RCD), .T_RP(RP), .DESIGN(DESIGN_GSA)) dut_g (
    .clk, .rst_n, .start(start_g), .count, .busy(busy_g), .row_idx(idx_g),
    .wl_active(wl_g), .sense(sense_g), .done(done_g));

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic run(bit bsa, int n);
    int cyc = 0, senses = 0, dones = 0, wl_run = 0, bad_order = 0, bad_rcd = 0;
    @(negedge clk);
    count = ADDR_W'(n);
    if (bsa) start_b = 1; else start_g = 1;
    @(negedge clk);
    start_b = 0; start_g = 0;
    while (bsa ? busy_b : busy_g) begin
      cyc++;
      if (bsa ? wl_b : wl_g) wl_run++;
      if (bsa ? sense_b : sense_g) begin
        if (int'(bsa ? idx_b : idx_g) != senses) bad_order++;
        if (wl_run != RCD) bad_rcd++;
        senses++;
        wl_run = 0;
      end
      if (bsa ? done_b : done_g) begin
        dones++;
        if (bsa ? busy_b === 1'b0 : 1'b0) bad_order++;
      end
      @(negedge clk);
      if (cyc > 100000) break;
    end
    expect_eq($sformatf("%s n=%0d busy cycles", bsa ? "BSA" : "GSA", n),
              cyc, n == 0 ? 1 : (bsa ? (RCD + RP) * n : RCD * n + RP));
    expect_eq("rows sensed", senses, n);
    expect_eq("sense order", bad_order, 0);
    expect_eq("tRCD before sense", bad_rcd, 0);
    expect_eq("done pulses", dones, 1);
  endtask

  initial begin
    start_b = 0; start_g = 0; count = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1, 4); run(1, 1); run(1, 16); run(1, 0);
    run(0, 4); run(0, 1); run(0, 16); run(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
