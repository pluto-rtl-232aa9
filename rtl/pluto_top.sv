// pluto_top: a pLUTo-enabled DRAM bank with its pLUTo Controller.
//
// GROUPS subarray groups (subarray-level parallelism, 16 by default) each hold
// a data subarray and LUT_SA pLUTo-enabled subarrays. The controller accepts
// pLUTo ISA instructions, and broadcasts every DRAM-side command to all groups,
// which execute it in lock step on their own rows: one query processes GROUPS
// rows of ROW_BITS bits (16 x 8 KB = 128 KB at the defaults).
//
// Interface:
//   instr_valid / instr / instr_ready   one instruction at a time
//   instr_done / instr_err              completion pulse and its status
//   host_valid / host_we / host_group / host_target / host_row / host_wdata
//                                       whole-row write (host_we) or read of
//                                       one subarray of one group; target 0 is
//                                       the data subarray, k+1 the k-th
//                                       pLUTo-enabled subarray. Accepted only
//                                       while host_ready (nothing executing).
//   host_rdata                          combinational read of that row
// The row-wide host port stands in for the memory channel and the CPU / DMA
// copies that fill rows and load LUTs; it is this implementation's
// simplification of the DRAM interface, not a pLUTo mechanism.
// Timing: see pluto_controller (instruction sequencing) and the group modules
// (DRAM command latencies in DRAM clock cycles).
module pluto_top
  import pluto_pkg::*;
#(
  parameter int unsigned ROW_BITS     = 65536,
  parameter int unsigned ROWS         = 512,
  parameter int unsigned GROUPS       = 16,
  parameter int unsigned LUT_SA       = 2,
  parameter int unsigned NUM_ROW_REGS = 16,
  parameter int unsigned T_RCD        = T_RCD_DEF,
  parameter int unsigned T_RP         = T_RP_DEF,
  parameter int unsigned T_LISA       = T_LISA_DEF,
  parameter design_e     DESIGN       = DESIGN_BSA,
  localparam int unsigned GW          = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                instr_valid,
  input  instr_t              instr,
  output logic                instr_ready,
  output logic                instr_done,
  output err_e                instr_err,
  input  logic                host_valid,
  input  logic                host_we,
  input  logic [GW-1:0]       host_group,
  input  logic [3:0]          host_target,
  input  logic [ADDR_W-1:0]   host_row,
  input  logic [ROW_BITS-1:0] host_wdata,
  output logic [ROW_BITS-1:0] host_rdata,
  output logic                host_ready,
  output logic                busy
);

  logic              cmd_valid, ctrl_busy;
  dram_cmd_t         cmd;
  logic [GROUPS-1:0] g_busy, g_done;
  logic [ROW_BITS-1:0] g_rdata [GROUPS];

  pluto_controller #(
    .ROW_BITS(ROW_BITS), .ROWS(ROWS), .GROUPS(GROUPS), .LUT_SA(LUT_SA),
    .NUM_ROW_REGS(NUM_ROW_REGS)
  ) u_ctrl (
    .clk, .rst_n,
    .instr_valid (instr_valid && !(|g_busy)),
    .instr,
    .instr_ready,
    .instr_done,
    .instr_err,
    .cmd_valid,
    .cmd,
    .cmd_done    (g_done[0]),
    .busy        (ctrl_busy)
  );

  for (genvar g = 0; g < int'(GROUPS); g++) begin : g_grp
    pluto_subarray_group #(
      .ROW_BITS(ROW_BITS), .ROWS(ROWS), .LUT_SA(LUT_SA),
      .T_RCD(T_RCD), .T_RP(T_RP), .T_LISA(T_LISA), .DESIGN(DESIGN)
    ) u_group (
      .clk, .rst_n,
      .cmd_valid,
      .cmd,
      .busy        (g_busy[g]),
      .done        (g_done[g]),
      .host_we     (host_valid && host_we && host_ready && host_group == GW'(g)),
      .host_target,
      .host_row,
      .host_wdata,
      .host_rdata  (g_rdata[g])
    );
  end

  always_comb begin
    host_rdata = g_rdata[0];
    for (int g = 0; g < int'(GROUPS); g++)
      if (host_group == GW'(g)) host_rdata = g_rdata[g];
  end

  assign host_ready = !ctrl_busy && !(|g_busy) && !instr_valid;
  assign busy       = ctrl_busy || (|g_busy);

  // All groups run the same command with the same timing.
  assert property (@(posedge clk) disable iff (!rst_n) g_done == '0 || g_done == '1);

endmodule
