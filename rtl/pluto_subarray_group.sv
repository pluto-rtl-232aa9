// pluto_subarray_group: one subarray-level-parallel unit of pLUTo.
//
// A group is a data subarray (source and destination rows) next to LUT_SA
// pLUTo-enabled subarrays, each with its own match logic, Row Sweep decoder
// and row buffer / FF buffer. The controller broadcasts every command to all
// groups at once; each group works on its own slice of the data, so a query
// on one row address processes GROUPS rows in parallel.
//
// Command handling:
//   CMD_SWEEP  the data subarray opens the source row (tRCD), then the selected
//              pLUTo-enabled subarray sweeps lut_size rows against that row
//              buffer. The group reports done when the sweep ends.
//   CMD_LISA   the selected subarray's query result (FF buffer, or sense
//              amplifiers for GSA/GMC) is moved into the data subarray's row
//              buffer and stored into the destination row.
//   CMD_LOAD   the data subarray opens row a; when its time ends, the row
//              buffer is written into row b of the selected pLUTo-enabled
//              subarray (LISA-RBM in the loading direction).
//   others     passed to the data subarray (RowClone, Ambit, DRISA primitives).
// Interface: cmd_valid/cmd accepted when !busy; done pulses once per command.
// host_target 0 addresses the data subarray, k+1 the k-th pLUTo-enabled
// subarray; host writes are ignored while busy; host_rdata is combinational.
// Timing: SWEEP takes tRCD + the sweep latency; others as the data subarray.
// Placing source and destination rows in one data subarray, and the number of
// pLUTo-enabled subarrays per group, are this implementation's choices.
module pluto_subarray_group
  import pluto_pkg::*;
#(
  parameter int unsigned ROW_BITS = 65536,
  parameter int unsigned ROWS     = 512,
  parameter int unsigned LUT_SA   = 2,
  parameter int unsigned T_RCD    = T_RCD_DEF,
  parameter int unsigned T_RP     = T_RP_DEF,
  parameter int unsigned T_LISA   = T_LISA_DEF,
  parameter design_e     DESIGN   = DESIGN_BSA
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  input  dram_cmd_t           cmd,
  output logic                busy,
  output logic                done,
  input  logic                host_we,
  input  logic [3:0]          host_target,
  input  logic [ADDR_W-1:0]   host_row,
  input  logic [ROW_BITS-1:0] host_wdata,
  output logic [ROW_BITS-1:0] host_rdata
);

  typedef enum logic [1:0] {G_IDLE, G_SRC, G_SWEEP, G_DATA} gstate_e;
  gstate_e state;

  logic [3:0]          sel_q;
  logic [ADDR_W-1:0]   size_q;
  ewidth_e             width_q;
  logic                load_q;
  logic [ADDR_W-1:0]   lrow_q;
  logic                accept;

  logic                d_busy, d_done;
  logic [ROW_BITS-1:0] d_rowbuf, d_rdata;
  logic [ROW_BITS-1:0] lisa_in;

  logic [ROW_BITS-1:0] l_result [LUT_SA];
  logic [ROW_BITS-1:0] l_rdata  [LUT_SA];
  logic [LUT_SA-1:0]   l_busy, l_done, l_start, l_load;

  assign accept = cmd_valid && (state == G_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= G_IDLE;
      sel_q   <= '0;
      size_q  <= '0;
      width_q <= W8;
      load_q  <= 1'b0;
      lrow_q  <= '0;
    end else begin
      case (state)
        G_IDLE: if (accept) begin
          sel_q   <= cmd.lut_sel;
          size_q  <= cmd.lut_size;
          width_q <= cmd.width;
          load_q  <= (cmd.op == CMD_LOAD);
          lrow_q  <= cmd.row_b;
          state   <= (cmd.op == CMD_SWEEP) ? G_SRC : G_DATA;
        end
        G_SRC:   if (d_done) state <= G_SWEEP;
        G_SWEEP: if (|l_done) state <= G_IDLE;
        G_DATA:  if (d_done) state <= G_IDLE;
        default: state <= G_IDLE;
      endcase
    end
  end

  // LISA-RBM source: the result of the pLUTo-enabled subarray being read.
  always_comb begin
    lisa_in = '0;
    for (int k = 0; k < int'(LUT_SA); k++)
      if (cmd.lut_sel == 4'(k)) lisa_in = l_result[k];
  end

  pluto_data_subarray #(
    .ROW_BITS(ROW_BITS), .ROWS(ROWS), .T_RCD(T_RCD), .T_RP(T_RP), .T_LISA(T_LISA)
  ) u_data (
    .clk, .rst_n,
    .cmd_valid  (accept),
    .cmd,
    .lisa_in,
    .busy       (d_busy),
    .done       (d_done),
    .rowbuf     (d_rowbuf),
    .host_we    (host_we && host_target == 4'd0 && state == G_IDLE),
    .host_row,
    .host_wdata,
    .host_rdata (d_rdata)
  );

  for (genvar k = 0; k < int'(LUT_SA); k++) begin : g_lut
    assign l_start[k] = (state == G_SRC) && d_done && (sel_q == 4'(k));
    assign l_load[k]  = (state == G_DATA) && d_done && load_q && (sel_q == 4'(k));
    pluto_lut_subarray #(
      .ROW_BITS(ROW_BITS), .ROWS(ROWS), .T_RCD(T_RCD), .T_RP(T_RP), .DESIGN(DESIGN)
    ) u_lut (
      .clk, .rst_n,
      .start      (l_start[k]),
      .lut_size   (size_q),
      .width      (width_q),
      .src_row    (d_rowbuf),
      .busy       (l_busy[k]),
      .done       (l_done[k]),
      .result     (l_result[k]),
      .host_we    (l_load[k] || (host_we && host_target == 4'(k + 1) && state == G_IDLE)),
      .host_row   (l_load[k] ? lrow_q : host_row),
      .host_wdata (l_load[k] ? d_rowbuf : host_wdata),
      .host_rdata (l_rdata[k])
    );
  end

  always_comb begin
    host_rdata = d_rdata;
    for (int k = 0; k < int'(LUT_SA); k++)
      if (host_target == 4'(k + 1)) host_rdata = l_rdata[k];
  end

  assign busy = (state != G_IDLE) || d_busy || (|l_busy);
  assign done = ((state == G_SWEEP) && (|l_done)) || ((state == G_DATA) && d_done);

  // A sweep must name an existing pLUTo-enabled subarray.
  assert property (@(posedge clk) disable iff (!rst_n)
                   accept && cmd.op inside {CMD_SWEEP, CMD_LISA, CMD_LOAD} |-> cmd.lut_sel < 4'(LUT_SA));

  initial begin
    assert (LUT_SA >= 1 && LUT_SA <= 15) else $fatal(1, "LUT_SA must be 1..15");
  end

endmodule
