// tb_pluto_data_subarray: self-checking test of the source/destination
// subarray. Random sequences of RowClone copies (plain and negated), triple
// row activations, 1- and 8-bit shifts in both directions, source-row opens
// and LISA-RBM stores are checked against a reference array: row buffer,
// every row's content (constant rows included) and each command's latency.
// Runs at 32-bit rows, 16 rows and tRCD=2, tRP=1 cycles. The command
// latencies checked are this design's estimates (see the module header);
// the operations themselves are RowClone, Ambit and DRISA as published.
module tb_pluto_data_subarray;
  import pluto_pkg::*;

  localparam int unsigned RB = 32, NR = 16, RCD = 2, RP = 1, LISA = 3;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, busy, done, host_we;
  dram_cmd_t cmd;
  logic [RB-1:0] lisa_in, rowbuf, host_wdata, host_rdata;
  logic [ADDR_W-1:0] host_row;
  logic [RB-1:0] model [NR];
  int checks = 0, failures = 0;
  int seen [cmd_op_e];

  always #5 clk = ~clk;

  pluto_data_subarray #(.ROW_BITS(RB), .ROWS(NR), .T_RCD(RCD), .T_RP(RP), .T_LISA(LISA)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .lisa_in, .busy, .done, .rowbuf,
    .host_we, .host_row, .host_wdata, .host_rdata);

  function automatic logic [RB-1:0] rd(int r);
    if (r == NR - 4) return '0;
    if (r == NR - 5) return '1;
    return model[r];
  endfunction

  function automatic bit wr_ok(int r);
    return r != NR - 4 && r != NR - 5;
  endfunction

  task automatic issue(dram_cmd_t c, int lat, logic [RB-1:0] exp_rb);
    int cyc = 0, dones = 0;
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (busy) begin
      cyc++;
      if (done) dones++;
      @(negedge clk);
      if (cyc > 1000) break;
    end
    checks += 3;
    if (cyc != lat) begin failures++; $display("FAIL %s latency %0d exp %0d", c.op.name(), cyc, lat); end
    if (dones != 1) begin failures++; $display("FAIL %s done pulses %0d", c.op.name(), dones); end
    if (rowbuf !== exp_rb) begin failures++; $display("FAIL %s rowbuf %h exp %h", c.op.name(), rowbuf, exp_rb); end
    for (int r = 0; r < int'(NR); r++) begin
      host_row = ADDR_W'(r);
      #1;
      checks++;
      if (host_rdata !== rd(r)) begin
        failures++; $display("FAIL after %s row %0d = %h exp %h", c.op.name(), r, host_rdata, rd(r));
      end
    end
    seen[c.op]++;
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; host_we = 0; host_row = '0; host_wdata = '0; lisa_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < int'(NR); r++) begin
      @(negedge clk);
      host_we = 1; host_row = ADDR_W'(r); host_wdata = $urandom;
      model[r] = wr_ok(r) ? host_wdata : model[r];
    end
    @(negedge clk);
    host_we = 0;
    for (int n = 0; n < 300; n++) begin
      automatic dram_cmd_t c = '0;
      logic [RB-1:0] v;
      automatic int a = $urandom_range(0, NR - 1), b = $urandom_range(0, NR - 1), cc = $urandom_range(0, NR - 1);
      c.row_a = ADDR_W'(a); c.row_b = ADDR_W'(b); c.row_c = ADDR_W'(cc);
      case ($urandom_range(0, 4))
        0: begin
          c.op = CMD_AAP; c.neg = 1'($urandom);
          v = c.neg ? ~rd(a) : rd(a);
          if (wr_ok(b)) model[b] = v;
          issue(c, 2 * RCD + RP, v);
        end
        1: begin
          c.op = CMD_TRA;
          v = (rd(a) & rd(b)) | (rd(b) & rd(cc)) | (rd(a) & rd(cc));
          if (wr_ok(a)) model[a] = v;
          if (wr_ok(b)) model[b] = v;
          if (wr_ok(cc)) model[cc] = v;
          issue(c, RCD + RP, v);
        end
        2: begin
          c.op = CMD_SHIFT; c.shift_left = 1'($urandom); c.shift_byte = 1'($urandom);
          v = rd(a);
          if (c.shift_left) v = c.shift_byte ? v << 8 : v << 1;
          else              v = c.shift_byte ? v >> 8 : v >> 1;
          if (wr_ok(b)) model[b] = v;
          issue(c, 2 * RCD + RP, v);
        end
        3: begin
          c.op = CMD_SWEEP;
          issue(c, RCD, rd(a));
        end
        default: begin
          c.op = CMD_LISA;
          lisa_in = $urandom;
          if (wr_ok(b)) model[b] = lisa_in;
          issue(c, LISA + RCD + RP, lisa_in);
        end
      endcase
    end
    checks++;
    if (seen.num() != 5) begin failures++; $display("FAIL not every command was exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
