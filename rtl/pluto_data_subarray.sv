// pluto_data_subarray: an ordinary DRAM subarray that holds the LUT query
// input and output rows, with the in-DRAM operations pLUTo builds on.
//
// It plays the parts of the source subarray (its row buffer feeds the match
// logic during a Row Sweep) and of the destination subarray (a LISA-RBM
// transfer fills its row buffer with the query result, which is then stored in
// the destination row). Between queries it executes the row-granularity
// operations the pLUTo ISA borrows from earlier processing-using-DRAM work:
//   CMD_AAP   RowClone-FPM copy a -> b (ACT a, ACT b, PRE), optionally reading a
//             through its negated wordline (the dual-contact row used for NOT)
//   CMD_TRA   triple-row activation: bitwise majority of a, b, c is left in all
//             three rows and in the row buffer (AND / OR with a constant row)
//   CMD_SHIFT shift of row a by 1 or 8 bit positions into row b (ACT-ACT-PRE)
//   CMD_SWEEP open row a as the LUT query input vector; the row buffer then
//             stays valid until the next command
//   CMD_LISA  take lisa_in into the row buffer and store it into row b
//   CMD_LOAD  open row a so that its row buffer can be sent over LISA-RBM
//             into a pLUTo-enabled subarray (LUT loading); nothing is stored
// Rows ROWS-4 and ROWS-5 are the constant all-zeros / all-ones rows; they read
// as constants and ignore writes. Bit i of a row is bitline i; "left" shifts
// move bits towards higher indices and shift in zeros.
//
// Interface: cmd_valid with cmd when !busy; busy while the command's time
// runs; done pulses in its last cycle. rowbuf is the local row buffer. host_*
// gives row-wide access (write when !busy, combinational read).
// Timing (cycles): AAP and SHIFT 2*tRCD+tRP, TRA tRCD+tRP, SWEEP tRCD,
// LISA and LOAD tLISA+tRCD+tRP. The operations are the prior work's; their cycle costs
// and the constant-row placement are this implementation's choice.
module pluto_data_subarray
  import pluto_pkg::*;
#(
  parameter int unsigned ROW_BITS = 65536,
  parameter int unsigned ROWS     = 512,
  parameter int unsigned T_RCD    = T_RCD_DEF,
  parameter int unsigned T_RP     = T_RP_DEF,
  parameter int unsigned T_LISA   = T_LISA_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  input  dram_cmd_t           cmd,
  input  logic [ROW_BITS-1:0] lisa_in,
  output logic                busy,
  output logic                done,
  output logic [ROW_BITS-1:0] rowbuf,
  input  logic                host_we,
  input  logic [ADDR_W-1:0]   host_row,
  input  logic [ROW_BITS-1:0] host_wdata,
  output logic [ROW_BITS-1:0] host_rdata
);

  localparam int unsigned RA_W = $clog2(ROWS);
  localparam logic [RA_W-1:0] ROW_C0 = RA_W'(ROWS - 4);
  localparam logic [RA_W-1:0] ROW_C1 = RA_W'(ROWS - 5);

  logic [ROW_BITS-1:0] cells [ROWS];
  logic [15:0]         cnt;
  logic [RA_W-1:0]     ra, rb_, rc;
  logic [ROW_BITS-1:0] va, vb, vc, vres;
  logic                accept;

  assign ra     = cmd.row_a[RA_W-1:0];
  assign rb_    = cmd.row_b[RA_W-1:0];
  assign rc     = cmd.row_c[RA_W-1:0];
  assign accept = cmd_valid && !busy;

  function automatic logic [ROW_BITS-1:0] rd(input logic [RA_W-1:0] r,
                                             input logic [ROW_BITS-1:0] stored);
    if (r == ROW_C0)      return '0;
    else if (r == ROW_C1) return '1;
    else                  return stored;
  endfunction

  assign va = rd(ra, cells[ra]);
  assign vb = rd(rb_, cells[rb_]);
  assign vc = rd(rc, cells[rc]);

  always_comb begin
    case (cmd.op)
      CMD_AAP:   vres = cmd.neg ? ~va : va;
      CMD_TRA:   vres = (va & vb) | (vb & vc) | (va & vc);
      CMD_SHIFT: begin
        if (cmd.shift_left) vres = cmd.shift_byte ? (va << 8) : (va << 1);
        else                vres = cmd.shift_byte ? (va >> 8) : (va >> 1);
      end
      CMD_LISA:  vres = lisa_in;
      default:   vres = va;
    endcase
  end

  function automatic logic [15:0] latency(input cmd_op_e op);
    case (op)
      CMD_AAP, CMD_SHIFT: return 16'(2 * T_RCD + T_RP);
      CMD_TRA:            return 16'(T_RCD + T_RP);
      CMD_SWEEP:          return 16'(T_RCD);
      CMD_LISA, CMD_LOAD: return 16'(T_LISA + T_RCD + T_RP);
      default:            return 16'd1;
    endcase
  endfunction

  function automatic logic writable(input logic [RA_W-1:0] r);
    return (r != ROW_C0) && (r != ROW_C1);
  endfunction

  // Cell array.
  always_ff @(posedge clk) begin
    if (accept) begin
      case (cmd.op)
        CMD_AAP, CMD_SHIFT, CMD_LISA: if (writable(rb_)) cells[rb_] <= vres;
        CMD_TRA: begin
          if (writable(ra))  cells[ra]  <= vres;
          if (writable(rb_)) cells[rb_] <= vres;
          if (writable(rc))  cells[rc]  <= vres;
        end
        default: ;
      endcase
    end else if (host_we && !busy) begin
      cells[host_row[RA_W-1:0]] <= host_wdata;
    end
  end

  // Row buffer and command timer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rowbuf <= '0;
      cnt    <= '0;
    end else if (accept) begin
      if (cmd.op != CMD_NOP) rowbuf <= vres;
      cnt <= latency(cmd.op);
    end else if (cnt != 0) begin
      cnt <= cnt - 1'b1;
    end
  end

  assign busy       = (cnt != 0);
  assign done       = (cnt == 1);
  assign host_rdata = rd(host_row[RA_W-1:0], cells[host_row[RA_W-1:0]]);

  initial begin
    assert (ROWS >= 8 && (1 << RA_W) == ROWS) else $fatal(1, "ROWS must be a power of two >= 8");
  end

endmodule
