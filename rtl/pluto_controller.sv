// pluto_controller: the pLUTo Controller, an extension of the memory
// controller that executes pLUTo ISA instructions.
//
// It is built from the three parts the design names: a register file of pLUTo
// Row / Subarray Registers (pluto_regfile), a command ROM that turns each
// instruction into a fixed sequence of DRAM-side commands (pluto_cmd_rom), and
// the finite-state machine below, which decodes an instruction, checks and
// resolves its register operands to physical rows, and issues the ROM's
// commands one at a time, waiting for each to complete.
//
// Allocation instructions are executed here without DRAM commands:
//   pluto_row_alloc      takes ceil(size / (ROW_BITS/8 * GROUPS)) rows (at
//                        least one) from a bump pointer over the data rows
//                        below the six reserved rows; one row address spans
//                        all GROUPS subarray groups.
//   pluto_subarray_alloc takes the next free pLUTo-enabled subarray of every
//                        group; num_rows must fit in a subarray.
// Allocation is never undone except by reset. Loading the LUT content itself
// is done through the host row port of the top level.
// pluto_lut_load copies imm consecutive data rows into the LUT subarray
// (LUT loading from memory over LISA-RBM), one LOAD command per row.
// A pluto_op is rejected (err) unless lut_size is between 1 and both the
// subarray allocation and 2^lut_bitw, and lut_bitw is 1, 2, 4, 8 or 16.
//
// Interface: instr_valid/instr_ready handshake (one instruction at a time);
// instr_done pulses when it completes, with instr_err (ERR_NONE on success).
// cmd_valid is a one-cycle request with cmd; cmd_done is the groups' done.
// Timing: decode one cycle, then per command one issue cycle plus the
// command's DRAM time, then one cycle to retire.
module pluto_controller
  import pluto_pkg::*;
#(
  parameter int unsigned ROW_BITS     = 65536,
  parameter int unsigned ROWS         = 512,
  parameter int unsigned GROUPS       = 16,
  parameter int unsigned LUT_SA       = 2,
  parameter int unsigned NUM_ROW_REGS = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      instr_valid,
  input  instr_t    instr,
  output logic      instr_ready,
  output logic      instr_done,
  output err_e      instr_err,
  output logic      cmd_valid,
  output dram_cmd_t cmd,
  input  logic      cmd_done,
  output logic      busy
);

  localparam longint unsigned ROW_SPAN_BYTES = longint'(ROW_BITS / 8) * longint'(GROUPS);
  localparam int unsigned     DATA_ROWS      = ROWS - RESERVED_ROWS;

  typedef enum logic [2:0] {S_IDLE, S_DECODE, S_ISSUE, S_WAIT, S_DONE} state_e;
  state_e            state;
  instr_t            ir;
  logic [2:0]        step;
  logic [31:0]       rep;
  err_e              err_q;
  logic [ADDR_W:0]   next_row;
  logic [3:0]        next_lut;

  // register file
  logic              rw_en, sw_en;
  logic [ADDR_W-1:0] rw_nrows;
  logic [3:0]        rr_idx   [3];
  logic              rr_valid [3];
  logic [ADDR_W-1:0] rr_row   [3];
  logic [4:0]        rr_bitw  [3];
  logic              sr_valid;
  logic [3:0]        sr_sel;
  logic [ADDR_W-1:0] sr_nrows;
  uop_t              uop;

  assign rr_idx[0] = ir.dst;
  assign rr_idx[1] = ir.src1;
  assign rr_idx[2] = ir.src2;

  pluto_regfile #(.NUM_ROW_REGS(NUM_ROW_REGS), .NUM_SA_REGS(16)) u_rf (
    .clk, .rst_n,
    .rw_en, .rw_idx (ir.dst), .rw_row (next_row[ADDR_W-1:0]), .rw_nrows, .rw_bitw (ir.bitw),
    .sw_en, .sw_idx (ir.dst), .sw_sel (next_lut), .sw_nrows (ir.imm[ADDR_W-1:0]),
    .rr_idx, .rr_valid, .rr_row, .rr_bitw,
    .sr_idx (ir.lut), .sr_valid, .sr_sel, .sr_nrows
  );

  pluto_cmd_rom u_rom (.op (ir.op), .step, .uop);

  // ---- decode checks (combinational, used in S_DECODE) ----
  logic [63:0] rows_needed;
  logic        bitw_ok;
  ewidth_e     wcode;
  logic [16:0] lut_cap;  // 2^bitw, saturated
  err_e        chk;

  always_comb begin
    rows_needed = (64'(ir.imm) + ROW_SPAN_BYTES - 1) / ROW_SPAN_BYTES;
    if (rows_needed == 0) rows_needed = 1;
    rw_nrows = ADDR_W'(rows_needed);
    bitw_ok = 1'b1;
    wcode   = W8;
    lut_cap = 17'h10000;
    case (ir.bitw)
      5'd1:    begin wcode = W1;  lut_cap = 17'd2;   end
      5'd2:    begin wcode = W2;  lut_cap = 17'd4;   end
      5'd4:    begin wcode = W4;  lut_cap = 17'd16;  end
      5'd8:    begin wcode = W8;  lut_cap = 17'd256; end
      5'd16:   begin wcode = W16; lut_cap = 17'h10000; end
      default: bitw_ok = 1'b0;
    endcase

    chk = ERR_NONE;
    case (ir.op)
      OP_ROW_ALLOC:
        if (64'(next_row) + rows_needed > 64'(DATA_ROWS)) chk = ERR_ALLOC;
      OP_SUBARRAY_ALLOC:
        if (32'(next_lut) >= LUT_SA || ir.imm == 0 || ir.imm > ROWS) chk = ERR_ALLOC;
      OP_PLUTO:
        if (!rr_valid[0] || !rr_valid[1] || !sr_valid) chk = ERR_BAD_REG;
        else if (!bitw_ok)                              chk = ERR_BITW;
        else if (ir.imm == 0 || ir.imm > 32'(sr_nrows) || ir.imm > 32'(lut_cap))
                                                        chk = ERR_LUT_SIZE;
      OP_LUT_LOAD:
        if (!rr_valid[1] || !sr_valid) chk = ERR_BAD_REG;
        else if (ir.imm == 0 || ir.imm > 32'(sr_nrows) ||
                 32'(rr_row[1]) + ir.imm > 32'(DATA_ROWS)) chk = ERR_LUT_SIZE;
      OP_NOT, OP_MOVE:
        if (!rr_valid[0] || !rr_valid[1]) chk = ERR_BAD_REG;
      OP_AND, OP_OR:
        if (!rr_valid[0] || !rr_valid[1] || !rr_valid[2]) chk = ERR_BAD_REG;
      OP_BIT_SHL, OP_BIT_SHR, OP_BYTE_SHL, OP_BYTE_SHR:
        if (!rr_valid[1]) chk = ERR_BAD_REG;
      default: chk = ERR_OPCODE;
    endcase
  end

  logic needs_cmds;
  assign needs_cmds = !(ir.op inside {OP_ROW_ALLOC, OP_SUBARRAY_ALLOC}) &&
                      !(ir.op inside {OP_BIT_SHL, OP_BIT_SHR, OP_BYTE_SHL, OP_BYTE_SHR} && ir.imm == 0);

  assign rw_en = (state == S_DECODE) && (ir.op == OP_ROW_ALLOC) && (chk == ERR_NONE);
  assign sw_en = (state == S_DECODE) && (ir.op == OP_SUBARRAY_ALLOC) && (chk == ERR_NONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      ir       <= '0;
      step     <= '0;
      rep      <= '0;
      err_q    <= ERR_NONE;
      next_row <= '0;
      next_lut <= '0;
    end else begin
      case (state)
        S_IDLE: if (instr_valid) begin
          ir    <= instr;
          state <= S_DECODE;
        end
        S_DECODE: begin
          err_q <= chk;
          step  <= '0;
          rep   <= '0;
          if (rw_en) next_row <= next_row + (ADDR_W + 1)'(rows_needed);
          if (sw_en) next_lut <= next_lut + 1'b1;
          state <= (chk == ERR_NONE && needs_cmds) ? S_ISSUE : S_DONE;
        end
        S_ISSUE: state <= S_WAIT;
        S_WAIT: if (cmd_done) begin
          if (uop.repeat_imm && rep + 1 < ir.imm) begin
            rep   <= rep + 1;
            state <= S_ISSUE;
          end else if (uop.last) begin
            state <= S_DONE;
          end else begin
            step  <= step + 1'b1;
            state <= S_ISSUE;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  function automatic logic [ADDR_W-1:0] resolve(input rowsel_e s);
    case (s)
      SEL_DST:  return rr_row[0];
      SEL_SRC1: return rr_row[1];
      SEL_SRC2: return rr_row[2];
      SEL_NONE: return '0;
      default:  return rsv_row(ROWS, s);
    endcase
  endfunction

  always_comb begin
    cmd            = '0;
    cmd.op         = uop.op;
    cmd.row_a      = resolve(uop.a);
    cmd.row_b      = resolve(uop.b);
    cmd.row_c      = resolve(uop.c);
    cmd.neg        = uop.neg;
    cmd.shift_left = uop.shift_left;
    cmd.shift_byte = uop.shift_byte;
    cmd.lut_sel    = sr_sel;
    cmd.lut_size   = ir.imm[ADDR_W-1:0];
    cmd.width      = wcode;
    if (uop.op == CMD_LOAD) begin  // entry rep: data row src1+rep -> LUT row rep
      cmd.row_a = rr_row[1] + rep[ADDR_W-1:0];
      cmd.row_b = rep[ADDR_W-1:0];
    end
  end

  assign cmd_valid   = (state == S_ISSUE);
  assign instr_ready = (state == S_IDLE);
  assign instr_done  = (state == S_DONE);
  assign instr_err   = err_q;
  assign busy        = (state != S_IDLE);

  // A command completes only while the controller waits for it.
  assert property (@(posedge clk) disable iff (!rst_n) cmd_done |-> state == S_WAIT);

  initial begin
    assert (ROWS > RESERVED_ROWS + 1) else $fatal(1, "ROWS too small");
    assert (LUT_SA <= 15) else $fatal(1, "LUT_SA must be below 16");
  end

endmodule
