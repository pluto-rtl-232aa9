// pluto_pkg: types and constants shared by the pLUTo blocks.
//
// pLUTo answers many lookup-table queries at once inside a DRAM subarray: every
// element of a source row is an index into a LUT whose entries are stored one
// per row (each row holding the same entry repeated across its width) in a
// "pLUTo-enabled" subarray. Sweeping through the LUT rows and comparing the
// current row index against every source element selects, for every element
// position, the one row that holds its answer.
//
// This package holds:
//   * design_e     - which of the three row-buffer designs is built (BSA is the
//                    balanced one and the default; GSA and GMC are variants).
//   * ewidth_e     - LUT element width code (1, 2, 4, 8 or 16 bits).
//   * dram_cmd_t   - the command the controller broadcasts to every subarray
//                    group (RowClone/Ambit/DRISA/LISA primitives and the new
//                    Row Sweep).
//   * instr_t      - one pLUTo ISA instruction as accepted by the controller.
//   * uop_t        - one entry of the controller's command ROM.
// Timing defaults are DRAM command-clock cycles of DDR4-2400 (1200 MHz):
// tRCD = tRP = 17 cycles (14.16 ns), as in the evaluated configuration. The
// LISA hop time is not given with the design and is this package's choice.
package pluto_pkg;

  typedef enum logic [1:0] {
    DESIGN_BSA = 2'd0,  // buffered sense amplifier: FF buffer behind m-c switches
    DESIGN_GSA = 2'd1,  // gated sense amplifier: destructive sweep, SA is the buffer
    DESIGN_GMC = 2'd2   // gated memory cell (2T1C): non-destructive, SA is the buffer
  } design_e;

  localparam int unsigned T_RCD_DEF  = 17;
  localparam int unsigned T_RP_DEF   = 17;
  localparam int unsigned T_LISA_DEF = 8;

  // Element width of a LUT query: log2 of the comparator width.
  typedef enum logic [2:0] {
    W1 = 3'd0, W2 = 3'd1, W4 = 3'd2, W8 = 3'd3, W16 = 3'd4
  } ewidth_e;

  localparam int unsigned ADDR_W = 16;  // row address / LUT size field width

  typedef enum logic [2:0] {
    CMD_NOP   = 3'd0,
    CMD_AAP   = 3'd1,  // ACT-ACT-PRE row copy (RowClone-FPM), optional negated read
    CMD_TRA   = 3'd2,  // triple-row activation: majority of rows a, b, c into all three
    CMD_SHIFT = 3'd3,  // row shift by 1 or 8 bits from row a into row b
    CMD_SWEEP = 3'd4,  // open source row a, then Row Sweep lut_sel over lut_size rows
    CMD_LISA  = 3'd5,  // LISA-RBM: query result of lut_sel into data row buffer, store to row b
    CMD_LOAD  = 3'd6   // LISA-RBM the other way: data row a into row b of LUT subarray lut_sel
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e           op;
    logic [ADDR_W-1:0] row_a;
    logic [ADDR_W-1:0] row_b;
    logic [ADDR_W-1:0] row_c;
    logic              neg;         // CMD_AAP: read row a through its negated wordline
    logic              shift_left;  // CMD_SHIFT: towards higher bit positions
    logic              shift_byte;  // CMD_SHIFT: by 8 bits instead of 1
    logic [3:0]        lut_sel;     // CMD_SWEEP / CMD_LISA: which pLUTo-enabled subarray
    logic [ADDR_W-1:0] lut_size;    // CMD_SWEEP: rows to sweep
    ewidth_e           width;       // CMD_SWEEP: element / comparator width
  } dram_cmd_t;

  typedef enum logic [3:0] {
    OP_ROW_ALLOC      = 4'd0,
    OP_SUBARRAY_ALLOC = 4'd1,
    OP_PLUTO          = 4'd2,
    OP_NOT            = 4'd3,
    OP_AND            = 4'd4,
    OP_OR             = 4'd5,
    OP_BIT_SHL        = 4'd6,
    OP_BIT_SHR        = 4'd7,
    OP_BYTE_SHL       = 4'd8,
    OP_BYTE_SHR       = 4'd9,
    OP_MOVE           = 4'd10,
    OP_LUT_LOAD       = 4'd11
  } opcode_e;

  // One ISA instruction. Field use per opcode:
  //   ROW_ALLOC      dst=row reg, imm=size in bytes, bitw=element width
  //   SUBARRAY_ALLOC dst=subarray reg, imm=num_rows
  //   PLUTO          dst, src1=row regs, lut=subarray reg, imm=lut_size, bitw=lut_bitw
  //   NOT/MOVE       dst, src1;  AND/OR dst, src1, src2
  //   *_SHL/*_SHR    src1 (shifted in place), imm=shift count
  //   LUT_LOAD       lut=subarray reg, src1=row reg whose rows src1..src1+imm-1
  //                  hold LUT entries 0..imm-1, imm=entries to copy
  typedef struct packed {
    opcode_e     op;
    logic [3:0]  dst;
    logic [3:0]  src1;
    logic [3:0]  src2;
    logic [3:0]  lut;
    logic [31:0] imm;
    logic [4:0]  bitw;
  } instr_t;

  typedef enum logic [3:0] {
    SEL_NONE = 4'd0, SEL_DST = 4'd1, SEL_SRC1 = 4'd2, SEL_SRC2 = 4'd3,
    SEL_T0 = 4'd4, SEL_T1 = 4'd5, SEL_T2 = 4'd6,
    SEL_C0 = 4'd7, SEL_C1 = 4'd8, SEL_DCC = 4'd9
  } rowsel_e;

  typedef struct packed {
    cmd_op_e op;
    rowsel_e a;
    rowsel_e b;
    rowsel_e c;
    logic    neg;
    logic    shift_left;
    logic    shift_byte;
    logic    repeat_imm;  // issue this entry imm times (shifts, LUT load)
    logic    last;
  } uop_t;

  typedef enum logic [2:0] {
    ERR_NONE      = 3'd0,
    ERR_BAD_REG   = 3'd1,  // operand register not allocated
    ERR_ALLOC     = 3'd2,  // out of rows or pLUTo-enabled subarrays
    ERR_LUT_SIZE  = 3'd3,  // lut_size zero, above the subarray allocation or 2^bitw
    ERR_BITW      = 3'd4,  // unsupported element width
    ERR_OPCODE    = 3'd5
  } err_e;

  // Reserved rows at the top of every data subarray (Ambit-style compute rows).
  function automatic logic [ADDR_W-1:0] rsv_row(input int unsigned rows, input rowsel_e s);
    case (s)
      SEL_T0:  return ADDR_W'(rows - 1);
      SEL_T1:  return ADDR_W'(rows - 2);
      SEL_T2:  return ADDR_W'(rows - 3);
      SEL_C0:  return ADDR_W'(rows - 4);
      SEL_C1:  return ADDR_W'(rows - 5);
      SEL_DCC: return ADDR_W'(rows - 6);
      default: return '0;
    endcase
  endfunction

  localparam int unsigned RESERVED_ROWS = 6;

endpackage
