// quad_pkg: types and constants shared by the Quadrilatero matrix coprocessor.
//
// The coprocessor holds eight matrix registers m0..m7. Each one is RLEN/32 rows
// of RLEN bits; with RLEN = 128 a register is a 4x4 tile of 32-bit elements.
// RLEN, the register count and the 4x4 tile follow the paper. The instruction
// encoding below (custom-0 opcode, funct3 and field positions) is this design's
// own choice: the paper names the instructions but gives no encoding.
//
//   [6:0]   opcode  7'b0001011 (custom-0)
//   [9:7]   md      destination register (mz, mld.w, mmac) or source of mst.w
//   [14:12] funct3  0 mz, 1 mld.w, 2 mst.w, 3 mmac
//   [17:15] ms1     mmac: left operand (rows of A)
//   [22:20] ms2     mmac: right operand, transposed (rows of B^T)
//   [26:25] dtype   mmac: 0 fp32, 1 int32, 2 int16 (2-way SIMD), 3 int8 (4-way SIMD)
//   For mld.w / mst.w the scalar operands travel with the instruction:
//   rs1 = base address of row 0, rs2 = byte stride between rows.
package quad_pkg;

  localparam int unsigned RLEN     = 128;            // bits per matrix row
  localparam int unsigned ELEN     = 32;             // element width
  localparam int unsigned NROWS    = RLEN / ELEN;    // rows per register (4)
  localparam int unsigned NREGS    = 8;              // m0..m7
  localparam int unsigned REG_W    = $clog2(NREGS);  // 3
  localparam int unsigned ROW_W    = $clog2(NROWS);  // 2
  localparam int unsigned ID_W     = 4;              // XIF instruction id width
  localparam int unsigned TK_W     = 8;              // scoreboard ticket width

  localparam logic [6:0] OPC_MATRIX = 7'b0001011;

  typedef logic [RLEN-1:0]  row_t;
  typedef logic [REG_W-1:0] reg_idx_t;
  typedef logic [ROW_W-1:0] row_idx_t;
  typedef logic [ID_W-1:0]  id_t;
  typedef logic [TK_W-1:0]  tk_t;
  // one ticket counter per matrix register
  typedef logic [NREGS-1:0][TK_W-1:0] tk_vec_t;

  typedef enum logic [2:0] {
    F3_MZ   = 3'd0,
    F3_MLD  = 3'd1,
    F3_MST  = 3'd2,
    F3_MMAC = 3'd3
  } funct3_e;

  typedef enum logic [1:0] {
    DT_FP32  = 2'd0,
    DT_INT32 = 2'd1,
    DT_INT16 = 2'd2,
    DT_INT8  = 2'd3
  } dtype_e;

  typedef enum logic [1:0] {
    UNIT_PU  = 2'd0,
    UNIT_LSU = 2'd1,
    UNIT_SA  = 2'd2,
    UNIT_NONE = 2'd3
  } unit_e;

  // Decoded instruction, as handed from the controller to an execution unit.
  typedef struct packed {
    logic      valid;      // a legal matrix instruction
    unit_e     unit;
    funct3_e   op;
    reg_idx_t  md;         // destination (mst.w: source register)
    reg_idx_t  ms1;
    reg_idx_t  ms2;
    dtype_e    dtype;
    logic      is_store;
    logic [31:0] rs1;      // base address
    logic [31:0] rs2;      // row stride in bytes
    id_t       id;
    // scoreboard tickets, taken when the instruction is accepted
    tk_t       tk_md;      // writers of md accepted before it (RAW on md, WAW)
    tk_t       tk_ms1;     // writers of ms1 accepted before it (RAW)
    tk_t       tk_ms2;     // writers of ms2 accepted before it (RAW)
    tk_t       tk_rd;      // reads of md accepted before it (WAR)
  } instr_t;

  // One row write into the matrix register file.
  typedef struct packed {
    logic     en;
    reg_idx_t rg;
    row_idx_t row;
    row_t     data;
  } mrf_wr_t;

  // One row read address.
  typedef struct packed {
    reg_idx_t rg;
    row_idx_t row;
  } mrf_raddr_t;

  // Ticket counters wrap; `cnt` has reached `need` when cnt - need, taken
  // modulo 2^TK_W, lies in the lower half of the range.
  function automatic logic tk_reached(input tk_t cnt, input tk_t need);
    tk_t diff;
    diff = cnt - need;
    return !diff[TK_W-1];
  endfunction

  // Register operands: mst.w reads md; mmac reads md, ms1, ms2 and writes md;
  // mz and mld.w write md.
  function automatic logic reads_md(input instr_t i);
    return (i.op == F3_MST) || (i.op == F3_MMAC);
  endfunction
  function automatic logic writes_md(input instr_t i);
    return i.op != F3_MST;
  endfunction

  // Every writer accepted before `i` has started writing each source (RAW).
  function automatic logic raw_ok(input instr_t i, input tk_vec_t wstart);
    logic ok;
    ok = 1'b1;
    if (reads_md(i) && !tk_reached(wstart[i.md], i.tk_md)) ok = 1'b0;
    if (i.op == F3_MMAC) begin
      if (!tk_reached(wstart[i.ms1], i.tk_ms1)) ok = 1'b0;
      if (!tk_reached(wstart[i.ms2], i.tk_ms2)) ok = 1'b0;
    end
    return ok;
  endfunction

  // Every earlier writer of md has started writing (WAW) and every earlier
  // reader of md has started reading (WAR).
  function automatic logic wr_ok(input instr_t i, input tk_vec_t wstart, input tk_vec_t rstart);
    if (!writes_md(i)) return 1'b1;
    return tk_reached(wstart[i.md], i.tk_md) && tk_reached(rstart[i.md], i.tk_rd);
  endfunction

endpackage
