// lamp_pkg: types and constants shared by the logic associative multiprocessor.
//
// Bit order convention used everywhere: a vector is written left to right as
// positions 1..W, and position 1 is the most significant bit. A vector printed
// as "1 1 . . 1 1" is therefore the SystemVerilog literal 'b110011. Row i of an
// A-matrix (counting from 0) owns bit N-1-i of a row-flag vector such as m_a.
//
// The operand set (A_i, m_a, m_b, m_c, m_d), the binary operators (and, or,
// xor, nop) and the unary operators (not, nop, slc) follow the paper. The
// instruction word and its encoding are this design's own.
package lamp_pkg;

  // Operand / destination selector of the logical processor.
  typedef enum logic [2:0] {
    SEL_A  = 3'd0,   // row A_i addressed by the row pointer
    SEL_MA = 3'd1,
    SEL_MB = 3'd2,
    SEL_MC = 3'd3,
    SEL_MD = 3'd4
  } sel_e;

  // First (binary) level of the logical processor.
  typedef enum logic [1:0] {
    BOP_AND = 2'd0,
    BOP_OR  = 2'd1,
    BOP_XOR = 2'd2,
    BOP_NOP = 2'd3    // passes the first operand through
  } bop_e;

  // Second (unary) level of the logical processor.
  typedef enum logic [1:0] {
    UOP_NOP = 2'd0,
    UOP_NOT = 2'd1,
    UOP_SLC = 2'd2    // shift left with compaction of the 1s
  } uop_e;

  // Sequencer opcodes.
  typedef enum logic [3:0] {
    OP_HALT   = 4'd0,  // stop, raise done
    OP_LP     = 4'd1,  // dst := uop(bop(srca, srcb))
    OP_SETROW = 4'd2,  // row pointer := imm
    OP_QUAL   = 4'd3,  // dst := slc(Q(srca, srcb)), or Q itself if imm[0]; Q = d | mu(m in A) | mu(A in m)
    OP_DECIDE = 4'd4,  // dst := better (fewer 1s) of compacted srca, srcb
    OP_SEARCH = 4'd5,  // feasible-solution search over all rows (m_b query), imm[0]: modify A
    OP_DIAG   = 4'd6,  // diagnosis over all rows (m_a response), imm[0]: multiple mode
    OP_COVER  = 4'd7,  // quasi-optimal coverage over all rows
    OP_RECV   = 4'd8,  // dst := m_d of neighbour imm[2:0]
    OP_NOP    = 4'd9
  } opcode_e;

  // Neighbour directions of the 8-connected torus.
  typedef enum logic [2:0] {
    DIR_N = 3'd0, DIR_NE = 3'd1, DIR_E = 3'd2, DIR_SE = 3'd3,
    DIR_S = 3'd4, DIR_SW = 3'd5, DIR_W = 3'd6, DIR_NW = 3'd7
  } dir_e;

  typedef struct packed {
    opcode_e    op;
    bop_e       bop;
    uop_e       uop;
    sel_e       srca;
    sel_e       srcb;
    sel_e       dst;
    logic [4:0] imm;
  } instr_t;

  localparam int unsigned INSTR_W = $bits(instr_t);  // 22 bits

  // Word offsets inside a sequencer's data window: rows 0..N-1 are the
  // A-matrix, then the four m-registers.
  localparam int unsigned WIN_MA = 0;
  localparam int unsigned WIN_MB = 1;
  localparam int unsigned WIN_MC = 2;
  localparam int unsigned WIN_MD = 3;

  function automatic instr_t mk_instr(opcode_e op, bop_e bop = BOP_NOP,
                                      uop_e uop = UOP_NOP, sel_e srca = SEL_MA,
                                      sel_e srcb = SEL_MA, sel_e dst = SEL_MA,
                                      logic [4:0] imm = '0);
    instr_t i;
    i.op = op; i.bop = bop; i.uop = uop; i.srca = srca; i.srcb = srcb;
    i.dst = dst; i.imm = imm;
    return i;
  endfunction

endpackage
