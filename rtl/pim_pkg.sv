// pim_pkg -- shared types and constants of the bulk-bitwise PIM memory.
//
// A relation is stored one record per cell-array row, each attribute occupying
// a run of adjacent columns (bit j of an attribute in column start+j, LSB first).
// All computation is done by column-wise bitwise operations: one primitive
// reads one or two columns of every row and writes one result column in every
// row, in one cycle. A primitive is described by a 4-bit truth table, so the
// array can apply any two-input Boolean function (the text names AND, NOT and
// NOR as examples; the truth-table encoding is this design's own choice).
//
// Widths of column and row indices are sized for the default array
// (1024 rows x 512 columns); a smaller array simply leaves upper index bits 0.
package pim_pkg;

  localparam int unsigned COL_W  = 9;    // column index, up to 512 columns
  localparam int unsigned ROW_W  = 10;   // row index, up to 1024 rows
  localparam int unsigned LEN_W  = 7;    // attribute length 1..64 bits
  localparam int unsigned DATA_W = 64;   // host load/store word
  localparam int unsigned RES_W  = 64;   // aggregation result written back
  localparam int unsigned NSCR   = 4;    // scratch columns used by a PIM op

  typedef logic [COL_W-1:0] col_t;
  typedef logic [ROW_W-1:0] row_t;
  typedef logic [LEN_W-1:0] len_t;

  // Truth table of f(x, y): bit {x,y} holds f(x,y).
  typedef logic [3:0] tt_t;
  localparam tt_t TT_SET0  = 4'b0000;
  localparam tt_t TT_NOR   = 4'b0001;
  localparam tt_t TT_NX_Y  = 4'b0010;  // ~x &  y
  localparam tt_t TT_NOTX  = 4'b0011;  // ~x
  localparam tt_t TT_X_NY  = 4'b0100;  //  x & ~y
  localparam tt_t TT_XOR   = 4'b0110;
  localparam tt_t TT_NAND  = 4'b0111;
  localparam tt_t TT_AND   = 4'b1000;
  localparam tt_t TT_XNOR  = 4'b1001;
  localparam tt_t TT_COPYX = 4'b1100;
  localparam tt_t TT_X_ONY = 4'b1101;  //  x | ~y
  localparam tt_t TT_OR    = 4'b1110;
  localparam tt_t TT_SET1  = 4'b1111;

  // One bulk-bitwise primitive, broadcast to every cell array of a page.
  // Column-wise (rowwise = 0): col[cd] = tt(col[ca], use_k ? k : col[cb]) in
  // every row. Row-wise (rowwise = 1): row[rd] = tt(row[ra], row[rb]) in every
  // column.
  typedef struct packed {
    tt_t  tt;
    col_t ca;
    col_t cb;
    logic use_k;
    logic k;
    col_t cd;
    logic rowwise;
    row_t ra;
    row_t rb;
    row_t rd;
  } col_op_t;

  // PIM instruction set (Sec. "Filter", "Aggregation", "Supporting JOIN").
  typedef enum logic [4:0] {
    OP_AND     = 5'd0,   // d = a & b            (bitwise, len bits)
    OP_OR      = 5'd1,   // d = a | b
    OP_XOR     = 5'd2,   // d = a ^ b
    OP_NOR     = 5'd3,   // d = ~(a | b)
    OP_NOT     = 5'd4,   // d = ~a
    OP_EQ      = 5'd5,   // d[0] = (a == b)      (unsigned compares, 1-bit result)
    OP_NE      = 5'd6,   // d[0] = (a != b)
    OP_LT      = 5'd7,   // d[0] = (a <  b)
    OP_LE      = 5'd8,   // d[0] = (a <= b)
    OP_GT      = 5'd9,   // d[0] = (a >  b)
    OP_GE      = 5'd10,  // d[0] = (a >= b)
    OP_ADD     = 5'd11,  // d = a + b  mod 2^len
    OP_MUL     = 5'd12,  // d = a * b  mod 2^len (d must not overlap a or b)
    OP_MASK    = 5'd13,  // d = f ? a : 0        (mask for sum / max)
    OP_MASKN   = 5'd14,  // d = f ? a : all ones (mask for min)
    OP_MUX     = 5'd15,  // d = f ? b : a        (PIM MUX used for UPDATE)
    OP_AGG_SUM = 5'd16,  // aggregation circuit: sum of a over all rows
    OP_AGG_MIN = 5'd17,  // aggregation circuit: min
    OP_AGG_MAX = 5'd18,  // aggregation circuit: max
    OP_RAND    = 5'd19,  // row drow = row ra & row rb   (row-wise, all columns)
    OP_ROR     = 5'd20,  // row drow = row ra | row rb
    OP_RXOR    = 5'd21,  // row drow = row ra ^ row rb
    OP_RNOR    = 5'd22,  // row drow = ~(row ra | row rb)
    OP_RNOT    = 5'd23   // row drow = ~row ra
  } pim_op_e;

  typedef enum logic [1:0] {AGG_SUM = 2'd0, AGG_MIN = 2'd1, AGG_MAX = 2'd2} agg_kind_e;

  // One PIM instruction, sent to one page and executed in all its arrays.
  typedef struct packed {
    pim_op_e            op;
    col_t               a;       // first operand attribute (start column)
    col_t               b;       // second operand attribute (start column)
    col_t               d;       // destination (start column)
    col_t               f;       // filter / select column (MASK, MASKN, MUX)
    col_t               t;       // first of NSCR free scratch columns
    len_t               len;     // attribute length in bits, 1..64
    logic               use_imm; // second operand is imm instead of b
    logic [DATA_W-1:0]  imm;     // immediate operand
    row_t               drow;    // row receiving an aggregation or row-wise result
    row_t               ra;      // first source row of a row-wise operation
    row_t               rb;      // second source row of a row-wise operation
  } pim_instr_t;

  // Configuration handed to the per-array aggregation circuits.
  typedef struct packed {
    agg_kind_e kind;
    col_t      a;
    len_t      len;
    row_t      drow;
    col_t      d;
  } agg_cfg_t;

endpackage
