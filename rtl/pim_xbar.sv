// pim_xbar -- one bulk-bitwise memory cell array (logic function only).
//
// Each row holds one record of a relation; each attribute spans a run of
// columns. Two ways in:
//   * Operation port (cop_valid, cop): a bulk bitwise operation in one cycle.
//     Column-wise (the one the database primitives use): for every row r at
//     once, bit cop.cd of r becomes cop.tt applied to (bit cop.ca, bit cop.cb)
//     of r, or to (bit cop.ca, constant cop.k) when cop.use_k. Row-wise
//     (cop.rowwise): row cop.rd becomes cop.tt applied column by column to
//     rows cop.ra and cop.rb.
//   * Row port: ordinary access to one whole row. A write updates the bits
//     selected by row_wmask; a read returns the row on row_rdata one cycle
//     later.
// The array models the digital behaviour of a memristive crossbar; the cells,
// their drivers and sense circuits are not modelled. The operation set comes
// from the text (bitwise logic between rows or columns); the truth-table encoding, the
// one-operation-per-cycle timing and the default size (1024 x 512) are this
// design's own choices. The array is not reset: like a memory, its contents
// are defined only after they are written. A column operation and a row write
// in the same cycle are not allowed (asserted while rst_n is high; the
// contents themselves are never reset).
module pim_xbar
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 512
) (
  input  logic            clk,
  input  logic            rst_n,      // only qualifies the assertion below
  // column-wise operation
  input  logic            cop_valid,
  input  col_op_t         cop,
  // row access
  input  logic            row_en,
  input  logic            row_we,
  input  row_t            row_addr,
  input  logic [COLS-1:0] row_wmask,
  input  logic [COLS-1:0] row_wdata,
  output logic [COLS-1:0] row_rdata
);

  logic [COLS-1:0] mem [ROWS];

  // truth table applied to every column of two rows
  function automatic logic [COLS-1:0] row_fn(tt_t tt, logic [COLS-1:0] x, logic [COLS-1:0] y);
    return ({COLS{tt[3]}} &  x &  y) | ({COLS{tt[2]}} &  x & ~y) |
           ({COLS{tt[1]}} & ~x &  y) | ({COLS{tt[0]}} & ~x & ~y);
  endfunction

  always_ff @(posedge clk) begin
    if (cop_valid && cop.rowwise) begin
      mem[cop.rd] <= row_fn(cop.tt, mem[cop.ra], mem[cop.rb]);
    end else if (cop_valid) begin
      for (int unsigned r = 0; r < ROWS; r++) begin
        mem[r][cop.cd] <= cop.tt[{mem[r][cop.ca], cop.use_k ? cop.k : mem[r][cop.cb]}];
      end
    end else if (row_en && row_we) begin
      mem[row_addr] <= (mem[row_addr] & ~row_wmask) | (row_wdata & row_wmask);
    end
  end

  always_ff @(posedge clk) begin
    if (row_en && !row_we) row_rdata <= mem[row_addr];
  end

  a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    !(cop_valid && row_en && row_we))
    else $error("pim_xbar: column operation and row write in the same cycle");

endmodule
