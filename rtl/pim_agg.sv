// pim_agg -- aggregation circuit in the periphery of one cell array.
//
// Reduces one attribute of the array to a single value (sum, min or max) and
// writes that value back into the array, where the host later reads it with an
// ordinary load. As the text describes it, the circuit reads the (already
// masked) attribute value by value, aggregates the values, and writes only the
// final result, so cells are written once per aggregation. Unselected records
// must first be nullified by the page controller: OP_MASK (zero) before a sum
// or max, OP_MASKN (all ones) before a min.
// Operation: `start` latches cfg. Rows 0..ROWS-1 are read one per cycle over
// the row port (data returns one cycle after rd_en); the field
// cfg.a .. cfg.a+cfg.len-1 of each row is accumulated in a 64-bit register
// (sums wrap modulo 2^64, values are unsigned). The result fills the RES_W
// (64) columns starting at cfg.d of row cfg.drow; columns past the array edge
// are dropped. busy is high for ROWS + 2 cycles after the start edge (ROWS
// reads, one cycle for the last datum, one write). The one-row-per-cycle
// rate, the widths and the result placement are this design's choices; the
// text gives only the function.
module pim_agg
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  agg_cfg_t        cfg,
  output logic            busy,
  // row port of the cell array
  output logic            rd_en,
  output row_t            rd_row,
  input  logic [COLS-1:0] rd_data,
  output logic            wr_en,
  output row_t            wr_row,
  output logic [COLS-1:0] wr_mask,
  output logic [COLS-1:0] wr_data
);

  typedef enum logic [1:0] {A_IDLE, A_READ, A_DRAIN, A_WRITE} astate_e;

  astate_e           state;
  agg_cfg_t          c;
  row_t              row;
  logic              dv;        // rd_data holds a row read last cycle
  logic [RES_W-1:0]  acc;
  logic [RES_W-1:0]  lenmask;
  logic [RES_W-1:0]  val;
  logic [COLS-1:0]   shifted;

  assign lenmask = (c.len >= len_t'(RES_W)) ? '1 : ((RES_W'(1) << c.len) - RES_W'(1));
  assign shifted = rd_data >> c.a;
  assign val     = RES_W'(shifted) & lenmask;

  assign busy    = (state != A_IDLE);
  assign rd_en   = (state == A_READ);
  assign rd_row  = row;
  assign wr_en   = (state == A_WRITE);
  assign wr_row  = c.drow;
  assign wr_mask = COLS'({RES_W{1'b1}}) << c.d;
  assign wr_data = COLS'(acc) << c.d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE;
      c     <= '0;
      row   <= '0;
      dv    <= 1'b0;
      acc   <= '0;
    end else begin
      dv <= rd_en;
      if (dv) begin
        unique case (c.kind)
          AGG_MIN: if (val < acc) acc <= val;
          AGG_MAX: if (val > acc) acc <= val;
          default: acc <= acc + val;
        endcase
      end
      unique case (state)
        A_IDLE: if (start) begin
          c     <= cfg;
          row   <= '0;
          state <= A_READ;
          acc   <= (cfg.kind == AGG_MIN) ? '1 : '0;
        end
        A_READ: begin
          if (row == row_t'(ROWS - 1)) state <= A_DRAIN;
          else row <= row + 1'b1;
        end
        A_DRAIN: state <= A_WRITE;
        A_WRITE: state <= A_IDLE;
        default: state <= A_IDLE;
      endcase
    end
  end

endmodule
