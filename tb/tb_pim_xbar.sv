// tb_pim_xbar -- self-checking test of one cell array (16 x 64).
// Fills the array through the row port, applies random column operations
// (random truth table, random columns, with and without a constant operand)
// and random row-wise operations (random truth table, random rows)
// and after each one reads every row back, comparing with a reference copy
// of the array kept in the testbench. Also checks masked row writes.
module tb_pim_xbar;
  import pim_pkg::*;

  localparam int unsigned ROWS = 16;
  localparam int unsigned COLS = 64;

  logic            clk = 1'b0;
  logic            rst_n = 1'b1;
  logic            cop_valid;
  col_op_t         cop;
  logic            row_en, row_we;
  row_t            row_addr;
  logic [COLS-1:0] row_wmask, row_wdata, row_rdata;

  int checks = 0, failures = 0;
  logic [COLS-1:0] ref_mem [ROWS];

  pim_xbar #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    cop_valid = 1'b0; row_en = 1'b0; row_we = 1'b0;
    row_addr = '0; row_wmask = '0; row_wdata = '0; cop = '0;
  endtask

  task automatic write_row(int r, logic [COLS-1:0] m, logic [COLS-1:0] d);
    @(negedge clk);
    row_en = 1'b1; row_we = 1'b1; row_addr = row_t'(r); row_wmask = m; row_wdata = d;
    @(negedge clk);
    idle();
    ref_mem[r] = (ref_mem[r] & ~m) | (d & m);
  endtask

  task automatic check_all();
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      row_en = 1'b1; row_we = 1'b0; row_addr = row_t'(r);
      @(negedge clk);
      idle();
      checks++;
      if (row_rdata !== ref_mem[r]) begin
        failures++;
        $display("row %0d: got %h expected %h", r, row_rdata, ref_mem[r]);
      end
    end
  endtask

  task automatic col_op(col_op_t o);
    @(negedge clk);
    cop_valid = 1'b1; cop = o;
    @(negedge clk);
    idle();
    if (o.rowwise) begin
      logic [COLS-1:0] res;
      for (int c = 0; c < COLS; c++) res[c] = o.tt[{ref_mem[o.ra][c], ref_mem[o.rb][c]}];
      ref_mem[o.rd] = res;
    end else for (int r = 0; r < ROWS; r++) begin
      logic x, y;
      x = ref_mem[r][o.ca];
      y = o.use_k ? o.k : ref_mem[r][o.cb];
      ref_mem[r][o.cd] = o.tt[{x, y}];
    end
  endtask

  initial begin
    idle();
    for (int r = 0; r < ROWS; r++) ref_mem[r] = '0;
    for (int r = 0; r < ROWS; r++) write_row(r, '1, {$urandom, $urandom});
    check_all();
    // masked writes
    for (int n = 0; n < 8; n++)
      write_row($urandom_range(ROWS - 1), {$urandom, $urandom}, {$urandom, $urandom});
    check_all();
    // named operations, then random truth tables
    begin
      tt_t named [8] = '{TT_AND, TT_OR, TT_NOR, TT_NOTX, TT_XOR, TT_XNOR, TT_SET0, TT_SET1};
      foreach (named[n]) begin
        col_op_t o;
        o = '0;
        o.tt = named[n]; o.ca = col_t'(n); o.cb = col_t'(n + 8); o.use_k = 1'b0; o.k = 1'b0;
        o.cd = col_t'(40 + n);
        col_op(o);
      end
    end
    check_all();
    for (int n = 0; n < 40; n++) begin
      col_op_t o;
      o.tt = tt_t'($urandom); o.ca = col_t'($urandom_range(COLS - 1));
      o.cb = col_t'($urandom_range(COLS - 1)); o.use_k = 1'($urandom);
      o.k = 1'($urandom); o.cd = col_t'($urandom_range(COLS - 1));
      o.rowwise = 1'b0; o.ra = row_t'($urandom_range(ROWS - 1));
      o.rb = row_t'($urandom_range(ROWS - 1)); o.rd = row_t'($urandom_range(ROWS - 1));
      col_op(o);
      o.rowwise = 1'b1;
      col_op(o);
      if (n % 4 == 3) check_all();
    end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
