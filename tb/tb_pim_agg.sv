// tb_pim_agg -- self-checking test of the aggregation circuit on one array.
// A 16-row, 128-column pim_xbar is filled with random rows. For sum, min and
// max over fields of random position and length (1..16 bits, plus one full
// 64-bit field) the circuit is started; the testbench checks that it is busy
// for exactly ROWS + 2 cycles, then reads the result row back and compares the
// 64-bit value at the destination with the reduction computed here, and checks
// that the other bits of the result row were left alone.
module tb_pim_agg;
  import pim_pkg::*;

  localparam int unsigned ROWS = 16;
  localparam int unsigned COLS = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy;
  agg_cfg_t cfg;
  logic a_rd_en, a_wr_en;
  row_t a_rd_row, a_wr_row;
  logic [COLS-1:0] a_wr_mask, a_wr_data, rdata;
  logic t_en, t_we;
  row_t t_row;
  logic [COLS-1:0] t_wdata;
  logic row_en, row_we;
  row_t row_addr;
  logic [COLS-1:0] row_wmask, row_wdata;

  int checks = 0, failures = 0;
  logic [COLS-1:0] ref_mem [ROWS];

  pim_agg #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .start, .cfg, .busy,
    .rd_en(a_rd_en), .rd_row(a_rd_row), .rd_data(rdata),
    .wr_en(a_wr_en), .wr_row(a_wr_row), .wr_mask(a_wr_mask), .wr_data(a_wr_data));

  always_comb begin
    if (busy) begin
      row_en = a_rd_en || a_wr_en; row_we = a_wr_en;
      row_addr = a_wr_en ? a_wr_row : a_rd_row;
      row_wmask = a_wr_mask; row_wdata = a_wr_data;
    end else begin
      row_en = t_en; row_we = t_we; row_addr = t_row; row_wmask = '1; row_wdata = t_wdata;
    end
  end

  pim_xbar #(.ROWS(ROWS), .COLS(COLS)) u_xbar (
    .clk, .rst_n, .cop_valid(1'b0), .cop('0), .row_en, .row_we, .row_addr, .row_wmask, .row_wdata,
    .row_rdata(rdata));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill();
    for (int r = 0; r < ROWS; r++) begin
      ref_mem[r] = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      t_en = 1'b1; t_we = 1'b1; t_row = row_t'(r); t_wdata = ref_mem[r];
    end
    @(negedge clk);
    t_en = 1'b0; t_we = 1'b0;
  endtask

  task automatic trial(agg_kind_e kind, int a, int l, int drow, int d);
    logic [63:0] m, e, v, g;
    logic [COLS-1:0] row, keep;
    int cyc;
    m = (l >= 64) ? '1 : ((64'd1 << l) - 1);
    e = (kind == AGG_MIN) ? '1 : '0;
    for (int r = 0; r < ROWS; r++) begin
      v = 64'(ref_mem[r] >> a) & m;
      case (kind)
        AGG_SUM: e = e + v;
        AGG_MIN: e = (v < e) ? v : e;
        default: e = (v > e) ? v : e;
      endcase
    end
    @(negedge clk);
    cfg.kind = kind; cfg.a = col_t'(a); cfg.len = len_t'(l); cfg.drow = row_t'(drow);
    cfg.d = col_t'(d);
    start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0;
    cyc = 0;
    while (busy) begin @(posedge clk); cyc++; #1; end
    checks++;
    if (cyc != ROWS + 2) begin
      failures++;
      $display("%s: busy %0d cycles, expected %0d", kind.name(), cyc, ROWS + 2);
    end
    @(negedge clk);
    t_en = 1'b1; t_we = 1'b0; t_row = row_t'(drow);
    @(negedge clk);
    t_en = 1'b0;
    row = rdata;
    g = 64'(row >> d);
    if (d + 64 > COLS) begin
      e = e & ((64'd1 << (COLS - d)) - 1);
      g = g & ((64'd1 << (COLS - d)) - 1);
    end
    checks++;
    if (g !== e) begin
      failures++;
      $display("%s a=%0d len=%0d: got %h expected %h", kind.name(), a, l, g, e);
    end
    keep = ~(COLS'({64{1'b1}}) << d);
    checks++;
    if ((row & keep) !== (ref_mem[drow] & keep)) begin
      failures++;
      $display("%s: bits outside the result changed", kind.name());
    end
    ref_mem[drow] = (ref_mem[drow] & keep) | (COLS'(e) << d);
  endtask

  initial begin
    start = 1'b0; cfg = '0; t_en = 1'b0; t_we = 1'b0; t_row = '0; t_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 30; n++) begin
      fill();
      trial(agg_kind_e'(n % 3), $urandom_range(0, 40), $urandom_range(1, 16), 0, 64);
    end
    fill();
    trial(AGG_SUM, 0, 64, 5, 64);
    fill();
    trial(AGG_MAX, 3, 64, 7, 32);
    fill();
    trial(AGG_MIN, 10, 5, 2, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
