// tb_pim_module -- top-level testbench.
// End-to-end test of the PIM memory module at a reduced size (2 pages of
// 4 arrays of 32 x 512 bits): a behavioural host (tb_q11_host) loads a
// pre-joined star-schema relation, runs a filter / multiply / mask / aggregate
// query, an UPDATE and a second aggregation on every page, and checks all
// results, latencies and that every mechanism was exercised.
module tb_pim_module;
  import pim_pkg::*;
  localparam int unsigned ROWS = 32, COLS = 512, NXB = 4, PAGES = 2;
  localparam int unsigned ADDR_W = 1 + 3 + $clog2(NXB) + $clog2(ROWS) + $clog2(COLS / DATA_W);

  logic              clk = 1'b0;
  logic              rst_n;
  logic              req_valid, req_ready, req_we;
  logic [ADDR_W-1:0] req_addr;
  logic [DATA_W-1:0] req_wdata;
  logic              resp_valid;
  logic [DATA_W-1:0] resp_rdata;
  logic              pim_valid, pim_ready;
  logic [0:0]        pim_page;
  pim_instr_t        pim_instr;
  logic [1:0]        page_busy, page_done;

  always #5 clk = ~clk;

  pim_module #(.ROWS(ROWS), .COLS(COLS), .NXB(NXB), .PAGES(PAGES)) dut (.*);
  tb_q11_host #(.ROWS(ROWS), .COLS(COLS), .NXB(NXB), .PAGES(PAGES)) host (.*);
endmodule
