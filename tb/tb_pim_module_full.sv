// tb_pim_module_full -- top-level testbench.
// End-to-end test of the PIM memory module with every parameter at its
// default (2 pages of 32 arrays of 1024 x 512 bits, 65536 records): the same
// query, UPDATE and checks as tb_pim_module, run by tb_q11_host.
module tb_pim_module_full;
  import pim_pkg::*;

  localparam int unsigned ADDR_W = 1 + 3 + 5 + 10 + 3;

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

  pim_module  dut (.*);
  tb_q11_host  host (.*);
endmodule
