// pim_module -- bulk-bitwise PIM memory module (top level).
//
// The module is PIM-capable main memory made of PAGES huge pages (pim_page),
// each holding NXB cell arrays of ROWS x COLS bits; with the defaults a page is
// 32 arrays x 1024 rows x 512 columns = 2 MiB, the size of a huge page.
// A database relation is laid out one record per array row, so every record of
// a page is filtered, masked, updated or aggregated by one PIM instruction.
// The host has two ports:
//   * loads/stores: 64-bit words at req_addr = {page, page offset}; the page
//     decodes the offset (see pim_page). A load answers on resp_valid /
//     resp_rdata one cycle after it is accepted.
//   * PIM instructions: pim_instr is routed by the hardware to page pim_page.
//     An instruction acts on one page only; to run the same operation over a
//     relation that spans several pages the host sends it to each page. Pages
//     execute their instructions concurrently; page_busy and page_done report
//     each page's progress.
// Per-array aggregation results are written into the arrays; the host loads
// one value per array and combines them (that host part is software).
// Accepting requests: a request to a page waits while that page executes an
// instruction (req_ready / pim_ready low). The page count is this design's
// choice: the text does not give the memory size.
module pim_module
  import pim_pkg::*;
#(
  parameter int unsigned ROWS   = 1024,
  parameter int unsigned COLS   = 512,
  parameter int unsigned NXB    = 32,
  parameter int unsigned PAGES  = 2,
  parameter int unsigned OFF_W  = 3 + $clog2(NXB) + $clog2(ROWS) + $clog2(COLS / DATA_W),
  parameter int unsigned PG_W   = (PAGES > 1) ? $clog2(PAGES) : 1,
  parameter int unsigned ADDR_W = PG_W + OFF_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // host loads and stores
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [DATA_W-1:0] req_wdata,
  output logic              resp_valid,
  output logic [DATA_W-1:0] resp_rdata,
  // PIM instructions
  input  logic              pim_valid,
  output logic              pim_ready,
  input  logic [PG_W-1:0]   pim_page,
  input  pim_instr_t        pim_instr,
  output logic [PAGES-1:0]  page_busy,
  output logic [PAGES-1:0]  page_done
);

  logic [PG_W-1:0] req_page;
  assign req_page = req_addr[ADDR_W-1 -: PG_W];

  logic [PAGES-1:0]  p_req_ready, p_resp_valid, p_instr_ready;
  logic [DATA_W-1:0] p_resp_rdata [PAGES];

  for (genvar p = 0; p < PAGES; p++) begin : g_page
    pim_page #(.ROWS(ROWS), .COLS(COLS), .NXB(NXB), .OFF_W(OFF_W)) u_page (
      .clk, .rst_n,
      .req_valid  (req_valid && (req_page == PG_W'(p))),
      .req_ready  (p_req_ready[p]),
      .req_we,
      .req_off    (req_addr[OFF_W-1:0]),
      .req_wdata,
      .resp_valid (p_resp_valid[p]),
      .resp_rdata (p_resp_rdata[p]),
      .instr_valid(pim_valid && (pim_page == PG_W'(p))),
      .instr_ready(p_instr_ready[p]),
      .instr      (pim_instr),
      .busy       (page_busy[p]),
      .done       (page_done[p])
    );
  end

  assign req_ready = p_req_ready[req_page];
  assign pim_ready = p_instr_ready[pim_page];

  // One request is accepted per cycle, so at most one page answers.
  always_comb begin
    resp_valid = 1'b0;
    resp_rdata = '0;
    for (int p = 0; p < PAGES; p++) begin
      if (p_resp_valid[p]) begin
        resp_valid = 1'b1;
        resp_rdata = p_resp_rdata[p];
      end
    end
  end

  a_one_resp: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(p_resp_valid))
    else $error("pim_module: two pages answered in one cycle");

endmodule
