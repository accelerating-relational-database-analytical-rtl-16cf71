// pim_page -- one (huge) page of bulk-bitwise PIM memory.
//
// A PIM operation always reads and writes data of a single page, so one page
// is the unit that executes one instruction: the page's controller (pim_ctrl)
// broadcasts each column primitive to all NXB cell arrays (pim_xbar) of the
// page, and every array has its own aggregation circuit (pim_agg) that the
// controller starts for the aggregation instructions.
// Host loads and stores are 64-bit words. The page offset is mapped onto the
// arrays so that software, which controls these untranslated bits, controls
// where data lands:
//     offset = { word-in-row , row , array , byte-in-word (3 bits) }
// Consecutive words therefore go to the same row position of successive
// arrays, then to successive rows; a record's own bytes (one row) are far
// apart in the address space. The text requires only that the mapping of
// page-offset bits to array, row and column be fixed and known; the field
// order is this design's choice. Byte bits are ignored (aligned words only).
// Ordering: a load or store is accepted only while no PIM instruction is
// executing on the page (req_ready low while busy), so each page sees host
// accesses and PIM instructions in the order it accepted them. A load returns
// its word on resp_rdata with resp_valid one cycle after acceptance.
module pim_page
  import pim_pkg::*;
#(
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned COLS  = 512,
  parameter int unsigned NXB   = 32,
  parameter int unsigned OFF_W = 3 + $clog2(NXB) + $clog2(ROWS) + $clog2(COLS / DATA_W)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host loads and stores
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [OFF_W-1:0]  req_off,
  input  logic [DATA_W-1:0] req_wdata,
  output logic              resp_valid,
  output logic [DATA_W-1:0] resp_rdata,
  // PIM instructions
  input  logic              instr_valid,
  output logic              instr_ready,
  input  pim_instr_t        instr,
  output logic              busy,
  output logic              done
);

  localparam int unsigned XB_W  = $clog2(NXB);
  localparam int unsigned ROW_B = $clog2(ROWS);
  localparam int unsigned WPR   = COLS / DATA_W;  // words per row

  // ---- controller ----
  logic     cop_valid;
  col_op_t  cop;
  logic     agg_start;
  agg_cfg_t agg_cfg;
  logic     agg_busy;
  logic [NXB-1:0] agg_busy_v;

  pim_ctrl u_ctrl (
    .clk, .rst_n,
    .instr_valid, .instr_ready, .instr, .busy, .done,
    .cop_valid, .cop,
    .agg_start, .agg_cfg, .agg_busy
  );

  assign agg_busy = |agg_busy_v;

  // ---- address mapping ----
  int unsigned h_xb, h_row, h_word;
  always_comb begin
    h_xb   = (32'(req_off) >> 3) % NXB;
    h_row  = (32'(req_off) >> (3 + XB_W)) % ROWS;
    h_word = (32'(req_off) >> (3 + XB_W + ROW_B)) % WPR;
  end

  logic host_acc;
  assign req_ready = !busy;
  assign host_acc  = req_valid && req_ready;

  // ---- arrays and their aggregation circuits ----
  logic [COLS-1:0] rdata [NXB];

  for (genvar x = 0; x < NXB; x++) begin : g_xb
    logic            a_rd_en, a_wr_en;
    row_t            a_rd_row, a_wr_row;
    logic [COLS-1:0] a_wr_mask, a_wr_data;
    logic            row_en, row_we;
    row_t            row_addr;
    logic [COLS-1:0] row_wmask, row_wdata;

    pim_agg #(.ROWS(ROWS), .COLS(COLS)) u_agg (
      .clk, .rst_n,
      .start  (agg_start),
      .cfg    (agg_cfg),
      .busy   (agg_busy_v[x]),
      .rd_en  (a_rd_en),
      .rd_row (a_rd_row),
      .rd_data(rdata[x]),
      .wr_en  (a_wr_en),
      .wr_row (a_wr_row),
      .wr_mask(a_wr_mask),
      .wr_data(a_wr_data)
    );

    always_comb begin
      if (agg_busy) begin
        row_en    = a_rd_en || a_wr_en;
        row_we    = a_wr_en;
        row_addr  = a_wr_en ? a_wr_row : a_rd_row;
        row_wmask = a_wr_mask;
        row_wdata = a_wr_data;
      end else begin
        row_en    = host_acc && (h_xb == x);
        row_we    = req_we;
        row_addr  = row_t'(h_row);
        row_wmask = COLS'({DATA_W{1'b1}}) << (h_word * DATA_W);
        row_wdata = COLS'(req_wdata) << (h_word * DATA_W);
      end
    end

    pim_xbar #(.ROWS(ROWS), .COLS(COLS)) u_xbar (
      .clk, .rst_n,
      .cop_valid,
      .cop,
      .row_en,
      .row_we,
      .row_addr,
      .row_wmask,
      .row_wdata,
      .row_rdata(rdata[x])
    );
  end

  // ---- load response ----
  int unsigned r_xb, r_word;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      r_xb       <= 0;
      r_word     <= 0;
    end else begin
      resp_valid <= host_acc && !req_we;
      if (host_acc && !req_we) begin
        r_xb   <= h_xb;
        r_word <= h_word;
      end
    end
  end

  assign resp_rdata = DATA_W'(rdata[r_xb] >> (r_word * DATA_W));

endmodule
