// tb_q11_host -- behavioural host that runs a star-schema query end to end on
// pim_module and checks every answer.
// The relation is the fact table pre-joined with its date dimension, one
// record per array row:
//   columns   0..15  d_year            (1992..1994)
//   columns  16..23  lo_quantity       (1..50)
//   columns  32..63  lo_discount       (0..10, 32-bit field)
//   columns  64..95  lo_extendedprice  (< 2^24)
// Query (shape of SSB Q1.1): sum(price * discount), count, min(price) and
// max(price) over records with year = 1993, 1 <= discount <= 3, quantity < 25.
// Then an UPDATE (discount := 0 where year = 1992, done by the PIM MUX), a
// sum of (price + discount) over the same filter, and a row-wise OR that
// copies the first result row. The program is sent to
// every page, instruction by instruction, alternating between pages so that
// the pages execute concurrently. After the pages finish, the host loads one
// result per array and combines them, as the host does in the real system.
// Records are generated here from $urandom and kept in host arrays, from which
// all expected values are computed. The host also checks: the MUL latency
// (2L + 3L(L+1) cycles, L = 32) and the aggregation latency (ROWS + 4), that
// a load to a busy page stalls and then returns the right word, and that each
// mechanism (stall, concurrent pages, aggregation circuits, MUX update, every
// instruction class) happened; one that never happened counts as a failure.
module tb_q11_host
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
  output logic              rst_n,
  output logic              req_valid,
  input  logic              req_ready,
  output logic              req_we,
  output logic [ADDR_W-1:0] req_addr,
  output logic [DATA_W-1:0] req_wdata,
  input  logic              resp_valid,
  input  logic [DATA_W-1:0] resp_rdata,
  output logic              pim_valid,
  input  logic              pim_ready,
  output logic [PG_W-1:0]   pim_page,
  output pim_instr_t        pim_instr,
  input  logic [PAGES-1:0]  page_busy,
  input  logic [PAGES-1:0]  page_done
);

  localparam int unsigned NREC  = PAGES * NXB * ROWS;
  localparam int unsigned XB_W  = $clog2(NXB);
  localparam int unsigned ROW_B = $clog2(ROWS);
  // column map
  localparam int C_YEAR = 0, C_QTY = 16, C_DISC = 32, C_PRICE = 64;
  localparam int C_F = 128, C_F2 = 129, C_F3 = 130, C_PROD = 160, C_MSK = 192, C_MSK2 = 224;
  localparam int C_T = 250, C_RES = 320, C_RES2 = 384;

  int checks = 0, failures = 0;
  int n_stall = 0, n_conc = 0, n_done = 0;
  int n_op [32];

  int unsigned year [NREC], qty [NREC], disc [NREC], price [NREC];

  initial begin : watchdog
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (req_valid && !req_ready) n_stall++;
    if (&page_busy && PAGES > 1) n_conc++;
    n_done += $countones(page_done);
  end

  function automatic int idx(int p, int x, int r);
    return (p * NXB + x) * ROWS + r;
  endfunction

  function automatic logic [ADDR_W-1:0] addr(int p, int x, int r, int w);
    logic [ADDR_W-1:0] a;
    a = ADDR_W'(w);
    a = (a << ROW_B) | ADDR_W'(r);
    a = (a << XB_W) | ADDR_W'(x);
    a = a << 3;
    a = a | (ADDR_W'(p) << OFF_W);
    return a;
  endfunction

  task automatic store(logic [ADDR_W-1:0] a, logic [63:0] d);
    @(negedge clk);
    req_valid = 1'b1; req_we = 1'b1; req_addr = a; req_wdata = d;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 req_valid = 1'b0;
  endtask

  task automatic load(logic [ADDR_W-1:0] a, output logic [63:0] d);
    @(negedge clk);
    req_valid = 1'b1; req_we = 1'b0; req_addr = a;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 req_valid = 1'b0;
    @(negedge clk);
    while (!resp_valid) @(negedge clk);
    d = resp_rdata;
  endtask

  task automatic issue(int p, pim_instr_t ins);
    @(negedge clk);
    pim_valid = 1'b1; pim_page = PG_W'(p); pim_instr = ins;
    #1;
    while (!pim_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 pim_valid = 1'b0;
    n_op[int'(ins.op)]++;
  endtask

  function automatic pim_instr_t mk(pim_op_e op, int a, int b, int d, int len, logic ui,
                                    longint imm, int f = C_F, int drow = 0);
    pim_instr_t i;
    i = '0;
    i.op = op; i.a = col_t'(a); i.b = col_t'(b); i.d = col_t'(d); i.f = col_t'(f);
    i.t = col_t'(C_T); i.len = len_t'(len); i.use_imm = ui; i.imm = 64'(imm);
    i.drow = row_t'(drow);
    return i;
  endfunction

  // the PIM program, sent to every page
  localparam int NPROG = 26;
  pim_instr_t prog [NPROG];
  initial begin
    prog[0]  = mk(OP_EQ,  C_YEAR, 0, C_F, 16, 1, 1993);
    prog[1]  = mk(OP_GE,  C_DISC, 0, C_F2, 32, 1, 1);
    prog[2]  = mk(OP_AND, C_F, C_F2, C_F, 1, 0, 0);
    prog[3]  = mk(OP_LE,  C_DISC, 0, C_F2, 32, 1, 3);
    prog[4]  = mk(OP_AND, C_F, C_F2, C_F, 1, 0, 0);
    prog[5]  = mk(OP_LT,  C_QTY, 0, C_F2, 8, 1, 25);
    prog[6]  = mk(OP_AND, C_F, C_F2, C_F, 1, 0, 0);
    prog[7]  = mk(OP_MUL, C_PRICE, C_DISC, C_PROD, 32, 0, 0);
    prog[8]  = mk(OP_MASK, C_PROD, 0, C_MSK, 32, 0, 0);
    prog[9]  = mk(OP_AGG_SUM, C_MSK, 0, C_RES, 32, 0, 0, C_F, 0);
    prog[10] = mk(OP_AGG_SUM, C_F, 0, C_RES2, 1, 0, 0, C_F, 0);
    prog[11] = mk(OP_MASKN, C_PRICE, 0, C_MSK2, 32, 0, 0);
    prog[12] = mk(OP_AGG_MIN, C_MSK2, 0, C_RES, 32, 0, 0, C_F, 1);
    prog[13] = mk(OP_MASK, C_PRICE, 0, C_MSK2, 32, 0, 0);
    prog[14] = mk(OP_AGG_MAX, C_MSK2, 0, C_RES2, 32, 0, 0, C_F, 1);
    // UPDATE: discount := 0 where year = 1992
    prog[15] = mk(OP_EQ,  C_YEAR, 0, C_F3, 16, 1, 1992);
    prog[16] = mk(OP_MUX, C_DISC, 0, C_DISC, 32, 1, 0, C_F3);
    // sum(price + discount) over the filter, after the update
    prog[17] = mk(OP_ADD, C_PRICE, C_DISC, C_PROD, 32, 0, 0);
    prog[18] = mk(OP_MASK, C_PROD, 0, C_MSK, 32, 0, 0);
    prog[19] = mk(OP_AGG_SUM, C_MSK, 0, C_RES, 32, 0, 0, C_F, 2);
    // sum of all discounts after the update (F2 := NOT F3 & F3 = 0 ... all ones)
    prog[20] = mk(OP_NOT, C_F3, 0, C_F2, 1, 0, 0);
    prog[21] = mk(OP_OR,  C_F2, C_F3, C_F2, 1, 0, 0);
    prog[22] = mk(OP_MASK, C_DISC, 0, C_MSK2, 32, 0, 0, C_F2);
    prog[23] = mk(OP_AGG_SUM, C_MSK2, 0, C_RES2, 32, 0, 0, C_F2, 2);
    prog[24] = mk(OP_XOR, C_F3, C_F3, C_F3, 1, 0, 0);
    // row-wise: row 3 := row 0 OR row 0, a copy of the first result row
    prog[25] = mk(OP_ROR, 0, 0, 0, 1, 0, 0, C_F, 3);
  end

  initial begin : main
    logic [63:0] d;
    longint e_sum, e_cnt, e_min, e_max, e_sum2, e_dsum;
    longint g_sum, g_cnt, g_min, g_max, g_sum2, g_dsum;
    rst_n = 1'b0; req_valid = 1'b0; req_we = 1'b0; req_addr = '0; req_wdata = '0;
    pim_valid = 1'b0; pim_page = '0; pim_instr = '0;
    foreach (n_op[k]) n_op[k] = 0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // ---- load the relation with ordinary stores ----
    for (int p = 0; p < PAGES; p++)
      for (int x = 0; x < NXB; x++)
        for (int r = 0; r < ROWS; r++) begin
          int k;
          k = idx(p, x, r);
          year[k]  = 1992 + $urandom_range(0, 2);
          qty[k]   = $urandom_range(1, 50);
          disc[k]  = $urandom_range(0, 10);
          price[k] = $urandom_range(0, (1 << 24) - 1);
          store(addr(p, x, r, 0), {32'(disc[k]), 8'd0, 8'(qty[k]), 16'(year[k])});
          store(addr(p, x, r, 1), {32'd0, 32'(price[k])});
        end
    // read a few back
    for (int n = 0; n < 8; n++) begin
      int p, x, r, k;
      p = $urandom_range(0, PAGES - 1); x = $urandom_range(0, NXB - 1);
      r = $urandom_range(0, ROWS - 1); k = idx(p, x, r);
      load(addr(p, x, r, 1), d);
      checks++;
      if (d !== {32'd0, 32'(price[k])}) begin
        failures++;
        $display("load p%0d x%0d r%0d: got %h", p, x, r, d);
      end
    end

    // ---- run the program on all pages, interleaved ----
    for (int s = 0; s < NPROG; s++) begin
      for (int p = 0; p < PAGES; p++) begin
        issue(p, prog[s]);
        if (p == 0 && s == 7) begin
          // a load to the busy page waits until the MUL is over
          int k;
          k = idx(0, NXB - 1, ROWS - 1);
          load(addr(0, NXB - 1, ROWS - 1, 1), d);
          checks++;
          if (d !== {32'd0, 32'(price[k])}) begin
            failures++;
            $display("stalled load: got %h", d);
          end
        end
      end
    end
    @(negedge clk);
    while (|page_busy) @(negedge clk);

    // ---- expected results ----
    for (int p = 0; p < PAGES; p++) begin
      g_sum = 0; g_cnt = 0; g_min = 64'hFFFFFFFF; g_max = 0; g_sum2 = 0; g_dsum = 0;
      e_sum = 0; e_cnt = 0; e_min = 64'hFFFFFFFF; e_max = 0; e_sum2 = 0; e_dsum = 0;
      for (int x = 0; x < NXB; x++) begin
        longint a_sum, a_cnt, a_min, a_max, a_sum2, a_dsum;
        a_sum = 0; a_cnt = 0; a_min = 64'hFFFFFFFF; a_max = 0; a_sum2 = 0; a_dsum = 0;
        for (int r = 0; r < ROWS; r++) begin
          int k;
          int unsigned dnew;
          logic sel;
          k = idx(p, x, r);
          sel = (year[k] == 1993) && (disc[k] >= 1) && (disc[k] <= 3) && (qty[k] < 25);
          dnew = (year[k] == 1992) ? 0 : disc[k];
          a_dsum += dnew;
          if (sel) begin
            a_sum += longint'(price[k]) * disc[k];
            a_cnt++;
            if (price[k] < a_min) a_min = price[k];
            if (price[k] > a_max) a_max = price[k];
            a_sum2 += longint'(32'(price[k] + dnew));
          end
        end
        // per-array results, loaded by the host
        load(addr(p, x, 0, C_RES / 64), d);  checks++; if (d != a_sum)  begin failures++; $display("p%0d x%0d sum %0d exp %0d", p, x, d, a_sum); end
        g_sum += d;
        load(addr(p, x, 3, C_RES / 64), d);  checks++; if (d != a_sum)  begin failures++; $display("p%0d x%0d row copy %0d exp %0d", p, x, d, a_sum); end
        load(addr(p, x, 0, C_RES2 / 64), d); checks++; if (d != a_cnt)  begin failures++; $display("p%0d x%0d cnt %0d exp %0d", p, x, d, a_cnt); end
        g_cnt += d;
        load(addr(p, x, 1, C_RES / 64), d);  checks++; if (d != a_min)  begin failures++; $display("p%0d x%0d min %0d exp %0d", p, x, d, a_min); end
        if (d < g_min) g_min = d;
        load(addr(p, x, 1, C_RES2 / 64), d); checks++; if (d != a_max)  begin failures++; $display("p%0d x%0d max %0d exp %0d", p, x, d, a_max); end
        if (d > g_max) g_max = d;
        load(addr(p, x, 2, C_RES / 64), d);  checks++; if (d != a_sum2) begin failures++; $display("p%0d x%0d sum2 %0d exp %0d", p, x, d, a_sum2); end
        g_sum2 += d;
        load(addr(p, x, 2, C_RES2 / 64), d); checks++; if (d != a_dsum) begin failures++; $display("p%0d x%0d dsum %0d exp %0d", p, x, d, a_dsum); end
        g_dsum += d;
        e_sum += a_sum; e_cnt += a_cnt; e_sum2 += a_sum2; e_dsum += a_dsum;
        if (a_min < e_min) e_min = a_min;
        if (a_max > e_max) e_max = a_max;
      end
      checks++;
      if (g_sum != e_sum || g_cnt != e_cnt || g_min != e_min || g_max != e_max ||
          g_sum2 != e_sum2 || g_dsum != e_dsum) begin
        failures++;
        $display("page %0d: combined results differ", p);
      end
      $display("page %0d: revenue=%0d count=%0d min=%0d max=%0d", p, g_sum, g_cnt, g_min, g_max);
    end

    // ---- latencies, measured separately on page 0 ----
    begin
      int c;
      issue(0, prog[7]);
      c = 0;
      forever begin @(posedge clk); c++; @(negedge clk); if (page_done[0]) break; end
      checks++;
      if (c != 2 * 32 + 3 * 32 * 33) begin
        failures++;
        $display("MUL latency %0d, expected %0d", c, 2 * 32 + 3 * 32 * 33);
      end
      issue(0, prog[9]);
      c = 0;
      forever begin @(posedge clk); c++; @(negedge clk); if (page_done[0]) break; end
      checks++;
      if (c != ROWS + 4) begin
        failures++;
        $display("aggregation latency %0d, expected %0d", c, ROWS + 4);
      end
    end

    // ---- mechanisms that must have happened ----
    repeat (2) @(posedge clk);
    checks++; if (n_stall == 0) begin failures++; $display("no load was stalled"); end
    checks++; if (PAGES > 1 && n_conc == 0) begin failures++; $display("pages never ran together"); end
    checks++; if (n_done != PAGES * NPROG + 2) begin
      failures++; $display("%0d done pulses, expected %0d", n_done, PAGES * NPROG + 2);
    end
    foreach (prog[s]) begin
      checks++;
      if (n_op[int'(prog[s].op)] == 0) begin failures++; $display("op never issued"); end
    end
    $display("mechanisms: stalled cycles=%0d concurrent-page cycles=%0d done pulses=%0d",
             n_stall, n_conc, n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
