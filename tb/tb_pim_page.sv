// tb_pim_page -- self-checking test of one PIM page (4 arrays of 16 x 128).
// 1. Random 64-bit stores to every word of every row of every array; each is
//    checked in place (array, row, column range) against the page-offset
//    mapping {word, row, array, byte}, and loads read all words back.
// 2. An ADD with an immediate is sent to the page; it must change that field
//    in every row of every array (broadcast) and take 1 + 5L cycles. A load
//    issued meanwhile must wait (req_ready low) and still return the right word.
// 3. A MAX aggregation: every array's circuit writes its own maximum, which the
//    testbench loads and compares.
module tb_pim_page;
  import pim_pkg::*;

  localparam int unsigned ROWS = 16, COLS = 128, NXB = 4;
  localparam int unsigned WPR = COLS / DATA_W;
  localparam int unsigned OFF_W = 3 + 2 + 4 + 1;
  // the ADD uses columns 120..123 (bits 56..59 of word 1) as scratch
  localparam logic [63:0] SCR = 64'hF << 56;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid, req_ready, req_we, resp_valid;
  logic [OFF_W-1:0] req_off;
  logic [DATA_W-1:0] req_wdata, resp_rdata;
  logic instr_valid, instr_ready, busy, done;
  pim_instr_t instr;

  int checks = 0, failures = 0, n_stall = 0;
  logic [63:0] ref_w [NXB][ROWS][WPR];

  pim_page #(.ROWS(ROWS), .COLS(COLS), .NXB(NXB)) dut (.*);

  always #5 clk = ~clk;

  // look inside the arrays to check where a store landed
  int unsigned peek_r;
  logic [COLS-1:0] peek [NXB];
  for (genvar x = 0; x < NXB; x++) begin : g_peek
    assign peek[x] = dut.g_xb[x].u_xbar.mem[peek_r];
  end

  always @(posedge clk) if (req_valid && !req_ready) n_stall++;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [OFF_W-1:0] off(int x, int r, int w);
    return OFF_W'((((w * ROWS) + r) * NXB + x) * 8);
  endfunction

  task automatic store(int x, int r, int w, logic [63:0] d);
    @(negedge clk);
    req_valid = 1'b1; req_we = 1'b1; req_off = off(x, r, w); req_wdata = d;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 req_valid = 1'b0;
  endtask

  task automatic load(int x, int r, int w, output logic [63:0] d);
    @(negedge clk);
    req_valid = 1'b1; req_we = 1'b0; req_off = off(x, r, w);
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 req_valid = 1'b0;
    @(negedge clk);
    while (!resp_valid) @(negedge clk);
    d = resp_rdata;
  endtask

  task automatic issue(pim_instr_t ins);
    @(negedge clk);
    instr_valid = 1'b1; instr = ins;
    #1;
    while (!instr_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 instr_valid = 1'b0;
  endtask

  initial begin
    logic [63:0] d;
    pim_instr_t ins;
    int c;
    req_valid = 0; req_we = 0; req_off = '0; req_wdata = '0; instr_valid = 0; instr = '0;
    peek_r = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. stores, placement, loads
    for (int x = 0; x < NXB; x++)
      for (int r = 0; r < ROWS; r++)
        for (int w = 0; w < WPR; w++) begin
          ref_w[x][r][w] = {$urandom, $urandom};
          store(x, r, w, ref_w[x][r][w]);
          peek_r = r;
          #1;
          checks++;
          if (peek[x][w * 64 +: 64] !== ref_w[x][r][w]) begin
            failures++;
            $display("store x%0d r%0d w%0d landed elsewhere", x, r, w);
          end
        end
    for (int x = 0; x < NXB; x++)
      for (int r = 0; r < ROWS; r++)
        for (int w = 0; w < WPR; w++) begin
          load(x, r, w, d);
          checks++;
          if (d !== ref_w[x][r][w]) begin
            failures++;
            $display("load x%0d r%0d w%0d: %h expected %h", x, r, w, d, ref_w[x][r][w]);
          end
        end

    // 2. ADD imm on bits 8..27 of word 0 -> bits 8..27 of word 0 (in place)
    ins = '0;
    ins.op = OP_ADD; ins.a = 8; ins.d = 8; ins.t = 120; ins.len = 20; ins.use_imm = 1;
    ins.imm = 64'h5A5A5;
    issue(ins);
    c = 0;
    // a load to the busy page
    load(1, 3, 1, d);
    checks++;
    if ((d & ~SCR) !== (ref_w[1][3][1] & ~SCR)) begin failures++; $display("stalled load wrong"); end
    checks++;
    if (n_stall < 50) begin failures++; $display("load was not held back (%0d)", n_stall); end
    for (int x = 0; x < NXB; x++)
      for (int r = 0; r < ROWS; r++) begin
        logic [19:0] v;
        v = ref_w[x][r][0][27:8] + 20'h5A5A5;
        ref_w[x][r][0][27:8] = v;
      end
    for (int x = 0; x < NXB; x++)
      for (int r = 0; r < ROWS; r++) begin
        load(x, r, 0, d);
        checks++;
        if (d !== ref_w[x][r][0]) begin
          failures++;
          $display("ADD x%0d r%0d: %h expected %h", x, r, d, ref_w[x][r][0]);
        end
      end
    // latency of the ADD alone
    issue(ins);
    c = 0;
    forever begin @(posedge clk); c++; @(negedge clk); if (done) break; end
    checks++;
    if (c != 1 + 5 * 20) begin failures++; $display("ADD latency %0d", c); end
    for (int x = 0; x < NXB; x++)
      for (int r = 0; r < ROWS; r++) ref_w[x][r][0][27:8] = ref_w[x][r][0][27:8] + 20'h5A5A5;

    // 3. MAX over bits 0..15 of word 1 (columns 64..79); result into row 5 word 0
    ins = '0;
    ins.op = OP_AGG_MAX; ins.a = 64; ins.len = 16; ins.d = 0; ins.drow = 5;
    issue(ins);
    c = 0;
    forever begin @(posedge clk); c++; @(negedge clk); if (done) break; end
    checks++;
    if (c != ROWS + 4) begin failures++; $display("aggregation latency %0d", c); end
    for (int x = 0; x < NXB; x++) begin
      logic [63:0] m;
      m = 0;
      for (int r = 0; r < ROWS; r++) if (64'(ref_w[x][r][1][15:0]) > m) m = 64'(ref_w[x][r][1][15:0]);
      load(x, 5, 0, d);
      checks++;
      if (d !== m) begin failures++; $display("MAX x%0d: %h expected %h", x, d, m); end
      load(x, 5, 1, d);
      checks++;
      if ((d & ~SCR) !== (ref_w[x][5][1] & ~SCR)) begin failures++; $display("MAX x%0d overwrote word 1", x); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
