// tb_pim_ctrl -- self-checking test of the page controller driving one array.
// The controller's column operations go to a 16-row, 128-column pim_xbar.
// Each trial writes random operands into every row (A at column 0, B at 16,
// destination D at 32, filter bit F at 100, scratch at 120), runs one
// instruction with a random length and random choice of immediate or
// attribute operand, then reads every row back and compares D with the
// arithmetic expected for that row, checks that A, B and F are unchanged,
// and checks the number of cycles against the controller's cycle formula.
// Row-wise instructions are checked on every row of the array.
// The aggregation instructions are checked against a stand-in that holds
// agg_busy for a fixed time.
module tb_pim_ctrl;
  import pim_pkg::*;

  localparam int unsigned ROWS = 16;
  localparam int unsigned COLS = 128;
  localparam int unsigned CA = 0, CB = 16, CD = 32, CF = 100, CT = 120;

  logic clk = 1'b0, rst_n = 1'b0;
  logic instr_valid, instr_ready, busy, done;
  pim_instr_t instr;
  logic cop_valid;
  col_op_t cop;
  logic agg_start;
  agg_cfg_t agg_cfg;
  logic agg_busy;
  logic row_en, row_we;
  row_t row_addr;
  logic [COLS-1:0] row_wmask, row_wdata, row_rdata;

  int checks = 0, failures = 0;
  int agg_cnt = 0;
  localparam int AGG_T = 13;

  pim_ctrl dut (.*);
  pim_xbar #(.ROWS(ROWS), .COLS(COLS)) u_xbar (
    .clk, .rst_n, .cop_valid, .cop, .row_en, .row_we, .row_addr, .row_wmask, .row_wdata, .row_rdata);

  always #5 clk = ~clk;

  // stand-in for the aggregation circuits
  always_ff @(posedge clk) begin
    if (agg_start) agg_cnt <= AGG_T;
    else if (agg_cnt > 0) agg_cnt <= agg_cnt - 1;
  end
  assign agg_busy = (agg_cnt > 0);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] va [ROWS], vb [ROWS];
  logic        vf [ROWS];

  function automatic logic [63:0] lmask(int len);
    return (len >= 64) ? '1 : ((64'd1 << len) - 1);
  endfunction

  function automatic int exp_cycles(pim_op_e op, int l, logic imm);
    case (op)
      OP_MUX: return imm ? l : 3 * l;
      OP_EQ, OP_NE: return 1 + 2 * l;
      OP_LT, OP_LE, OP_GT, OP_GE: return 1 + 4 * l;
      OP_ADD: return 1 + 5 * l;
      OP_MUL: return 2 * l + 3 * l * (l + 1);
      default: return l;
    endcase
  endfunction

  function automatic logic [31:0] expect_d(pim_op_e op, int l, logic [15:0] a, logic [15:0] b,
                                           logic f);
    logic [31:0] m;
    m = 32'(lmask(l));
    a = a & 16'(m);
    b = b & 16'(m);
    case (op)
      OP_AND: return (a & b) & m;
      OP_OR:  return (a | b) & m;
      OP_XOR: return (a ^ b) & m;
      OP_NOR: return ~(a | b) & m;
      OP_NOT: return ~a & m;
      OP_EQ:  return 32'(a == b);
      OP_NE:  return 32'(a != b);
      OP_LT:  return 32'(a < b);
      OP_LE:  return 32'(a <= b);
      OP_GT:  return 32'(a > b);
      OP_GE:  return 32'(a >= b);
      OP_ADD: return (32'(a) + 32'(b)) & m;
      OP_MUL: return (32'(a) * 32'(b)) & m;
      OP_MASK:  return f ? 32'(a) : 32'd0;
      OP_MASKN: return f ? 32'(a) : m;
      OP_MUX:   return f ? 32'(b) : 32'(a);
      default: return '0;
    endcase
  endfunction

  task automatic rowport_idle();
    row_en = 1'b0; row_we = 1'b0; row_addr = '0; row_wmask = '0; row_wdata = '0;
  endtask

  task automatic trial(pim_op_e op, int l, logic use_imm);
    logic [15:0] imm;
    int cyc;
    int width;
    imm = 16'($urandom);
    for (int r = 0; r < ROWS; r++) begin
      va[r] = 16'($urandom); vb[r] = 16'($urandom); vf[r] = 1'($urandom);
      if (r == 0) vb[r] = va[r];            // force equal operands once
      @(negedge clk);
      row_en = 1'b1; row_we = 1'b1; row_addr = row_t'(r); row_wmask = '1;
      row_wdata = '0;
      row_wdata[CA +: 16] = va[r];
      row_wdata[CB +: 16] = vb[r];
      row_wdata[CD +: 32] = 32'($urandom);  // old destination contents
      row_wdata[CF] = vf[r];
      row_wdata[CT +: 4] = 4'($urandom);
    end
    @(negedge clk);
    rowport_idle();
    if (use_imm) for (int r = 0; r < ROWS; r++) vb[r] = imm;
    if (use_imm && op == OP_EQ) imm = va[3]; // an equal immediate for one row
    if (use_imm) for (int r = 0; r < ROWS; r++) vb[r] = imm;
    instr = '0;
    instr.op = op; instr.a = col_t'(CA); instr.b = col_t'(CB); instr.d = col_t'(CD);
    instr.f = col_t'(CF); instr.t = col_t'(CT); instr.len = len_t'(l);
    instr.use_imm = use_imm; instr.imm = 64'(imm);
    instr_valid = 1'b1;
    @(posedge clk);
    #1 instr_valid = 1'b0;
    cyc = 0;
    do begin
      @(posedge clk); cyc++;
      #1;
    end while (!done);
    checks++;
    if (cyc != exp_cycles(op, l, use_imm)) begin
      failures++;
      $display("%s len=%0d: %0d cycles, expected %0d", op.name(), l, cyc,
               exp_cycles(op, l, use_imm));
    end
    width = (op inside {OP_EQ, OP_NE, OP_LT, OP_LE, OP_GT, OP_GE}) ? 1 : l;
    for (int r = 0; r < ROWS; r++) begin
      logic [31:0] e, g;
      @(negedge clk);
      row_en = 1'b1; row_we = 1'b0; row_addr = row_t'(r);
      @(negedge clk);
      rowport_idle();
      e = expect_d(op, l, va[r], vb[r], vf[r]) & 32'(lmask(width));
      g = row_rdata[CD +: 32] & 32'(lmask(width));
      checks++;
      if (g !== e) begin
        failures++;
        $display("%s len=%0d imm=%0b row %0d: a=%h b=%h f=%0b got %h expected %h",
                 op.name(), l, use_imm, r, va[r], vb[r], vf[r], g, e);
      end
      checks++;
      if (row_rdata[CA +: 16] !== va[r] || row_rdata[CF] !== vf[r] ||
          (!use_imm && row_rdata[CB +: 16] !== vb[r])) begin
        failures++;
        $display("%s row %0d: source operand overwritten", op.name(), r);
      end
    end
  endtask

  initial begin
    instr_valid = 1'b0; instr = '0;
    rowport_idle();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    for (int o = int'(OP_AND); o <= int'(OP_MUX); o++) begin
      for (int n = 0; n < 4; n++) begin
        int l;
        logic ui;
        l = (n == 0) ? 16 : (n == 1) ? 1 : $urandom_range(2, 15);
        ui = 1'(n);
        if (pim_op_e'(o) inside {OP_NOT, OP_MASK, OP_MASKN}) ui = 1'b0;
        trial(pim_op_e'(o), l, ui);
      end
    end
    // row-wise instructions: one cycle, whole rows
    for (int o = int'(OP_RAND); o <= int'(OP_RNOT); o++) begin
      logic [COLS-1:0] rows [ROWS];
      logic [COLS-1:0] e;
      int ra, rb, rd, cyc;
      for (int r = 0; r < ROWS; r++) begin
        rows[r] = {$urandom, $urandom, $urandom, $urandom};
        @(negedge clk);
        row_en = 1'b1; row_we = 1'b1; row_addr = row_t'(r); row_wmask = '1; row_wdata = rows[r];
      end
      @(negedge clk);
      rowport_idle();
      ra = $urandom_range(0, ROWS - 1); rb = $urandom_range(0, ROWS - 1);
      rd = $urandom_range(0, ROWS - 1);
      case (pim_op_e'(o))
        OP_RAND: e = rows[ra] & rows[rb];
        OP_ROR:  e = rows[ra] | rows[rb];
        OP_RXOR: e = rows[ra] ^ rows[rb];
        OP_RNOR: e = ~(rows[ra] | rows[rb]);
        default: e = ~rows[ra];
      endcase
      instr = '0; instr.op = pim_op_e'(o); instr.ra = row_t'(ra); instr.rb = row_t'(rb);
      instr.drow = row_t'(rd);
      instr_valid = 1'b1;
      @(posedge clk);
      #1 instr_valid = 1'b0;
      cyc = 0;
      do begin @(posedge clk); cyc++; #1; end while (!done);
      checks++;
      if (cyc != 1) begin failures++; $display("row op: %0d cycles", cyc); end
      rows[rd] = e;
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        row_en = 1'b1; row_we = 1'b0; row_addr = row_t'(r);
        @(negedge clk);
        rowport_idle();
        checks++;
        if (row_rdata !== rows[r]) begin
          failures++;
          $display("%s ra=%0d rb=%0d rd=%0d: row %0d wrong", pim_op_e'(o), ra, rb, rd, r);
        end
      end
    end
    // aggregation instructions wait for the aggregation circuits
    begin
      int cyc;
      @(negedge clk);
      instr = '0; instr.op = OP_AGG_MAX; instr.a = col_t'(5); instr.len = len_t'(9);
      instr.d = col_t'(64); instr.drow = row_t'(3);
      instr_valid = 1'b1;
      @(posedge clk);
      #1 instr_valid = 1'b0;
      cyc = 0;
      do begin @(posedge clk); cyc++; #1; end while (!done);
      checks++;
      if (cyc != AGG_T + 2) begin
        failures++;
        $display("AGG: %0d cycles, expected %0d", cyc, AGG_T + 2);
      end
      checks++;
      if (agg_cfg.kind != AGG_MAX || agg_cfg.a != 5 || agg_cfg.len != 9 || agg_cfg.drow != 3 ||
          agg_cfg.d != 64) begin
        failures++;
        $display("AGG: wrong configuration passed on");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
