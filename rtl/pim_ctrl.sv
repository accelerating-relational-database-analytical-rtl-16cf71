// pim_ctrl -- page controller: turns one PIM instruction into column operations.
//
// The host sends a PIM instruction to a page; the controller executes it by
// issuing a sequence of column-wise primitives (see pim_xbar), one per cycle,
// that is broadcast to every cell array of the page, so every record of the
// page is processed at once. The text gives the instruction classes (compare,
// logic, arithmetic; attribute with attribute or with immediate; any attribute
// length), bitwise operations between whole rows, the mask that nullifies
// unselected records before an aggregation, and the MUX used to UPDATE
// records; how each is composed of bitwise steps is
// this design's own (bit-serial, LSB first), as are the scratch columns:
//   T = t, G = t+1, C = t+2, P = t+3 must be free columns.
// Cycle count after an instruction is accepted (L = len):
//   AND OR XOR NOR NOT MASK MASKN, MUX with imm : L
//   MUX (attribute)                              : 3L
//   EQ NE                                        : 1 + 2L
//   LT LE GT GE                                  : 1 + 4L
//   ADD                                          : 1 + 5L
//   MUL                                          : L + L + 6*L(L+1)/2
//   AGG_SUM AGG_MIN AGG_MAX                      : 1 + time of the aggregation circuits
//   RAND ROR RXOR RNOR RNOT (row-wise, whole row) : 1
// `done` pulses in the cycle after the last primitive has been written; the
// controller accepts a new instruction in that same cycle. Comparisons are
// unsigned and write one bit, column d. The aggregation instructions are
// passed to the per-array aggregation circuits (pim_agg) and the controller
// waits until none of them is busy.
module pim_ctrl
  import pim_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // instruction in
  input  logic       instr_valid,
  output logic       instr_ready,
  input  pim_instr_t instr,
  output logic       busy,
  output logic       done,
  // broadcast to the page's cell arrays
  output logic       cop_valid,
  output col_op_t    cop,
  // aggregation circuits of the page
  output logic       agg_start,
  output agg_cfg_t   agg_cfg,
  input  logic       agg_busy
);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_LOOP, S_AGG, S_AGGW} state_e;

  state_e     state;
  pim_instr_t ins;
  len_t       k, i, j;
  logic [2:0] s;

  // per-instruction shape of the micro-sequence
  len_t       n_init;
  logic [2:0] s_last;
  len_t       j_last, i_last;

  always_comb begin
    n_init  = '0;
    s_last  = 3'd0;
    i_last  = '0;
    j_last  = ins.len - 1'b1;
    unique case (ins.op)
      OP_EQ, OP_NE:                 begin n_init = 7'd1; s_last = 3'd1; end
      OP_LT, OP_LE, OP_GT, OP_GE:   begin n_init = 7'd1; s_last = 3'd3; end
      OP_ADD:                       begin n_init = 7'd1; s_last = 3'd4; end
      OP_MUL: begin
        n_init  = ins.len;
        s_last  = 3'd6;
        i_last  = ins.len - 1'b1;
        j_last  = ins.len - 1'b1 - i;
      end
      OP_MUX:                       s_last = ins.use_imm ? 3'd0 : 3'd2;
      OP_RAND, OP_ROR, OP_RXOR, OP_RNOR, OP_RNOT: j_last = '0;
      default: ;
    endcase
  end

  function automatic col_op_t mk(tt_t tt, col_t ca, col_t cb, logic use_k, logic kv, col_t cd);
    mk = '{tt: tt, ca: ca, cb: cb, use_k: use_k, k: kv, cd: cd, rowwise: 1'b0,
           ra: '0, rb: '0, rd: '0};
  endfunction

  function automatic col_op_t mkrow(tt_t tt, row_t ra, row_t rb, row_t rd);
    mkrow = '{tt: tt, ca: '0, cb: '0, use_k: 1'b0, k: 1'b0, cd: '0, rowwise: 1'b1,
              ra: ra, rb: rb, rd: rd};
  endfunction

  // the primitive for the current (k | i, j, s)
  always_comb begin
    col_t cT, cG, cC, cP, aj, bj, dj, bi, dp;
    logic kj, ki, ui;
    cT = ins.t;
    cG = ins.t + col_t'(1);
    cC = ins.t + col_t'(2);
    cP = ins.t + col_t'(3);
    aj = ins.a + col_t'(j);
    bj = ins.b + col_t'(j);
    dj = ins.d + col_t'(j);
    bi = ins.b + col_t'(i);
    dp = ins.d + col_t'(i) + col_t'(j);
    kj = ins.imm[j[5:0]];
    ki = ins.imm[i[5:0]];
    ui = ins.use_imm;
    cop = mk(TT_SET0, '0, '0, 1'b0, 1'b0, ins.d);
    if (state == S_INIT) begin
      unique case (ins.op)
        OP_EQ, OP_LE, OP_GE: cop = mk(TT_SET1, '0, '0, 1'b0, 1'b0, ins.d);
        OP_ADD:              cop = mk(TT_SET0, '0, '0, 1'b0, 1'b0, cC);
        OP_MUL:              cop = mk(TT_SET0, '0, '0, 1'b0, 1'b0, ins.d + col_t'(k));
        default:             cop = mk(TT_SET0, '0, '0, 1'b0, 1'b0, ins.d);  // NE LT GT
      endcase
    end else begin
      unique case (ins.op)
        OP_AND:   cop = mk(TT_AND,  aj, bj, ui, kj, dj);
        OP_OR:    cop = mk(TT_OR,   aj, bj, ui, kj, dj);
        OP_XOR:   cop = mk(TT_XOR,  aj, bj, ui, kj, dj);
        OP_NOR:   cop = mk(TT_NOR,  aj, bj, ui, kj, dj);
        OP_NOT:   cop = mk(TT_NOTX, aj, aj, 1'b0, 1'b0, dj);
        OP_MASK:  cop = mk(TT_AND,   aj, ins.f, 1'b0, 1'b0, dj);
        OP_MASKN: cop = mk(TT_X_ONY, aj, ins.f, 1'b0, 1'b0, dj);
        OP_MUX:
          if (ui) cop = mk(kj ? TT_OR : TT_X_NY, aj, ins.f, 1'b0, 1'b0, dj);
          else unique case (s)
            3'd0:    cop = mk(TT_AND,  bj, ins.f, 1'b0, 1'b0, cT);
            3'd1:    cop = mk(TT_X_NY, aj, ins.f, 1'b0, 1'b0, cG);
            default: cop = mk(TT_OR,   cT, cG,    1'b0, 1'b0, dj);
          endcase
        OP_EQ, OP_NE: unique case (s)
          3'd0:    cop = mk((ins.op == OP_EQ) ? TT_XNOR : TT_XOR, aj, bj, ui, kj, cT);
          default: cop = mk((ins.op == OP_EQ) ? TT_AND  : TT_OR,  ins.d, cT, 1'b0, 1'b0, ins.d);
        endcase
        OP_LT, OP_LE, OP_GT, OP_GE: unique case (s)
          3'd0:    cop = mk(TT_XNOR, aj, bj, ui, kj, cT);
          3'd1:    cop = mk(TT_AND,  cT, ins.d, 1'b0, 1'b0, cT);
          3'd2:    cop = mk((ins.op == OP_LT || ins.op == OP_LE) ? TT_NX_Y : TT_X_NY,
                            aj, bj, ui, kj, cG);
          default: cop = mk(TT_OR,   cT, cG, 1'b0, 1'b0, ins.d);
        endcase
        OP_ADD: unique case (s)
          3'd0:    cop = mk(TT_XOR, aj, bj, ui, kj, cT);
          3'd1:    cop = mk(TT_AND, aj, bj, ui, kj, cG);
          3'd2:    cop = mk(TT_XOR, cT, cC, 1'b0, 1'b0, dj);
          3'd3:    cop = mk(TT_AND, cT, cC, 1'b0, 1'b0, cT);
          default: cop = mk(TT_OR,  cG, cT, 1'b0, 1'b0, cC);
        endcase
        OP_MUL: unique case (s)
          3'd0:    cop = mk(TT_SET0, '0, '0, 1'b0, 1'b0, cC);
          3'd1:    cop = mk(TT_AND, aj, bi, ui, ki, cP);
          3'd2:    cop = mk(TT_XOR, dp, cP, 1'b0, 1'b0, cT);
          3'd3:    cop = mk(TT_AND, dp, cP, 1'b0, 1'b0, cG);
          3'd4:    cop = mk(TT_XOR, cT, cC, 1'b0, 1'b0, dp);
          3'd5:    cop = mk(TT_AND, cT, cC, 1'b0, 1'b0, cT);
          default: cop = mk(TT_OR,  cG, cT, 1'b0, 1'b0, cC);
        endcase
        OP_RAND:  cop = mkrow(TT_AND,  ins.ra, ins.rb, ins.drow);
        OP_ROR:   cop = mkrow(TT_OR,   ins.ra, ins.rb, ins.drow);
        OP_RXOR:  cop = mkrow(TT_XOR,  ins.ra, ins.rb, ins.drow);
        OP_RNOR:  cop = mkrow(TT_NOR,  ins.ra, ins.rb, ins.drow);
        OP_RNOT:  cop = mkrow(TT_NOTX, ins.ra, ins.ra, ins.drow);
        default: ;
      endcase
    end
  end

  assign cop_valid   = (state == S_INIT) || (state == S_LOOP);
  assign instr_ready = (state == S_IDLE);
  assign busy        = (state != S_IDLE);
  assign agg_start   = (state == S_AGG);

  always_comb begin
    agg_cfg.a    = ins.a;
    agg_cfg.len  = ins.len;
    agg_cfg.drow = ins.drow;
    agg_cfg.d    = ins.d;
    unique case (ins.op)
      OP_AGG_MIN: agg_cfg.kind = AGG_MIN;
      OP_AGG_MAX: agg_cfg.kind = AGG_MAX;
      default:    agg_cfg.kind = AGG_SUM;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ins   <= '0;
      k     <= '0;
      i     <= '0;
      j     <= '0;
      s     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (instr_valid) begin
          ins <= instr;
          k   <= '0;
          i   <= '0;
          j   <= '0;
          s   <= '0;
          if (instr.op inside {OP_AGG_SUM, OP_AGG_MIN, OP_AGG_MAX}) state <= S_AGG;
          else if (instr.op inside {OP_EQ, OP_NE, OP_LT, OP_LE, OP_GT, OP_GE, OP_ADD, OP_MUL})
            state <= S_INIT;
          else state <= S_LOOP;
        end
        S_INIT: begin
          if (k == n_init - 1'b1) begin
            state <= S_LOOP;
            k     <= '0;
          end else k <= k + 1'b1;
        end
        S_LOOP: begin
          if (s != s_last) s <= s + 3'd1;
          else if (j != j_last) begin
            j <= j + 1'b1;
            s <= (ins.op == OP_MUL) ? 3'd1 : 3'd0;
          end else if (i != i_last) begin
            i <= i + 1'b1;
            j <= '0;
            s <= 3'd0;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_AGG:  state <= S_AGGW;
        S_AGGW: if (!agg_busy) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_len_ok: assert property (@(posedge clk) disable iff (!rst_n)
    (instr_valid && instr_ready && !(instr.op inside {OP_RAND, OP_ROR, OP_RXOR, OP_RNOR, OP_RNOT}))
      |-> (instr.len >= 1 && instr.len <= 64))
    else $error("pim_ctrl: attribute length out of range");

endmodule
