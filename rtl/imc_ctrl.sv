// imc_ctrl: command sequencer ("Ctrl.") of one IMC bank.
//
// Turns a command into one micro-operation per clock cycle, each a complete
// read / compute / write-back access of the array. Cycle counts follow the
// paper's Table I: logic ops, NOT, SHIFT, COPY, ADD and ADD-SHIFT take 1
// cycle, SUB 2 and N-bit MULT N+2. Sequences (dummy rows D0, D1, D2):
//   SUB  : 1) NOT(row_b)            -> D0
//          2) row_a + D0, carry-in 1 -> dst          (two's complement)
//   MULT : 1) read row_a: multiplier into flip-flops; write 0s -> D0
//          2) COPY(row_b) (multiplicand)           -> D1
//          3) ADD-SHIFT(D0, D1)                     -> D2
//          4..N+1) ADD-SHIFT(D1, D2)               -> D2
//          N+2) ADD(D1, D2)                         -> D2   (product in D2)
// Each ADD-SHIFT / final ADD of MULT is gated by the current multiplier bit
// and shifts the multiplier flip-flops. The zeros of step 1 are the XOR of
// the read row with itself (S output with one word line), so the multiplier
// read and the zero write share one cycle. The order of steps follows the
// paper's Fig. 4 and Sec. 3.2; the row assignment, the zero trick, the
// scratch row D0 for SUB and the handshake are this design's choices.
// Handshake: a command is taken when cmd_valid && cmd_ready; its first
// micro-op is issued in that same cycle. cmd_ready is low while a multi-cycle
// command is in progress. `done` pulses in the cycle of the last micro-op.
module imc_ctrl
  import imc_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic cmd_valid,
  input  cmd_t cmd,
  output logic cmd_ready,
  output uop_t uop,
  output logic done
);

  logic        busy_q;
  cmd_t        cmd_q;
  logic [3:0]  step_q;

  cmd_t        cur;
  logic [3:0]  step;
  logic        active, last;

  function automatic logic [3:0] n_cycles(op_e op, prec_e prec);
    case (op)
      OP_SUB:  return 4'd2;
      OP_MULT: return 4'(prec_bits(prec) + 2);
      default: return 4'd1;
    endcase
  endfunction

  function automatic uop_t gen(cmd_t c, logic [3:0] s);
    uop_t u;
    int   n;
    n            = prec_bits(c.prec);
    u            = '0;
    u.col        = c.col;
    u.seg        = 5'(n);
    u.prec       = c.prec;
    u.rd_row0    = c.row_a;
    u.rd_row1    = c.row_b;
    u.wb_row     = c.dst;
    u.wb_src     = WB_LOGIC;
    u.lout       = LO_C;
    case (c.op)
      OP_READ: begin
        u.rd_en = 1'b1; u.rd_out = 1'b1;
      end
      OP_WRITE: begin
        u.wb_en = 1'b1; u.wb_src = WB_EXT;
      end
      OP_AND, OP_NAND, OP_OR, OP_NOR, OP_XOR, OP_XNOR: begin
        u.rd_en = 1'b1; u.dual = 1'b1; u.wb_en = 1'b1;
        u.use_lsel  = 1'b1;
        u.logic_sel = (c.op == OP_OR)  || (c.op == OP_NOR) || (c.op == OP_XNOR);
        u.lout      = (c.op == OP_XOR) || (c.op == OP_XNOR) ? LO_S :
                      (c.op == OP_NAND) || (c.op == OP_NOR) ? LO_CN : LO_C;
      end
      OP_NOT, OP_COPY: begin
        u.rd_en = 1'b1; u.wb_en = 1'b1; u.use_lsel = 1'b1;
        u.lout  = (c.op == OP_NOT) ? LO_CN : LO_C;
      end
      OP_SHL: begin
        u.rd_en = 1'b1; u.wb_en = 1'b1; u.use_lsel = 1'b1;
        u.wb_src = WB_SHIFT;
      end
      OP_ADD: begin
        u.rd_en = 1'b1; u.dual = 1'b1; u.wb_en = 1'b1; u.wb_src = WB_ADD;
      end
      OP_ADDSHIFT: begin
        u.rd_en = 1'b1; u.dual = 1'b1; u.wb_en = 1'b1; u.wb_src = WB_ADDSHIFT;
      end
      OP_SUB: begin
        u.rd_en = 1'b1; u.wb_en = 1'b1;
        if (s == 4'd0) begin
          u.rd_row0 = c.row_b; u.use_lsel = 1'b1; u.lout = LO_CN;
          u.wb_row  = DROW0;
        end else begin
          u.dual = 1'b1; u.rd_row1 = DROW0; u.cin = 1'b1; u.wb_src = WB_ADD;
        end
      end
      OP_MULT: begin
        u.rd_en = 1'b1; u.wb_en = 1'b1; u.seg = 5'(2 * n);
        u.wb_row = DROW2;
        if (s == 4'd0) begin
          u.mreg_load = 1'b1; u.acc_clr = 1'b1;
          u.use_lsel = 1'b1; u.lout = LO_S; u.wb_row = DROW0;
        end else if (s == 4'd1) begin
          u.rd_row0 = c.row_b; u.use_lsel = 1'b1; u.lout = LO_C;
          u.wb_row  = DROW1;
        end else begin
          u.dual = 1'b1; u.mult = 1'b1; u.mreg_shift = 1'b1;
          u.rd_row0 = DROW1;
          u.rd_row1 = (s == 4'd2) ? DROW0 : DROW2;
          u.wb_src  = (int'(s) == n + 1) ? WB_ADD : WB_ADDSHIFT;
        end
      end
      default: ;
    endcase
    return u;
  endfunction

  always_comb begin
    cur       = busy_q ? cmd_q : cmd;
    step      = busy_q ? step_q : 4'd0;
    active    = busy_q || cmd_valid;
    last      = (step == n_cycles(cur.op, cur.prec) - 4'd1);
    cmd_ready = !busy_q;
    done      = active && last;
    uop       = active ? gen(cur, step) : '0;
  end

  // a dual access always reads, and a multiplication step always shifts
  assert property (@(posedge clk) disable iff (!rst_n) uop.dual |-> uop.rd_en)
    else $error("dual word line without read");
  assert property (@(posedge clk) disable iff (!rst_n) uop.mult |-> uop.mreg_shift && uop.dual)
    else $error("multiplication step without multiplier shift");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      step_q <= '0;
      cmd_q  <= '0;
    end else if (active) begin
      if (last) begin
        busy_q <= 1'b0;
        step_q <= '0;
      end else begin
        busy_q <= 1'b1;
        step_q <= step + 4'd1;
        cmd_q  <= cur;
      end
    end
  end

endmodule
