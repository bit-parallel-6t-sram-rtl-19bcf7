// tb_imc_ctrl: self-check of the command sequencer.
// Issues every command at every precision and checks the number of cycles
// from acceptance to `done` (Table I: 1, SUB 2, MULT N+2), cmd_ready, and the
// key fields of each micro-op: word lines, write-back row and source, carry
// segment, carry-in and the multiplier controls.
module tb_imc_ctrl;
  import imc_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, done;
  cmd_t cmd;
  uop_t uop;
  int checks = 0, failures = 0;

  imc_ctrl dut (.clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .uop, .done);

  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (op=%s step)", what, cmd.op.name());
    end
  endtask

  initial begin
    int n, exp_cyc, cyc;
    cmd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int o = 0; o <= int'(OP_MULT); o++) begin
      for (int p = 0; p < 3; p++) begin
        @(negedge clk);
        cmd = '0;
        cmd.op = op_e'(o); cmd.prec = prec_e'(p);
        cmd.row_a = 8'd5; cmd.row_b = 8'd9; cmd.dst = 8'd17; cmd.col = 2'(o);
        n = prec_bits(cmd.prec);
        exp_cyc = cmd.op == OP_SUB ? 2 : cmd.op == OP_MULT ? n + 2 : 1;
        chk(cmd_ready, "ready when idle");
        cmd_valid = 1;
        cyc = 0;
        forever begin
          #1;
          chk(uop.col == cmd.col, "col");
          case (cmd.op)
            OP_READ:  chk(uop.rd_en && !uop.dual && !uop.wb_en && uop.rd_out && uop.rd_row0 == 5, "read");
            OP_WRITE: chk(!uop.rd_en && uop.wb_en && uop.wb_src == WB_EXT && uop.wb_row == 17, "write");
            OP_ADD:   chk(uop.dual && uop.wb_src == WB_ADD && !uop.cin && uop.seg == 5'(n) && uop.wb_row == 17, "add");
            OP_AND:   chk(uop.dual && uop.wb_src == WB_LOGIC && uop.use_lsel && !uop.logic_sel && uop.lout == LO_C, "and");
            OP_NOR:   chk(uop.dual && uop.use_lsel && uop.logic_sel && uop.lout == LO_CN, "nor");
            OP_XNOR:  chk(uop.dual && uop.use_lsel && uop.logic_sel && uop.lout == LO_S, "xnor");
            OP_SHL:   chk(!uop.dual && uop.wb_src == WB_SHIFT && uop.use_lsel && !uop.logic_sel, "shl");
            OP_SUB:
              if (cyc == 0) chk(!uop.dual && uop.rd_row0 == 9 && uop.lout == LO_CN && uop.wb_row == DROW0, "sub not");
              else chk(uop.dual && uop.rd_row0 == 5 && uop.rd_row1 == DROW0 && uop.cin && uop.wb_src == WB_ADD && uop.wb_row == 17, "sub add");
            OP_MULT: begin
              chk(uop.seg == 5'(2 * n) && uop.prec == cmd.prec, "mult seg");
              if (cyc == 0) chk(uop.mreg_load && uop.acc_clr && uop.rd_row0 == 5 && uop.lout == LO_S && uop.wb_row == DROW0, "mult init");
              else if (cyc == 1) chk(uop.rd_row0 == 9 && uop.wb_row == DROW1 && !uop.dual, "mult copy");
              else chk(uop.dual && uop.mult && uop.mreg_shift && uop.wb_row == DROW2 &&
                       uop.wb_src == (cyc == n + 1 ? WB_ADD : WB_ADDSHIFT) &&
                       uop.rd_row1 == (cyc == 2 ? DROW0 : DROW2), "mult step");
            end
            default: ;
          endcase
          chk(done == (cyc == exp_cyc - 1), "done timing");
          chk(cmd_ready == (cyc == 0), "ready during op");
          @(negedge clk);
          cmd_valid = 0;
          cyc++;
          if (cyc == exp_cyc) break;
        end
        #1;
        chk(!done && cmd_ready && uop.rd_en == 0 && uop.wb_en == 0, "idle after op");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
