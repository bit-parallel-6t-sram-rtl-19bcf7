// tb_imc_top: end-to-end self-check of the whole memory at its default size
// (4 banks of 128 x 128, no parameter overrides).
// Every bank gets its own random data; every command is then broadcast to all
// four banks at 2-, 4- and 8-bit precision and the results of all banks are
// read back and compared with the integer reference model. It also checks the
// cycle count of each command, holds a command against a busy memory (stall),
// and measures the cycles per 8-bit ADD / SUB / MULT element over the four
// banks (expected 1/16, 2/16 and 10/8). Counted mechanisms, each of which
// must occur: precision switches, multiplication steps with multiplier bit 1
// and with bit 0, bitline separator open and closed, stall, SUB carry-in,
// shift and add-and-shift write-backs, all-bank parallel execution.
module tb_imc_top;
  import imc_pkg::*;
  import imc_ref_pkg::*;
  localparam int NB = 4;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready;
  logic [NB-1:0] bank_mask, done, rvalid, sep_open;
  logic [NB-1:0][NY-1:0] rdata;
  cmd_t cmd;
  logic [NY-1:0] model [NB][ROWS + DROWS][MUX];
  int checks = 0, failures = 0;
  int n_prec_switch = 0, n_mbit1 = 0, n_mbit0 = 0, n_sep_open = 0, n_sep_closed = 0;
  int n_stall = 0, n_sub_cin = 0, n_shift = 0, n_addshift = 0, n_parallel = 0;
  prec_e last_prec = PREC8;

  imc_top dut (.clk, .rst_n, .cmd_valid, .bank_mask, .cmd, .cmd_ready, .done, .rdata, .rvalid, .sep_open);

  always #5 clk = ~clk;

  // mechanism monitors (bank 0 is representative; all banks run in lock-step)
  always @(posedge clk) begin
    if (dut.g_bank[0].u_bank.uop.rd_en || dut.g_bank[0].u_bank.uop.wb_en) begin
      if (sep_open[0]) n_sep_open++; else n_sep_closed++;
    end
    if (dut.g_bank[0].u_bank.uop.mult) begin
      if (dut.g_bank[0].u_bank.mbit[0]) n_mbit1++; else n_mbit0++;
    end
    if (dut.g_bank[0].u_bank.uop.wb_en && dut.g_bank[0].u_bank.uop.cin) n_sub_cin++;
    if (dut.g_bank[0].u_bank.uop.wb_en && dut.g_bank[0].u_bank.uop.wb_src == WB_SHIFT) n_shift++;
    if (dut.g_bank[0].u_bank.uop.wb_en && dut.g_bank[0].u_bank.uop.wb_src == WB_ADDSHIFT) n_addshift++;
    if (cmd_valid && !cmd_ready) n_stall++;
    if (cmd_valid && cmd_ready && bank_mask == '1) n_parallel++;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // present a command until taken; if wait_done, return cycles to done
  task automatic send(cmd_t c, logic [NB-1:0] mask, bit wait_done, output int cyc);
    int fb;
    fb = 0;
    for (int b = NB - 1; b >= 0; b--) if (mask[b]) fb = b;
    @(negedge clk);
    cmd = c; bank_mask = mask; cmd_valid = 1;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    cyc = 1;
    if (wait_done) begin
      while (!done[fb]) begin @(negedge clk); cmd_valid = 0; #1; cyc++; end
    end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic wr(int b, logic [ROW_AW-1:0] row, logic [1:0] col, logic [NY-1:0] d);
    cmd_t c; int cyc;
    c = '0; c.op = OP_WRITE; c.dst = row; c.col = col; c.wdata = d;
    send(c, NB'(1) << b, 1, cyc);
    model[b][row][col] = d;
  endtask

  task automatic rd_check_all(logic [ROW_AW-1:0] row, logic [1:0] col, string what);
    cmd_t c; int cyc;
    c = '0; c.op = OP_READ; c.row_a = row; c.col = col;
    send(c, '1, 1, cyc);
    for (int b = 0; b < NB; b++) begin
      checks++;
      if (!rvalid[b] || rdata[b] !== model[b][row][col]) begin
        failures++;
        if (failures < 20) $display("FAIL %s bank=%0d row=%0d got %h exp %h", what, b, row, rdata[b], model[b][row][col]);
      end
    end
  endtask

  // broadcast one command, update the model of every bank, check the result
  task automatic exec_check(op_e op, prec_e p, logic [1:0] col, logic [ROW_AW-1:0] ra,
                            logic [ROW_AW-1:0] rb, logic [ROW_AW-1:0] dst, output int cyc);
    cmd_t c;
    c = '0; c.op = op; c.prec = p; c.col = col; c.row_a = ra; c.row_b = rb; c.dst = dst;
    if ((op == OP_ADD || op == OP_MULT) && p != last_prec) n_prec_switch++;
    if (op == OP_ADD || op == OP_MULT) last_prec = p;
    send(c, '1, 1, cyc);
    chk(cyc == op_cycles(op, p), $sformatf("%s p%0d cycles %0d", op.name(), prec_bits(p), cyc));
    for (int b = 0; b < NB; b++) begin
      logic [NY-1:0] a, bb;
      a = model[b][ra][col]; bb = model[b][rb][col];
      if (op == OP_SUB) model[b][DROW0][col] = ~bb;
      if (op == OP_MULT) begin
        model[b][DROW0][col] = '0; model[b][DROW1][col] = bb;
        model[b][DROW2][col] = ref_op(op, p, a, bb);
      end else model[b][dst][col] = ref_op(op, p, a, bb);
    end
    rd_check_all(op == OP_MULT ? DROW2 : dst, col, $sformatf("%s p%0d", op.name(), prec_bits(p)));
  endtask

  initial begin
    static op_e ops[13] = '{OP_AND, OP_NAND, OP_OR, OP_NOR, OP_XOR, OP_XNOR, OP_NOT,
                     OP_COPY, OP_SHL, OP_ADD, OP_ADDSHIFT, OP_SUB, OP_MULT};
    int cyc;
    cmd = '0; bank_mask = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int cc = 0; cc < MUX; cc++) begin
        for (int d = 0; d < DROWS; d++) wr(b, ROW_AW'(ROWS + d), 2'(cc), '0);
        for (int r = 0; r < 8; r++) wr(b, ROW_AW'(r), 2'(cc), $urandom);
      end

    // every command, every precision, all banks
    for (int p = 0; p < 3; p++) begin
      for (int o = 0; o < 13; o++) begin
        logic [1:0] col;
        col = 2'($urandom);
        if (ops[o] == OP_MULT)
          for (int b = 0; b < NB; b++) begin
            wr(b, 8'd6, col, mult_operand(prec_e'(p), $urandom));
            wr(b, 8'd7, col, mult_operand(prec_e'(p), $urandom));
          end
        exec_check(ops[o], prec_e'(p), col, ops[o] == OP_MULT ? 8'd6 : ROW_AW'($urandom_range(0, 3)),
                   ops[o] == OP_MULT ? 8'd7 : ROW_AW'($urandom_range(4, 7)),
                   ROW_AW'($urandom_range(64, 127)), cyc);
      end
    end

    // throughput of 8-bit arithmetic over all banks (cycles per element)
    begin
      real cpe_add, cpe_sub, cpe_mult;
      exec_check(OP_ADD, PREC8, 2'd1, 8'd0, 8'd4, 8'd90, cyc);
      cpe_add = real'(cyc) / (NB * NY / 8);
      exec_check(OP_SUB, PREC8, 2'd1, 8'd1, 8'd5, 8'd91, cyc);
      cpe_sub = real'(cyc) / (NB * NY / 8);
      for (int b = 0; b < NB; b++) begin
        wr(b, 8'd6, 2'd1, mult_operand(PREC8, $urandom));
        wr(b, 8'd7, 2'd1, mult_operand(PREC8, $urandom));
      end
      exec_check(OP_MULT, PREC8, 2'd1, 8'd6, 8'd7, 8'd0, cyc);
      cpe_mult = real'(cyc) / (NB * NY / 16);
      $display("8-bit cycles per element: ADD %0.4f SUB %0.4f MULT %0.4f", cpe_add, cpe_sub, cpe_mult);
      chk(cpe_add == 0.0625 && cpe_sub == 0.125 && cpe_mult == 1.25, "8-bit throughput");
    end

    // stall: a READ presented while a MULT is in progress waits for it
    begin
      cmd_t c;
      c = '0; c.op = OP_MULT; c.prec = PREC4; c.row_a = 8'd6; c.row_b = 8'd7; c.col = 2'd1;
      for (int b = 0; b < NB; b++) begin
        wr(b, 8'd6, 2'd1, mult_operand(PREC4, $urandom));
        wr(b, 8'd7, 2'd1, mult_operand(PREC4, $urandom));
      end
      send(c, '1, 0, cyc);
      for (int b = 0; b < NB; b++) begin
        model[b][DROW2][1] = ref_op(OP_MULT, PREC4, model[b][6][1], model[b][7][1]);
        model[b][DROW0][1] = '0; model[b][DROW1][1] = model[b][7][1];
      end
      rd_check_all(DROW2, 2'd1, "MULT then READ under stall");
    end

    $display("mechanisms: prec_switch=%0d mbit1=%0d mbit0=%0d sep_open=%0d sep_closed=%0d stall=%0d sub_cin=%0d shift=%0d addshift=%0d parallel=%0d",
             n_prec_switch, n_mbit1, n_mbit0, n_sep_open, n_sep_closed, n_stall, n_sub_cin, n_shift, n_addshift, n_parallel);
    chk(n_prec_switch > 0, "precision switch happened");
    chk(n_mbit1 > 0, "mult step with bit 1");
    chk(n_mbit0 > 0, "mult step with bit 0");
    chk(n_sep_open > 0, "separator open");
    chk(n_sep_closed > 0, "separator closed");
    chk(n_stall > 0, "stall");
    chk(n_sub_cin > 0, "SUB carry-in");
    chk(n_shift > 0, "shift");
    chk(n_addshift > 0, "add-and-shift");
    chk(n_parallel > 0, "all-bank parallel");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
