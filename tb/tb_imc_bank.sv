// tb_imc_bank: end-to-end self-check of one IMC macro at its full size
// (128 x 128, 3 dummy rows, 32 Y-paths).
// Loads random words into the main array through the write port (random
// interleave column), runs every command at 2-, 4- and 8-bit precision,
// reads the destination back through the read port and compares it with the
// integer reference model; checks the cycle count of every command
// (Table I), that the other three interleaved columns of the destination row
// were not disturbed, and that the bitline separator opened for dummy-only
// cycles and closed otherwise.
module tb_imc_bank;
  import imc_pkg::*;
  import imc_ref_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, done, rvalid, sep_open;
  cmd_t cmd;
  logic [NY-1:0] rdata;
  logic [NY-1:0] model [ROWS + DROWS][MUX];
  int checks = 0, failures = 0;
  int n_sep_open = 0, n_sep_closed = 0;

  imc_bank dut (.clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .done, .rdata, .rvalid, .sep_open);

  always #5 clk = ~clk;

  always @(posedge clk) if (dut.uop.rd_en || dut.uop.wb_en) begin
    if (sep_open) n_sep_open++; else n_sep_closed++;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // issue one command, return cycles from acceptance to done (inclusive)
  task automatic run(cmd_t c, output int cyc);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    cyc = 0;
    forever begin
      #1;
      cyc++;
      if (done) break;
      @(negedge clk);
      cmd_valid = 0;
    end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic wr(logic [ROW_AW-1:0] row, logic [1:0] col, logic [NY-1:0] d);
    cmd_t c; int cyc;
    c = '0; c.op = OP_WRITE; c.dst = row; c.col = col; c.wdata = d;
    run(c, cyc);
    model[row][col] = d;
  endtask

  task automatic rd_check(logic [ROW_AW-1:0] row, logic [1:0] col, string what);
    cmd_t c; int cyc;
    c = '0; c.op = OP_READ; c.row_a = row; c.col = col;
    run(c, cyc);
    chk(rvalid, {what, " rvalid"});
    checks++;
    if (rdata !== model[row][col]) begin
      failures++;
      if (failures < 20) $display("FAIL %s row=%0d col=%0d got %h exp %h", what, row, col, rdata, model[row][col]);
    end
  endtask

  initial begin
    op_e ops[15];
    cmd = '0;
    for (int o = 0; o < 15; o++) ops[o] = op_e'(o);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // the dummy rows start unknown: define them
    for (int d = 0; d < DROWS; d++) for (int cc = 0; cc < MUX; cc++) wr(ROW_AW'(ROWS + d), 2'(cc), '0);
    for (int r = 0; r < 20; r++) for (int cc = 0; cc < MUX; cc++) wr(ROW_AW'(r), 2'(cc), $urandom);
    for (int rep = 0; rep < 3; rep++) begin
      for (int o = 2; o <= int'(OP_MULT); o++) begin
        for (int p = 0; p < 3; p++) begin
          cmd_t c; int cyc; logic [1:0] col; logic [ROW_AW-1:0] dst;
          logic [NY-1:0] a, b;
          c = '0; c.op = ops[o]; c.prec = prec_e'(p);
          col = 2'($urandom);
          c.col = col;
          c.row_a = ROW_AW'($urandom_range(0, 9));
          c.row_b = ROW_AW'($urandom_range(10, 19));
          // dst: main row, or dummy row D1 for single-cycle ops (separator open)
          dst = (rep == 2 && c.op != OP_SUB && c.op != OP_MULT) ? DROW1 : ROW_AW'($urandom_range(20, 40));
          c.dst = dst;
          if (c.op == OP_MULT) begin
            wr(c.row_a, col, mult_operand(c.prec, $urandom));
            wr(c.row_b, col, mult_operand(c.prec, $urandom));
          end
          a = model[c.row_a][col]; b = model[c.row_b][col];
          // dummy-only operation: stage operands in dummy rows
          if (dst == DROW1) begin
            wr(DROW0, col, a); wr(DROW2, col, b);
            c.row_a = DROW0; c.row_b = DROW2;
          end
          run(c, cyc);
          chk(cyc == op_cycles(c.op, c.prec), $sformatf("%s cycles %0d", c.op.name(), cyc));
          if (c.op == OP_SUB) model[DROW0][col] = ~b;
          if (c.op == OP_MULT) begin
            model[DROW0][col] = '0; model[DROW1][col] = b;
            model[DROW2][col] = ref_op(c.op, c.prec, a, b);
            rd_check(DROW2, col, $sformatf("MULT p%0d", prec_bits(c.prec)));
          end else begin
            model[dst][col] = ref_op(c.op, c.prec, a, b);
            rd_check(dst, col, $sformatf("%s p%0d", c.op.name(), prec_bits(c.prec)));
          end
          // the other interleaved columns of that row are untouched
          for (int cc = 0; cc < MUX; cc++)
            if (2'(cc) != col && (int'(dst) < 20 || int'(dst) >= ROWS)) rd_check(c.op == OP_MULT ? DROW2 : dst, 2'(cc), "neighbour column");
        end
      end
    end
    chk(n_sep_open > 0, "separator opened");
    chk(n_sep_closed > 0, "separator closed");
    $display("separator open cycles %0d, closed cycles %0d", n_sep_open, n_sep_closed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
