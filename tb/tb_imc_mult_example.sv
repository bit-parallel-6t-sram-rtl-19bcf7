// tb_imc_mult_example: the worked 4-bit example of left-shift multiplication,
// 1010 x 1011, run on one full-size bank.
// The multiplier 1011 and the multiplicand 1010 are written (zero-extended to
// 8-bit fields) into main rows 0 and 1; MULT at 4-bit precision must take
// N+2 = 6 cycles, and the accumulator row (dummy row 2) must step through
// 010100, 0101000, 1100100 after the three add-and-shift steps and hold
// 01101110 (= 110) after the final ADD. Every other product field of the word
// multiplies different operands and is checked too.
module tb_imc_mult_example;
  import imc_pkg::*;
  import imc_ref_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, done, rvalid, sep_open;
  cmd_t cmd;
  logic [NY-1:0] rdata;
  int checks = 0, failures = 0;

  imc_bank dut (.clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .done, .rdata, .rvalid, .sep_open);

  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // word at interleave column 0 of dummy row 2 (bit j is physical column 4j)
  function automatic logic [7:0] acc_word();
    logic [7:0] v;
    for (int j = 0; j < 8; j++) v[j] = dut.u_dummy.mem[2][j * MUX];
    return v;
  endfunction

  task automatic one(cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  initial begin
    cmd_t c;
    logic [NY-1:0] b_word, a_word, acc;
    int cyc;
    static logic [7:0] exp_acc [4] = '{8'b0010100, 8'b0101000, 8'b1100100, 8'b01101110};
    cmd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // field 0: the example; fields 1..3: 15 x 15, 0 x 9, 7 x 12
    b_word = {8'd12, 8'd0, 8'd15, 8'b1011};
    a_word = {8'd7,  8'd9, 8'd15, 8'b1010};
    c = '0; c.op = OP_WRITE; c.dst = 8'd0; c.wdata = b_word; one(c);
    c.dst = 8'd1; c.wdata = a_word; one(c);
    c = '0; c.op = OP_MULT; c.prec = PREC4; c.row_a = 8'd0; c.row_b = 8'd1;
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    cyc = 0;
    forever begin
      #1;
      cyc++;
      if (done) break;
      @(negedge clk);
      cmd_valid = 0;
      // after cycles 3, 4, 5 the add-and-shift results are in dummy row 2
      if (cyc >= 3) chk(acc_word() == exp_acc[cyc - 3],
                        $sformatf("accumulator after step %0d: %b", cyc - 3, acc_word()));
    end
    @(negedge clk);
    cmd_valid = 0;
    chk(cyc == 6, $sformatf("MULT 4-bit cycles %0d", cyc));
    c = '0; c.op = OP_READ; c.row_a = DROW2; one(c);
    chk(rvalid && rdata[7:0] == 8'b01101110, $sformatf("1010 x 1011 = %b", rdata[7:0]));
    chk(rdata == ref_op(OP_MULT, PREC4, b_word, a_word), "all four products");
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
