// fig9_runner: testbench helper (not a design block). Builds an imc_top with
// NB banks, fills every bank with random 8-bit data, runs one 8-bit ADD, SUB
// and MULT on all banks together, checks every bank's result against the
// integer reference model and reports the cycles per element of each
// operation. With 32 Y-paths per bank, a bank holds 4 8-bit elements or 2
// 16-bit products per word, so the expected values are 1/(4 NB), 2/(4 NB)
// and 10/(2 NB) cycles per element.
module fig9_runner
  import imc_pkg::*;
  import imc_ref_pkg::*;
#(
  parameter int NB = 4
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready;
  logic [NB-1:0] bank_mask, done, rvalid, sep_open;
  logic [NB-1:0][NY-1:0] rdata;
  cmd_t cmd;
  logic [NY-1:0] a_w [NB], b_w [NB], m_w [NB], n_w [NB];

  imc_top #(.NBANKS(NB)) dut (.clk, .rst_n, .cmd_valid, .bank_mask, .cmd, .cmd_ready,
                              .done, .rdata, .rvalid, .sep_open);

  always #5 clk = ~clk;

  task automatic send(cmd_t c, logic [NB-1:0] mask, output int cyc);
    @(negedge clk);
    cmd = c; bank_mask = mask; cmd_valid = 1;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    cyc = 1;
    while (!(|(done & mask))) begin @(negedge clk); cmd_valid = 0; #1; cyc++; end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic wr(int b, logic [ROW_AW-1:0] row, logic [NY-1:0] d);
    cmd_t c; int cyc;
    c = '0; c.op = OP_WRITE; c.dst = row; c.wdata = d;
    send(c, NB'(1) << b, cyc);
  endtask

  task automatic check_row(logic [ROW_AW-1:0] row, op_e op, string what);
    cmd_t c; int cyc;
    c = '0; c.op = OP_READ; c.row_a = row;
    send(c, '1, cyc);
    for (int b = 0; b < NB; b++) begin
      logic [NY-1:0] e;
      e = op == OP_MULT ? ref_op(op, PREC8, m_w[b], n_w[b]) : ref_op(op, PREC8, a_w[b], b_w[b]);
      checks++;
      if (!rvalid[b] || rdata[b] !== e) begin
        failures++;
        $display("FAIL NB=%0d %s bank %0d got %h exp %h", NB, what, b, rdata[b], e);
      end
    end
  endtask

  task automatic op_run(op_e op, logic [ROW_AW-1:0] ra, logic [ROW_AW-1:0] rb,
                        logic [ROW_AW-1:0] dst, int per_bank, int exp_cyc);
    cmd_t c; int cyc; real cpe;
    c = '0; c.op = op; c.prec = PREC8; c.row_a = ra; c.row_b = rb; c.dst = dst;
    send(c, '1, cyc);
    cpe = real'(cyc) / real'(NB * per_bank);
    $display("BL size %0d (%0d banks): 8-bit %s %0d cycles for %0d elements = %0.4f cycles/element",
             NB * NY, NB, op.name(), cyc, NB * per_bank, cpe);
    checks++;
    if (cyc != exp_cyc) begin
      failures++;
      $display("FAIL NB=%0d %s cycles %0d exp %0d", NB, op.name(), cyc, exp_cyc);
    end
    check_row(op == OP_MULT ? DROW2 : dst, op, op.name());
  endtask

  initial begin
    finished = 0; checks = 0; failures = 0;
    cmd = '0; bank_mask = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      a_w[b] = $urandom; b_w[b] = $urandom;
      m_w[b] = mult_operand(PREC8, $urandom); n_w[b] = mult_operand(PREC8, $urandom);
      wr(b, 8'd0, a_w[b]); wr(b, 8'd1, b_w[b]); wr(b, 8'd2, m_w[b]); wr(b, 8'd3, n_w[b]);
    end
    op_run(OP_ADD,  8'd0, 8'd1, 8'd10, NY / 8, 1);
    op_run(OP_SUB,  8'd0, 8'd1, 8'd11, NY / 8, 2);
    op_run(OP_MULT, 8'd2, 8'd3, 8'd0,  NY / 16, 10);
    finished = 1;
  end
endmodule
