// tb_fa_logics: exhaustive self-check of the FA-Logics cell.
// For every stored pair (A, B) and both LSEL values it feeds the bitline
// results the array would give (AB and ~(A+B)) and compares C, ~C and S with
// the full-adder equations and the logic functions they must produce. It
// also checks the single-word-line case (AB = A, ~(A+B) = ~A).
module tb_fa_logics;
  logic ab, nab, lsel, c, cn, s;
  int checks = 0, failures = 0;

  fa_logics dut (.ab, .nab, .lsel, .c, .cn, .s);

  task automatic chk(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b exp %0b", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 8; i++) begin
      logic a, b, ci;
      {a, b, ci} = 3'(i);
      ab = a & b; nab = ~(a | b); lsel = ci;
      #1;
      // full-adder meaning when LSEL is the carry-in
      chk(s, a ^ b ^ ci, "sum");
      chk(c, (a & b) | (ci & (a ^ b)), "carry");
      chk(cn, ~((a & b) | (ci & (a ^ b))), "carry_n");
      // logic meaning when LSEL is LogicSEL
      chk(c,  ci ? (a | b) : (a & b), "and/or");
      chk(s,  ci ? ~(a ^ b) : (a ^ b), "xor/xnor");
    end
    for (int i = 0; i < 4; i++) begin
      logic a;
      {a, lsel} = 2'(i);
      ab = a; nab = ~a;
      #1;
      chk(c, a, "single-WL C = A");
      chk(cn, ~a, "single-WL ~C = ~A");
      if (!lsel) chk(s, 1'b0, "single-WL S = 0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
