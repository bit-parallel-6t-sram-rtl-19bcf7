// tb_mult_reg: self-check of the multiplier flip-flops and MX3.
// For each precision (2, 4, 8 bits) it loads a random word, then checks that
// every Y-path of each 2N-wide group sees B[N-1], B[N-2], ..., B[0] of its
// group's multiplier (the low N bits of the group) on successive shifts.
module tb_mult_reg;
  import imc_pkg::*;
  localparam int NYP = 32;
  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  prec_e prec;
  logic [NYP-1:0] sa_q, mbit;
  int checks = 0, failures = 0;

  mult_reg #(.NYP(NYP)) dut (.clk, .rst_n, .prec, .load, .shift, .sa_q, .mbit);

  always #5 clk = ~clk;

  initial begin
    int n;
    prec = PREC2; sa_q = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 30; rep++) begin
      prec = prec_e'(rep % 3);
      n = prec_bits(prec);
      @(negedge clk);
      sa_q = $urandom; load = 1;
      @(negedge clk);
      load = 0; shift = 1;
      for (int i = n - 1; i >= 0; i--) begin
        for (int y = 0; y < NYP; y++) begin
          int g;
          g = y / (2 * n);
          checks++;
          if (mbit[y] !== sa_q[g * 2 * n + i]) begin
            failures++;
            if (failures < 10) $display("FAIL prec=%0d step=%0d y=%0d", n, i, y);
          end
        end
        @(negedge clk);
      end
      shift = 0;
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
