// tb_ypath: random self-check of one column peripheral unit.
// Drives random bitline values for the four interleaved columns, a random
// column select, carries and controls, and compares the SA output, C[N],
// S[N] (MX0) and the write-back value (MX1) with a model written from the
// adder / logic equations; the propagation flip-flop is checked across
// clock edges (capture on ADD-SHIFT, clear).
module tb_ypath;
  import imc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] blt, blb;
  logic [1:0] col;
  logic c_in, s_in, use_lsel, logic_sel, mult, mbit, acc_clr, acc_en, wdata_ext;
  wb_e wb_src;
  lout_e lout;
  logic sa_q, c_out, s_out, wb_data;
  logic acc_m;
  int checks = 0, failures = 0;

  ypath #(.YMUX(4)) dut (.clk, .rst_n, .blt, .blb, .col, .c_in, .s_in, .wb_src,
    .use_lsel, .logic_sel, .lout, .mult, .mbit, .acc_clr, .acc_en, .wdata_ext,
    .sa_q, .c_out, .s_out, .wb_data);

  always #5 clk = ~clk;

  initial begin
    logic a, b, dual, l, ec, es, ew, eso, lv;
    acc_m = 1'b0;
    acc_clr = 0; acc_en = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      a = 1'($urandom); b = 1'($urandom); dual = 1'($urandom);
      if (!dual) b = a;
      col = 2'($urandom);
      blt = 4'($urandom); blb = 4'($urandom);
      blt[col] = a & b; blb[col] = ~(a | b);
      c_in = 1'($urandom); s_in = 1'($urandom);
      use_lsel = 1'($urandom); logic_sel = 1'($urandom);
      mult = 1'($urandom); mbit = 1'($urandom);
      acc_clr = ($urandom_range(0, 9) == 0); acc_en = 1'($urandom);
      wdata_ext = 1'($urandom);
      wb_src = wb_e'($urandom_range(0, 4));
      lout = lout_e'($urandom_range(0, 2));
      #1;
      l   = use_lsel ? logic_sel : c_in;
      ec  = (a & b) | (l & (a ^ b));
      es  = a ^ b ^ l;
      eso = (mult && !mbit) ? acc_m : es;
      lv  = lout == LO_C ? ec : lout == LO_CN ? ~ec : es;
      case (wb_src)
        WB_LOGIC:    ew = lv;
        WB_ADD:      ew = (mult && !mbit) ? acc_m : es;
        WB_SHIFT:    ew = c_in;
        WB_ADDSHIFT: ew = s_in;
        default:     ew = wdata_ext;
      endcase
      checks++;
      if (sa_q !== (a & b) || c_out !== ec || s_out !== eso || wb_data !== ew) begin
        failures++;
        if (failures < 10)
          $display("FAIL t=%0d a=%0b b=%0b l=%0b src=%0d: q=%0b c=%0b s=%0b wb=%0b exp %0b %0b %0b",
                   t, a, b, l, wb_src, sa_q, c_out, s_out, wb_data, ec, eso, ew);
      end
      if (acc_clr) acc_m = 1'b0;
      else if (acc_en) acc_m = s_in;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
