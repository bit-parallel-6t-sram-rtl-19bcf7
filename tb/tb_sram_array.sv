// tb_sram_array: self-check of the 6T cell array at the paper's 128 x 128.
// Fills every row with random data through masked writes, keeps a model
// copy, then checks no-WL (precharged), single-WL (A / ~A) and dual-WL
// (AB / ~(A+B)) bitline results, and that masked-off columns keep their data.
module tb_sram_array;
  localparam int ROWS = 128, COLS = 128;
  logic clk = 0;
  logic [ROWS-1:0] rd_wl, wr_wl;
  logic [COLS-1:0] blt, blb, wmask, wdata;
  logic [COLS-1:0] model [ROWS];
  int checks = 0, failures = 0;

  sram_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rd_wl, .blt, .blb, .wr_wl, .wmask, .wdata);

  always #5 clk = ~clk;

  function automatic logic [COLS-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic chk(logic [COLS-1:0] got, logic [COLS-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    rd_wl = '0; wr_wl = '0; wmask = '0; wdata = '0;
    // full writes, then a second masked pass
    for (int pass = 0; pass < 2; pass++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        wr_wl = '0; wr_wl[r] = 1'b1;
        wmask = pass == 0 ? '1 : rnd();
        wdata = rnd();
        if (pass == 0) model[r] = wdata;
        else model[r] = (model[r] & ~wmask) | (wdata & wmask);
      end
    end
    @(negedge clk);
    wr_wl = '0;
    #1;
    chk(blt, '1, "no WL blt"); chk(blb, '1, "no WL blb");
    for (int t = 0; t < 300; t++) begin
      int a, b;
      a = $urandom_range(0, ROWS - 1); b = $urandom_range(0, ROWS - 1);
      rd_wl = '0; rd_wl[a] = 1'b1;
      #1;
      chk(blt, model[a], "single blt"); chk(blb, ~model[a], "single blb");
      rd_wl[b] = 1'b1;
      #1;
      chk(blt, model[a] & model[b], "dual AND"); chk(blb, ~(model[a] | model[b]), "dual NOR");
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
