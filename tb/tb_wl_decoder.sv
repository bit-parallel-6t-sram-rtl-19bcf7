// tb_wl_decoder: random self-check of the word-line decoder: single and
// dual read activation, main and dummy rows, write row and main_access.
module tb_wl_decoder;
  localparam int ROWS = 128, DROWS = 3, AW = 8;
  logic rd_en, dual, wr_en;
  logic [AW-1:0] r0, r1, wr;
  logic [ROWS-1:0] rd_wl, wr_wl, e_rd, e_wr;
  logic [DROWS-1:0] rd_dwl, wr_dwl, e_rdd, e_wrd;
  logic main_access;
  int checks = 0, failures = 0;

  wl_decoder #(.ROWS(ROWS), .DROWS(DROWS), .ROW_AW(AW)) dut (
    .rd_en, .dual, .rd_row0(r0), .rd_row1(r1), .wr_en, .wr_row(wr),
    .rd_wl, .rd_dwl, .wr_wl, .wr_dwl, .main_access);

  task automatic mark(int r);
    if (r < ROWS) e_rd[r] = 1'b1; else e_rdd[r - ROWS] = 1'b1;
  endtask

  initial begin
    for (int t = 0; t < 2000; t++) begin
      rd_en = 1'($urandom); dual = 1'($urandom); wr_en = 1'($urandom);
      r0 = AW'($urandom_range(0, ROWS + DROWS - 1));
      r1 = AW'($urandom_range(0, ROWS + DROWS - 1));
      wr = AW'($urandom_range(0, ROWS + DROWS - 1));
      #1;
      e_rd = '0; e_rdd = '0; e_wr = '0; e_wrd = '0;
      if (rd_en) begin
        mark(int'(r0));
        if (dual) mark(int'(r1));
      end
      if (wr_en) begin
        if (int'(wr) < ROWS) e_wr[int'(wr)] = 1'b1; else e_wrd[int'(wr) - ROWS] = 1'b1;
      end
      checks++;
      if (rd_wl !== e_rd || rd_dwl !== e_rdd || wr_wl !== e_wr || wr_dwl !== e_wrd ||
          main_access !== ((|e_rd) | (|e_wr))) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d r0=%0d r1=%0d wr=%0d", t, r0, r1, wr);
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
