// wl_decoder: word-line decoder of one IMC bank.
//
// Decodes the read row address(es) and the write-back row address into
// one-hot word-line enables, separately for the 128 main-array rows and the
// 3 dummy rows below the bitline separator. With `dual` set two read word
// lines are raised together (dual-WL bitline computing: logic, ADD, SUB,
// ADD-SHIFT, MULT); otherwise one (NOT, SHIFT, COPY, read). The paper's
// "single WL / dual WL" use and the main/dummy split follow the paper; the
// address map (row >= ROWS selects a dummy row) is this design's choice.
// `main_access` tells the bitline separator whether any main-array row is
// touched in this cycle. Purely combinational; the short WL pulse itself is
// an analog timing matter and is not modelled.
module wl_decoder #(
  parameter int ROWS   = 128,
  parameter int DROWS  = 3,
  parameter int ROW_AW = 8
) (
  input  logic              rd_en,
  input  logic              dual,
  input  logic [ROW_AW-1:0] rd_row0,
  input  logic [ROW_AW-1:0] rd_row1,
  input  logic              wr_en,
  input  logic [ROW_AW-1:0] wr_row,
  output logic [ROWS-1:0]   rd_wl,        // main-array read word lines
  output logic [DROWS-1:0]  rd_dwl,       // dummy-array read word lines
  output logic [ROWS-1:0]   wr_wl,        // main-array write word line
  output logic [DROWS-1:0]  wr_dwl,       // dummy-array write word line
  output logic              main_access   // a main-array row is read or written
);

  function automatic logic [ROWS-1:0] dec_main(logic [ROW_AW-1:0] a);
    logic [ROWS-1:0] v;
    v = '0;
    for (int r = 0; r < ROWS; r++) if (int'(a) == r) v[r] = 1'b1;
    return v;
  endfunction

  function automatic logic [DROWS-1:0] dec_dummy(logic [ROW_AW-1:0] a);
    logic [DROWS-1:0] v;
    v = '0;
    for (int d = 0; d < DROWS; d++) if (int'(a) == ROWS + d) v[d] = 1'b1;
    return v;
  endfunction

  always_comb begin
    rd_wl  = '0;
    rd_dwl = '0;
    wr_wl  = '0;
    wr_dwl = '0;
    if (rd_en) begin
      rd_wl  = dec_main(rd_row0);
      rd_dwl = dec_dummy(rd_row0);
      if (dual) begin
        rd_wl  |= dec_main(rd_row1);
        rd_dwl |= dec_dummy(rd_row1);
      end
    end
    if (wr_en) begin
      wr_wl  = dec_main(wr_row);
      wr_dwl = dec_dummy(wr_row);
    end
    main_access = (|rd_wl) | (|wr_wl);
  end

endmodule
