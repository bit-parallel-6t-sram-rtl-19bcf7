// sram_array: behaviour of a block of 6T SRAM cells on shared bitlines, used
// both for the 128 x 128 main array and for the 3-row dummy array.
//
// Read: every raised word line connects its cells to the precharged bitline
// pair. A mem storing 0 discharges BLT and a mem storing 1 discharges BLB,
// so after sensing BLT is the AND of the selected cells (AB, or A with one
// word line) and BLB is the AND of their complements (~(A+B), or ~A). With
// no word line raised both stay precharged (1). This is the paper's bitline
// computing; read disturbance, the short WL pulse and BL boosting are analog
// and do not change these logic values, so they are not modelled.
// Write: at the rising clock edge, the row whose write word line is raised
// takes wdata in the columns whose wmask bit is set (the interleaved columns
// of the addressed word); other columns keep their value.
// Timing: read is combinational, write takes effect at the clock edge, so a
// row written in one cycle can be read in the next. The cells have no reset, as
// in a real SRAM. Rows and columns are parameters (paper: 128 x 128 main,
// 3 dummy rows).
module sram_array #(
  parameter int ROWS = 128,
  parameter int COLS = 128
) (
  input  logic            clk,
  input  logic [ROWS-1:0] rd_wl,
  output logic [COLS-1:0] blt,     // wired-AND of selected cells
  output logic [COLS-1:0] blb,     // wired-AND of their complements
  input  logic [ROWS-1:0] wr_wl,   // at most one raised
  input  logic [COLS-1:0] wmask,
  input  logic [COLS-1:0] wdata
);

  logic [COLS-1:0] mem [ROWS];

  always_comb begin
    blt = '1;
    blb = '1;
    for (int r = 0; r < ROWS; r++) begin
      if (rd_wl[r]) begin
        blt &= mem[r];
        blb &= ~mem[r];
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) begin
      if (wr_wl[r]) mem[r] <= (mem[r] & ~wmask) | (wdata & wmask);
    end
  end

endmodule
