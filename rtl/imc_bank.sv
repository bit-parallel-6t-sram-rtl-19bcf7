// imc_bank: one 128 x 128 bit-parallel in-memory-computing SRAM macro.
//
// Structure (the paper's Fig. 3): word-line decoder, 6T main array, bitline
// separator, 3-row dummy array, NY = COLS/MUX column peripheral units
// (Y-paths), multiplier flip-flops with MX3, and the sequencer. Every cycle
// one micro-op from imc_ctrl raises one or two word lines, the Y-paths turn
// the bitline values into logic / sum / carry results, and the chosen value
// is written back into the addressed row in the same cycle.
//
// Bit-parallel arithmetic: Y-path j handles bit j of the 32-bit word held in
// columns j*MUX + col. Carries C and propagated sums S ripple from Y-path j
// to j+1. The chain is cut every `seg` Y-paths (seg = N for N-bit ADD, SUB,
// SHIFT and ADD-SHIFT; 2N for MULT, whose product is 2N bits wide), which is
// how the precision is reconfigured; at a cut the carry-in is the micro-op's
// `cin` (1 for the second SUB cycle) and the shifted-in sum is 0. So one
// access works on NY/N elements (ADD) or NY/(2N) products (MULT).
//
// Interface: command handshake as in imc_ctrl. A READ returns the word in
// `rdata` with `rvalid` one cycle after the command was taken. Writes,
// including all write-backs, take effect at the rising clock edge, so the
// next command sees them. `sep_open` shows the bitline separator state.
// The organisation follows the paper; the word/bit mapping of the interleave
// and the command interface are this design's choices.
module imc_bank
  import imc_pkg::*;
#(
  parameter int ROWS_P = ROWS     // main-array rows (paper: 128)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  input  cmd_t          cmd,
  output logic          cmd_ready,
  output logic          done,
  output logic [NY-1:0] rdata,
  output logic          rvalid,
  output logic          sep_open
);

  localparam int COLS_P = COLS;   // fixed by the word width of cmd_t
  localparam int NYP    = NY;

  uop_t uop;

  logic [ROWS_P-1:0] rd_wl, wr_wl, wr_wl_g;
  logic [DROWS-1:0]  rd_dwl, wr_dwl;
  logic              main_access, main_wr_en;
  logic [COLS_P-1:0] m_blt, m_blb, d_blt, d_blb, blt, blb;
  logic [COLS_P-1:0] wmask, wdata;
  logic [NYP-1:0]    sa_q, c_out, s_out, c_in, s_in, wb_data, mbit;
  logic              acc_en;

  imc_ctrl u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .uop, .done
  );

  wl_decoder #(.ROWS(ROWS_P), .DROWS(DROWS), .ROW_AW(ROW_AW)) u_dec (
    .rd_en      (uop.rd_en),
    .dual       (uop.dual),
    .rd_row0    (uop.rd_row0),
    .rd_row1    (uop.rd_row1),
    .wr_en      (uop.wb_en),
    .wr_row     (uop.wb_row),
    .rd_wl, .rd_dwl, .wr_wl, .wr_dwl,
    .main_access
  );

  sram_array #(.ROWS(ROWS_P), .COLS(COLS_P)) u_main (
    .clk, .rd_wl, .blt(m_blt), .blb(m_blb),
    .wr_wl(wr_wl_g), .wmask, .wdata
  );

  sram_array #(.ROWS(DROWS), .COLS(COLS_P)) u_dummy (
    .clk, .rd_wl(rd_dwl), .blt(d_blt), .blb(d_blb),
    .wr_wl(wr_dwl), .wmask, .wdata
  );

  bl_separator #(.COLS(COLS_P)) u_sep (
    .main_access,
    .main_blt(m_blt), .main_blb(m_blb),
    .dummy_blt(d_blt), .dummy_blb(d_blb),
    .main_wr_req(|wr_wl),
    .blt, .blb, .main_wr_en, .sep_open
  );

  assign wr_wl_g = main_wr_en ? wr_wl : '0;

  // array access rules: at most two read word lines, at most one write row,
  // and no main-array write while the separator is open
  assert property (@(posedge clk) disable iff (!rst_n)
                   $countones({rd_wl, rd_dwl}) <= 2)
    else $error("more than two word lines raised");
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0({wr_wl, wr_dwl}))
    else $error("more than one write-back row");
  assert property (@(posedge clk) disable iff (!rst_n) (|wr_wl) |-> main_wr_en)
    else $error("main-array write with the separator open");
  assign acc_en  = uop.wb_en && (uop.wb_src == WB_ADDSHIFT);

  // carry / propagated-sum chain with precision cuts
  always_comb begin
    for (int j = 0; j < NYP; j++) begin
      if ((j & (int'(uop.seg) - 1)) == 0) begin
        c_in[j] = uop.cin;
        s_in[j] = 1'b0;
      end else begin
        c_in[j] = c_out[j-1];
        s_in[j] = s_out[j-1];
      end
    end
  end

  for (genvar j = 0; j < NYP; j++) begin : g_y
    ypath #(.YMUX(MUX)) u_y (
      .clk, .rst_n,
      .blt      (blt[j*MUX +: MUX]),
      .blb      (blb[j*MUX +: MUX]),
      .col      (uop.col),
      .c_in     (c_in[j]),
      .s_in     (s_in[j]),
      .wb_src   (uop.wb_src),
      .use_lsel (uop.use_lsel),
      .logic_sel(uop.logic_sel),
      .lout     (uop.lout),
      .mult     (uop.mult),
      .mbit     (mbit[j]),
      .acc_clr  (uop.acc_clr),
      .acc_en   (acc_en),
      .wdata_ext(cmd.wdata[j]),
      .sa_q     (sa_q[j]),
      .c_out    (c_out[j]),
      .s_out    (s_out[j]),
      .wb_data  (wb_data[j])
    );
    for (genvar m = 0; m < MUX; m++) begin : g_m
      assign wmask[j*MUX + m] = (uop.col == COL_AW'(m));
      assign wdata[j*MUX + m] = wb_data[j];
    end
  end

  mult_reg #(.NYP(NYP)) u_mreg (
    .clk, .rst_n,
    .prec (uop.prec),
    .load (uop.mreg_load),
    .shift(uop.mreg_shift),
    .sa_q,
    .mbit
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata  <= '0;
      rvalid <= 1'b0;
    end else begin
      rvalid <= uop.rd_out;
      if (uop.rd_out) rdata <= sa_q;
    end
  end

endmodule
