// ypath: column peripheral unit ("Y-Path") of one IMC bank, one per group of
// four interleaved bitline pairs.
//
// Per cycle: the 4:1 column select picks the addressed bitline pair, the
// (ideal) single-ended sense amplifiers give AB / ~(A+B) (or A / ~A), and
// FA-Logics forms C[N], ~C[N], S[N]. Multiplexers, as in the paper's Fig. 3:
//   MX2  chooses the FA-Logics switch control LSEL: the carry C[N-1] from
//        the right-hand Y-path (arithmetic) or LogicSEL (logic, shift).
//   MX0  chooses the sum passed left as S[N]: the FA sum, or - during a
//        multiplication step whose multiplier bit is 0 - the value held in
//        this Y-path's flip-flop (the current accumulator bit), so the
//        accumulator is shifted without adding the multiplicand.
//   MX1  chooses the write-back value: Logic (C, ~C or S), Add (own sum),
//        Shift (C[N-1] from the right, i.e. the neighbour's data) or
//        Add&Shift (S[N-1] from the right).
// The flip-flop captures S[N-1] on every ADD-SHIFT cycle; it is cleared at
// the start of a multiplication. In the circuit it holds S[N-1] between the
// compute and the write-back phase of one access; here one access is one
// clock cycle, so the write-back takes S[N-1] directly and the flip-flop
// keeps the same value for the next step (the current accumulator bit). In the final ADD of a multiplication the
// write-back is the sum when the multiplier bit is 1 and the flip-flop value
// when it is 0 (this gating and the clear are this design's choices; the paper
// only shows the add-and-shift steps). An external write path (WB_EXT) is the
// ordinary SRAM write. Combinational except the flip-flop (rising clk,
// active-low asynchronous reset).
module ypath
  import imc_pkg::*;
#(
  parameter int YMUX = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [YMUX-1:0]             blt,       // interleaved bitline pairs
  input  logic [YMUX-1:0]             blb,
  input  logic [$clog2(YMUX)-1:0]     col,       // column select
  input  logic                       c_in,      // C[N-1] from the right
  input  logic                       s_in,      // S[N-1] from the right
  input  wb_e                        wb_src,    // MX1 select
  input  logic                       use_lsel,  // MX2 select
  input  logic                       logic_sel, // LogicSEL
  input  lout_e                      lout,
  input  logic                       mult,      // multiplication step
  input  logic                       mbit,      // multiplier bit from MX3
  input  logic                       acc_clr,
  input  logic                       acc_en,    // ADD-SHIFT write-back cycle
  input  logic                       wdata_ext, // external write data
  output logic                       sa_q,      // SA output, BLT side
  output logic                       c_out,     // C[N] to the left
  output logic                       s_out,     // S[N] to the left
  output logic                       wb_data    // value written back
);

  logic sa_qn, lsel, fc, fcn, fs, logic_v;
  logic acc_q;

  fa_logics u_fa (
    .ab  (sa_q),
    .nab (sa_qn),
    .lsel(lsel),
    .c   (fc),
    .cn  (fcn),
    .s   (fs)
  );

  always_comb begin
    sa_q  = blt[col];
    sa_qn = blb[col];
    lsel  = use_lsel ? logic_sel : c_in;               // MX2
    c_out = fc;
    s_out = (mult && !mbit) ? acc_q : fs;              // MX0
    unique case (lout)
      LO_C:    logic_v = fc;
      LO_CN:   logic_v = fcn;
      default: logic_v = fs;
    endcase
    unique case (wb_src)                               // MX1
      WB_LOGIC:    wb_data = logic_v;
      WB_ADD:      wb_data = (mult && !mbit) ? acc_q : fs;
      WB_SHIFT:    wb_data = c_in;
      WB_ADDSHIFT: wb_data = s_in;
      default:     wb_data = wdata_ext;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc_q <= 1'b0;
    else if (acc_clr) acc_q <= 1'b0;
    else if (acc_en)  acc_q <= s_in;
  end

endmodule
