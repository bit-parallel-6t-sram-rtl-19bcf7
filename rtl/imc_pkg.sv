// imc_pkg: shared sizes, command set and micro-operation format of the
// bit-parallel 6T SRAM in-memory-computing macro.
//
// One macro (bank) is a 128 x 128 6T array, a bitline separator, three dummy
// rows and 32 column peripheral units (Y-paths); with 4:1 column interleaving
// each access touches one column in every group of four, i.e. a 32-bit word.
// The macro sizes, the three dummy rows, the 4:1 interleave, the operation set
// and the cycle counts (1, SUB 2, MULT N+2) follow the paper. The numeric op
// encoding, the row-address map and the micro-op fields are this design's own.
//
// Row address map (ROW_AW bits): 0 .. ROWS-1 are main-array rows,
// ROWS + d (d = 0..2) is dummy row d.
package imc_pkg;

  localparam int ROWS       = 128;  // main-array rows per bank
  localparam int COLS       = 128;  // bitline pairs per bank
  localparam int MUX        = 4;    // column interleave
  localparam int NY         = COLS / MUX;  // Y-paths per bank (word width)
  localparam int DROWS      = 3;    // dummy rows
  localparam int ROW_AW     = 8;    // row address width (main + dummy)
  localparam int COL_AW     = 2;    // interleave select width

  // Dummy row addresses.
  localparam logic [ROW_AW-1:0] DROW0 = ROW_AW'(ROWS + 0);
  localparam logic [ROW_AW-1:0] DROW1 = ROW_AW'(ROWS + 1);
  localparam logic [ROW_AW-1:0] DROW2 = ROW_AW'(ROWS + 2);

  // Operand precision (bits per element).
  typedef enum logic [1:0] {
    PREC2 = 2'd0,
    PREC4 = 2'd1,
    PREC8 = 2'd2
  } prec_e;

  // Commands accepted by a bank (Table I plus plain read / write).
  typedef enum logic [4:0] {
    OP_READ     = 5'd0,   // single WL, data out
    OP_WRITE    = 5'd1,   // external data to a row
    OP_AND      = 5'd2,
    OP_NAND     = 5'd3,
    OP_OR       = 5'd4,
    OP_NOR      = 5'd5,
    OP_XOR      = 5'd6,
    OP_XNOR     = 5'd7,
    OP_NOT      = 5'd8,   // single WL
    OP_COPY     = 5'd9,   // single WL
    OP_SHL      = 5'd10,  // single WL, shift left by one inside each element
    OP_ADD      = 5'd11,
    OP_ADDSHIFT = 5'd12,  // (A+B) << 1 inside each element
    OP_SUB      = 5'd13,  // 2 cycles: NOT then ADD with carry-in 1
    OP_MULT     = 5'd14   // N+2 cycles, 2N-bit product fields
  } op_e;

  // A command: row_a = Data 0, row_b = Data 1 in the paper's figures.
  typedef struct packed {
    op_e               op;
    prec_e             prec;
    logic [ROW_AW-1:0] row_a;
    logic [ROW_AW-1:0] row_b;
    logic [ROW_AW-1:0] dst;
    logic [COL_AW-1:0] col;
    logic [NY-1:0]     wdata;
  } cmd_t;

  // Write-back source chosen by MX1 (plus the external write path).
  typedef enum logic [2:0] {
    WB_LOGIC    = 3'd0,
    WB_ADD      = 3'd1,
    WB_SHIFT    = 3'd2,
    WB_ADDSHIFT = 3'd3,
    WB_EXT      = 3'd4
  } wb_e;

  // Which FA-Logics node feeds the 'Logic' input of MX1.
  typedef enum logic [1:0] {
    LO_C  = 2'd0,   // C[N]   : AND (LSEL=0) / OR (LSEL=1) / A (single WL)
    LO_CN = 2'd1,   // ~C[N]  : NAND / NOR / ~A
    LO_S  = 2'd2    // S[N]   : XOR (LSEL=0) / XNOR (LSEL=1) / 0 (single WL)
  } lout_e;

  // One array cycle: read (1 or 2 WLs), compute, write back.
  typedef struct packed {
    logic              rd_en;      // activate word lines
    logic              dual;       // second word line too
    logic [ROW_AW-1:0] rd_row0;
    logic [ROW_AW-1:0] rd_row1;
    logic              wb_en;      // write back into wb_row
    logic [ROW_AW-1:0] wb_row;
    logic [COL_AW-1:0] col;
    wb_e               wb_src;
    logic              use_lsel;   // MX2: LogicSEL instead of carry C[N-1]
    logic              logic_sel;  // LogicSEL value
    lout_e             lout;
    logic              cin;        // carry into the LSB of every element
    logic [4:0]        seg;        // carry-chain segment length (2..16)
    prec_e             prec;       // multiplier register grouping
    logic              mult;       // MX0 / write-back gated by multiplier bit
    logic              mreg_load;  // load multiplier flip-flops from SA outputs
    logic              mreg_shift; // right-shift multiplier flip-flops
    logic              acc_clr;    // clear Y-path propagation flip-flops
    logic              rd_out;     // present SA outputs as read data
  } uop_t;

  function automatic int prec_bits(prec_e p);
    case (p)
      PREC2:   return 2;
      PREC4:   return 4;
      default: return 8;
    endcase
  endfunction

endpackage
