// bl_separator: bitline separator between the main 6T array and the dummy
// rows of one IMC bank.
//
// The dummy rows sit on a short bitline segment below a row of pass switches.
// When a cycle touches only dummy rows (for example the NOT and ADD-SHIFT
// write-backs of SUB and MULT) the switches open and the large main-array
// bitline capacitance is left out, which saves write-back energy and delay;
// when any main-array row is read or written they close and both segments
// form one bitline. Logically the sensed bitline is then the wired-AND of both
// segments, and main-array writes are only allowed while closed. The
// open/close rule ("disconnect when only the dummy array is accessed")
// follows the paper's Fig. 4; deriving it from the word-line decode is this
// design's choice. Combinational, one switch pair per bitline pair.
module bl_separator #(
  parameter int COLS = 128
) (
  input  logic            main_access,   // a main row is read or written
  input  logic [COLS-1:0] main_blt,
  input  logic [COLS-1:0] main_blb,
  input  logic [COLS-1:0] dummy_blt,
  input  logic [COLS-1:0] dummy_blb,
  input  logic            main_wr_req,   // write-back targets a main row
  output logic [COLS-1:0] blt,           // bitline seen by the Y-paths
  output logic [COLS-1:0] blb,
  output logic            main_wr_en,    // write drivers reach the main array
  output logic            sep_open       // main segment disconnected
);

  always_comb begin
    sep_open   = ~main_access;
    blt        = sep_open ? dummy_blt : (main_blt & dummy_blt);
    blb        = sep_open ? dummy_blb : (main_blb & dummy_blb);
    main_wr_en = main_wr_req & ~sep_open;
  end

endmodule
