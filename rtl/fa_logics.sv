// fa_logics: transmission-gate full adder and logic unit of one Y-path.
//
// The sense amplifiers deliver AB (BLT side) and ~(A+B) (BLB side); with a
// single word line these are A and ~A. Following the paper's FA-Logics
// schematic, the switch control LSEL picks AB (LSEL=0) or A+B = ~(~(A+B))
// (LSEL=1) as carry C[N], an inverter gives ~C[N], and a second switch pair
// picks XOR(A,B) (LSEL=0) or XNOR(A,B) (LSEL=1) as sum S[N], where
// XNOR = AB | ~(A+B). With LSEL driven by the carry-in C[N-1] this is the
// paper's Eq. (1)-(2):
//   S[N] = C[N-1] ? XNOR(A,B) : XOR(A,B)
//   C[N] = C[N-1] ? (A|B)     : (A&B)
// and with LSEL held by LogicSEL it yields AND/OR, NAND/NOR and XOR/XNOR.
// Because both candidates exist before the carry arrives, the carry only
// steers switches, which is why the ripple is fast. Combinational.
module fa_logics (
  input  logic ab,     // SA output, BLT side: AB or A
  input  logic nab,    // SA output, BLB side: ~(A+B) or ~A
  input  logic lsel,   // switch control: carry-in or LogicSEL
  output logic c,      // C[N]
  output logic cn,     // ~C[N]
  output logic s       // S[N]
);

  logic a_or_b, xnor_ab, xor_ab;

  always_comb begin
    a_or_b  = ~nab;
    xnor_ab = ab | nab;
    xor_ab  = ~xnor_ab;
    c       = lsel ? a_or_b : ab;
    cn      = ~c;
    s       = lsel ? xnor_ab : xor_ab;
  end

endmodule
