// imc_ref_pkg: reference model for the testbenches of the IMC bank and top.
// Computes, with ordinary integer arithmetic on N-bit (or 2N-bit) fields,
// what each command must leave in its destination word, so the checks do not
// depend on the bitline / carry-chain mechanism of the design.
package imc_ref_pkg;
  import imc_pkg::*;

  function automatic logic [NY-1:0] ref_op(op_e op, prec_e p,
                                           logic [NY-1:0] a, logic [NY-1:0] b);
    logic [NY-1:0] r;
    int n, w;
    n = prec_bits(p);
    r = '0;
    case (op)
      OP_AND:  r = a & b;
      OP_NAND: r = ~(a & b);
      OP_OR:   r = a | b;
      OP_NOR:  r = ~(a | b);
      OP_XOR:  r = a ^ b;
      OP_XNOR: r = ~(a ^ b);
      OP_NOT:  r = ~a;
      OP_COPY: r = a;
      default: begin
        w = (op == OP_MULT) ? 2 * n : n;
        for (int f = 0; f < NY / w; f++) begin
          longint unsigned x, y, z, m;
          m = (64'd1 << w) - 1;
          x = (64'(a) >> (f * w)) & m;
          y = (64'(b) >> (f * w)) & m;
          case (op)
            OP_SHL:      z = x << 1;
            OP_ADD:      z = x + y;
            OP_ADDSHIFT: z = (x + y) << 1;
            OP_SUB:      z = x - y;
            OP_MULT:     z = x * y;      // a = multiplier, b = multiplicand
            default:     z = 0;
          endcase
          r |= NY'((z & m) << (f * w));
        end
      end
    endcase
    return r;
  endfunction

  // random word whose 2N-bit fields hold N-bit values (MULT operands)
  function automatic logic [NY-1:0] mult_operand(prec_e p, logic [NY-1:0] x);
    logic [NY-1:0] r;
    int n;
    n = prec_bits(p);
    r = '0;
    for (int f = 0; f < NY / (2 * n); f++)
      for (int k = 0; k < n; k++) r[f * 2 * n + k] = x[f * 2 * n + k];
    return r;
  endfunction

  function automatic int op_cycles(op_e op, prec_e p);
    return op == OP_SUB ? 2 : op == OP_MULT ? prec_bits(p) + 2 : 1;
  endfunction
endpackage
