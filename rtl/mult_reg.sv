// mult_reg: multiplier flip-flops and MX3 reconfiguration of one IMC bank.
//
// Every 2-bit precision unit (four Y-paths) owns two flip-flops, NY/2 in all.
// For N-bit multiplication (N = 2, 4, 8) each product occupies 2N Y-paths and
// its multiplier needs N flip-flops, so N/2 neighbouring 2-bit units are
// chained into one N-bit register (the paper's Fig. 6). On `load` the
// multiplier B is taken from the SA outputs of the low N Y-paths of its
// group and stored bit-reversed (B[N-1] in the right-most flip-flop), as in
// Fig. 5. On `shift` each group's register shifts right by one, so the
// right-most flip-flop presents B[N-1], B[N-2], ..., B[0] in successive
// steps; MX3 routes that bit to every Y-path of the group (`mbit`).
// Timing: loads/shifts at the rising clock edge; `mbit` is combinational from
// the flip-flops and `prec`. Active-low asynchronous reset clears them. The
// reversed loading and right shift follow the paper's figures; the exact
// flip-flop numbering is this design's choice.
module mult_reg
  import imc_pkg::*;
#(
  parameter int NYP = 32          // Y-paths in the bank
) (
  input  logic           clk,
  input  logic           rst_n,
  input  prec_e          prec,
  input  logic           load,
  input  logic           shift,
  input  logic [NYP-1:0] sa_q,    // SA outputs (multiplier row)
  output logic [NYP-1:0] mbit     // current multiplier bit per Y-path
);

  localparam int NF = NYP / 2;

  logic [NF-1:0] ff_q, ff_d;

  // next state for one precision
  function automatic logic [NF-1:0] next_ff(int n, logic [NF-1:0] q,
                                            logic ld, logic sh,
                                            logic [NYP-1:0] d);
    logic [NF-1:0] v;
    v = q;
    for (int g = 0; g < NF / n; g++) begin
      for (int k = 0; k < n; k++) begin
        if (ld)      v[g*n + k] = d[g*2*n + (n - 1 - k)];
        else if (sh) v[g*n + k] = (k == n - 1) ? 1'b0 : q[g*n + k + 1];
      end
    end
    return v;
  endfunction

  always_comb begin
    unique case (prec)
      PREC2:   ff_d = next_ff(2, ff_q, load, shift, sa_q);
      PREC4:   ff_d = next_ff(4, ff_q, load, shift, sa_q);
      default: ff_d = next_ff(8, ff_q, load, shift, sa_q);
    endcase
  end

  // MX3: right-most flip-flop of each group drives the group's Y-paths
  always_comb begin
    for (int y = 0; y < NYP; y++) begin
      unique case (prec)
        PREC2:   mbit[y] = ff_q[(y / 4) * 2];
        PREC4:   mbit[y] = ff_q[(y / 8) * 4];
        default: mbit[y] = ff_q[(y / 16) * 8];
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ff_q <= '0;
    else        ff_q <= ff_d;
  end

endmodule
