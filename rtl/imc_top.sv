// imc_top: in-memory-computing memory of NBANKS bit-parallel 6T SRAM macros
// (paper: 4 banks of 128 x 128).
//
// One command port drives all banks; `bank_mask` chooses which of them
// execute it. All selected banks run the same command on their own data in
// lock-step, so an 8-bit ADD, for example, works on 4 elements per bank and
// 16 in all per cycle, which is the parallelism behind the paper's
// cycles-per-operation comparison. A command is taken when cmd_valid and
// cmd_ready are both high; cmd_ready is high only when every bank is idle, so
// banks never fall out of step. done[b] pulses in the last cycle of a command
// in bank b; a READ's data appears on rdata[b] with rvalid[b] one cycle after
// it was taken. The broadcast command port is this design's choice; the
// paper gives only the bank count and size.
module imc_top
  import imc_pkg::*;
#(
  parameter int NBANKS = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd_valid,
  input  logic [NBANKS-1:0]      bank_mask,
  input  cmd_t                   cmd,
  output logic                   cmd_ready,
  output logic [NBANKS-1:0]      done,
  output logic [NBANKS-1:0][NY-1:0] rdata,
  output logic [NBANKS-1:0]      rvalid,
  output logic [NBANKS-1:0]      sep_open
);

  logic [NBANKS-1:0] ready;

  assign cmd_ready = &ready;

  // valid/ready rule for the driver: a command that is not yet taken stays
  // presented and unchanged
  assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd) && $stable(bank_mask))
    else $error("command withdrawn or changed before it was taken");

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    imc_bank u_bank (
      .clk, .rst_n,
      .cmd_valid(cmd_valid && cmd_ready && bank_mask[b]),
      .cmd,
      .cmd_ready(ready[b]),
      .done     (done[b]),
      .rdata    (rdata[b]),
      .rvalid   (rvalid[b]),
      .sep_open (sep_open[b])
    );
  end

endmodule
