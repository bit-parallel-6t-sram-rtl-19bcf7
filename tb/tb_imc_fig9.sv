// tb_imc_fig9: cycles per 8-bit operation against the number of parallel
// bitline positions (the bit-parallel throughput comparison). A position is
// one Y-path, 32 per bank, so bitline sizes 128, 256, 512 and 1024 are the
// memory with 4 (the default), 8, 16 and 32 banks. Each size runs 8-bit ADD,
// SUB and MULT on all banks at once, checks every result and the cycle
// count, and prints cycles per element: 1/(4 NB), 2/(4 NB), 10/(2 NB).
module tb_imc_fig9;
  logic fin [4];
  int ch [4], fl [4];
  int checks, failures;

  fig9_runner #(.NB(4))  r128  (.finished(fin[0]), .checks(ch[0]), .failures(fl[0]));
  fig9_runner #(.NB(8))  r256  (.finished(fin[1]), .checks(ch[1]), .failures(fl[1]));
  fig9_runner #(.NB(16)) r512  (.finished(fin[2]), .checks(ch[2]), .failures(fl[2]));
  fig9_runner #(.NB(32)) r1024 (.finished(fin[3]), .checks(ch[3]), .failures(fl[3]));

  initial begin
    #1;  // let every runner clear its finished flag first
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    checks = ch[0] + ch[1] + ch[2] + ch[3];
    failures = fl[0] + fl[1] + fl[2] + fl[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    checks = ch[0] + ch[1] + ch[2] + ch[3];
    failures = fl[0] + fl[1] + fl[2] + fl[3] + 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
