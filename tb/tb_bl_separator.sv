// tb_bl_separator: random self-check of the bitline separator: wired-AND of
// both segments when closed, dummy segment only when open, main-array write
// enable only when closed.
module tb_bl_separator;
  localparam int COLS = 128;
  logic main_access, main_wr_req, main_wr_en, sep_open;
  logic [COLS-1:0] mt, mb, dt, db, blt, blb;
  int checks = 0, failures = 0;
  int n_open = 0;

  bl_separator #(.COLS(COLS)) dut (.main_access, .main_blt(mt), .main_blb(mb),
    .dummy_blt(dt), .dummy_blb(db), .main_wr_req, .blt, .blb, .main_wr_en, .sep_open);

  initial begin
    for (int t = 0; t < 1000; t++) begin
      main_access = 1'($urandom); main_wr_req = 1'($urandom) & main_access;
      mt = {4{$urandom}}; mb = {4{$urandom}}; dt = {4{$urandom}}; db = {4{$urandom}};
      #1;
      checks++;
      if (main_access) begin
        if (blt !== (mt & dt) || blb !== (mb & db) || sep_open || main_wr_en !== main_wr_req)
          failures++;
      end else begin
        n_open++;
        if (blt !== dt || blb !== db || !sep_open || main_wr_en) failures++;
      end
    end
    checks++;
    if (n_open == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
