// tb_den16_pkg -- checks the Q4.12 helpers and the parameter-layout
// functions of den16_pkg against hand-worked values.
module tb_den16_pkg;
  import den16_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  initial begin
    // 1.0 * 1.0 = 1.0 ; 0.5 * -0.5 = -0.25 ; tiny negative product floors to -1 lsb
    chk(fmul(16'sd4096, 16'sd4096), 4096, "1*1");
    chk(fmul(16'sd2048, -16'sd2048), -1024, "0.5*-0.5");
    chk(fmul(16'sd1, -16'sd1), -1, "floor");
    chk(fmul(16'sd1, 16'sd1), 0, "trunc");
    // 4.0 * 2.0 = 8.0 wraps to -8.0
    chk(fmul(16'sd16384, 16'sd8192), -32768, "wrap");
    chk(prelu(-16'sd4096, 16'sd1024), -1024, "prelu neg");
    chk(prelu(16'sd300, 16'sd1024), 300, "prelu pos");
    chk(relu(-16'sd5), 0, "relu");
    for (int i = 0; i < 2000; i++) begin
      shortint a, b;
      a = shortint'($urandom); b = shortint'($urandom);
      chk(fmul(a, b), rmul(a, b), "fmul random");
    end
    // layout at the default sizes
    chk(enc_words(512, 41), 21504, "enc words");
    chk(pw_words(512, 256, 0, 0), 131328, "btnk words");
    chk(pw_words(256, 512, 0, 1), 132096, "proj words");
    chk(dw_words(512, 4, 6), 14336, "dw words");
    chk(uconv_words(256, 512, 4, 6), 132096 + 14336 + 131840, "uconv words");
    chk(off_btnk(512, 41), 21504, "btnk offset");
    chk(off_uconv(512, 41, 256, 512, 4, 6, 1), 21504 + 131328 + 278272, "uconv1 offset");
    chk(off_dec(512, 41, 256, 512, 4, 6, 4), 21504 + 131328 + 4 * 278272 + 512, "dec offset");
    chk(off_mask(512, 41, 256, 512, 4, 6, 4, 41), 21504 + 131328 + 4 * 278272 + 512 + 20993, "mask offset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
