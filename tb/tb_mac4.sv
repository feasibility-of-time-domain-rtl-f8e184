// tb_mac4 -- random operands through the 4-lane MAC, compared with an
// integer model of truncating, wrapping Q4.12 arithmetic.
module tb_mac4;
  import den16_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  fix_t acc_i, acc_o;
  fix_t [3:0] w, x;
  mac4 #(.LANES(4)) dut (.acc_i, .w_i(w), .x_i(x), .acc_o);
  initial begin
    for (int n = 0; n < 3000; n++) begin
      shortint e;
      acc_i = fix_t'($urandom);
      for (int l = 0; l < 4; l++) begin
        w[l] = (n < 1000) ? fix_t'($urandom_range(0, 8191) - 4096) : fix_t'($urandom);
        x[l] = fix_t'($urandom);
      end
      #1;
      e = acc_i;
      for (int l = 0; l < 4; l++) e = shortint'(e + rmul(w[l], x[l]));
      checks++;
      if (acc_o !== e) begin failures++; if (failures < 10) $display("FAIL got %0d exp %0d", acc_o, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
