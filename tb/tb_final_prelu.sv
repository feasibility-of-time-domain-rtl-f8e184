// tb_final_prelu -- final PReLU and mask multiply: random encoder outputs
// and mask logits (both signs), result checked one cycle after each logit.
// Inputs change and outputs are sampled on the falling clock edge.
module tb_final_prelu;
  import den16_pkg::*;
  import tb_util_pkg::*;
  localparam int C = 8, BASE = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pwr_t pwr;
  logic enc_valid = 0, in_valid = 0, out_valid;
  logic [$clog2(C)-1:0] enc_idx, in_idx, out_idx;
  fix_t enc_data, in_data, out_data;
  final_prelu #(.C(C), .BASE(BASE)) dut (.*, .pwr_i(pwr));
  shortint e[C], m[C];
  initial begin
    pwr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = BASE; i < BASE + C; i++) begin
      pwr.valid <= 1; pwr.addr <= 32'(i); pwr.data <= shortint'(pgen(i) * 8); @(posedge clk);
    end
    pwr.valid <= 0;
    for (int r = 0; r < 4; r++) begin
      for (int c = 0; c < C; c++) begin
        e[c] = shortint'($urandom_range(0, 16383) - 8192);
        enc_valid <= 1; enc_idx <= ($clog2(C))'(c); enc_data <= e[c]; @(posedge clk);
      end
      enc_valid <= 0;
      for (int c = C - 1; c >= 0; c--) begin
        m[c] = shortint'($urandom_range(0, 16383) - 8192);
        @(negedge clk); in_valid = 1; in_idx = ($clog2(C))'(c); in_data = m[c]; @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid || out_idx != ($clog2(C))'(c) ||
            out_data !== rmul(rprelu(m[c], shortint'(pgen(BASE + c) * 8)), e[c])) begin
          failures++; $display("FAIL c=%0d got %0d exp %0d m=%0d e=%0d a=%0d v=%0d i=%0d", c, out_data, rmul(rprelu(m[c], shortint'(pgen(BASE + c) * 8)), e[c]), m[c], e[c], shortint'(pgen(BASE + c) * 8), out_valid, out_idx);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
