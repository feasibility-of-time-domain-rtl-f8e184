// tb_pw_conv -- 1x1 convolution unit with input and output PReLU, small
// sizes.  Parameters come over the preload bus, three random input vectors
// are run, every result is compared with a direct matrix-vector model, and
// the start-to-done time is checked against COUT*CIN/LANES + 2 cycles.
module tb_pw_conv;
  import den16_pkg::*;
  import tb_util_pkg::*;
  localparam int CIN = 16, COUT = 12, LANES = 4, BASE = 100;
  localparam int SIZE = pw_words(CIN, COUT, 1'b1, 1'b1);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pwr_t pwr;
  logic in_valid = 0, start = 0, busy, out_valid, done;
  logic [$clog2(CIN)-1:0] in_idx;
  logic [$clog2(COUT)-1:0] out_idx;
  fix_t in_data, out_data;
  pw_conv #(.CIN(CIN), .COUT(COUT), .LANES(LANES), .PRE_ACT(1'b1), .POST_ACT(1'b1), .BASE(BASE)) dut (.*, .pwr_i(pwr));

  shortint x[CIN], y[COUT];
  int got;
  initial begin
    pwr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // preload plus some words outside the range that must be ignored
    for (int i = BASE - 5; i < BASE + SIZE + 5; i++) begin
      pwr.valid <= 1; pwr.addr <= 32'(i); pwr.data <= (i < BASE || i >= BASE + SIZE) ? fix_t'(16'h7777) : fix_t'(pgen(i));
      @(posedge clk);
    end
    pwr.valid <= 0;
    for (int t = 0; t < 3; t++) begin
      int cyc;
      for (int i = 0; i < CIN; i++) x[i] = shortint'($urandom_range(0, 16383) - 8192);
      for (int i = 0; i < CIN; i++) begin
        in_valid <= 1; in_idx <= ($clog2(CIN))'(i); in_data <= x[i]; @(posedge clk);
      end
      in_valid <= 0;
      // reference: W[o][i] at BASE+o*CIN+i, b at +COUT*CIN, in slopes, out slopes
      for (int o = 0; o < COUT; o++) begin
        shortint a;
        a = pgen(BASE + COUT * CIN + o);
        for (int i = 0; i < CIN; i++)
          a = shortint'(a + rmul(pgen(BASE + o * CIN + i), rprelu(x[i], pgen(BASE + COUT * CIN + COUT + i))));
        y[o] = rprelu(a, pgen(BASE + COUT * CIN + COUT + CIN + o));
      end
      start <= 1; @(posedge clk); start <= 0;
      cyc = 1; got = 0;
      while (1) begin
        @(posedge clk);
        if (out_valid) begin
          checks++; got++;
          if (out_data !== y[out_idx]) begin failures++; $display("FAIL o=%0d got %0d exp %0d", out_idx, out_data, y[out_idx]); end
        end
        if (done) break;
        cyc++;
      end
      checks++;
      if (got != COUT) begin failures++; $display("FAIL %0d results", got); end
      checks++;
      if (cyc != COUT * CIN / LANES + 2) begin failures++; $display("FAIL latency %0d", cyc); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
