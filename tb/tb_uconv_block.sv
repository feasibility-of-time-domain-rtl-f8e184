// tb_uconv_block -- one U-ConvBlock at small sizes (8 -> 16 -> 8 channels,
// 4 pyramid levels, 3 taps) over 10 frames, so every pyramid level updates.
// The reference applies the block's definition frame by frame on whole
// vectors: projection + PReLU, decimating depthwise pyramid with held
// outputs, PReLU + residual projection, add of the input.  The start-to-done
// time is checked against 2*CB*CH/LANES + 7 cycles.
module tb_uconv_block;
  import den16_pkg::*;
  import tb_util_pkg::*;
  localparam int CB = 8, CH = 16, L = 4, T = 3, LANES = 4, BASE = 10, NF = 10;
  localparam int BDW = BASE + pw_words(CB, CH, 1'b0, 1'b1);
  localparam int BRS = BDW + dw_words(CH, L, T);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pwr_t pwr;
  logic clr = 0, in_valid = 0, start = 0, busy, out_valid, done;
  logic [$clog2(CB)-1:0] in_idx, out_idx;
  fix_t in_data, out_data;
  uconv_block #(.CB(CB), .CH(CH), .LEVELS(L), .TAPS(T), .LANES(LANES), .BASE(BASE)) dut (.*, .pwr_i(pwr));

  shortint x [NF][CB];
  shortint yexp [NF][CB];

  task automatic build_ref();
    shortint p [NF][CH];
    shortint z [CH][L][$];
    for (int t = 0; t < NF; t++) begin
      shortint fz [CH];
      for (int o = 0; o < CH; o++) begin
        shortint a;
        a = pgen(BASE + CH * CB + o);
        for (int i = 0; i < CB; i++) a = shortint'(a + rmul(pgen(BASE + o * CB + i), x[t][i]));
        p[t][o] = rprelu(a, pgen(BASE + CH * CB + CH + o));
      end
      for (int c = 0; c < CH; c++) begin
        shortint a;
        a = pgen(BDW + L * CH * T + c);
        for (int k = 0; k < T; k++) if (t - k >= 0) a = shortint'(a + rmul(pgen(BDW + c * T + k), p[t - k][c]));
        z[c][0].push_back(a);
        for (int l = 1; l < L; l++)
          if ((t % (1 << l)) == (1 << l) - 1) begin
            int m;
            m = z[c][l].size();
            a = pgen(BDW + L * CH * T + l * CH + c);
            for (int k = 0; k < T; k++)
              if (2 * m + 1 - k >= 0) a = shortint'(a + rmul(pgen(BDW + (l * CH + c) * T + k), z[c][l-1][2 * m + 1 - k]));
            z[c][l].push_back(a);
          end
        a = z[c][0][t];
        for (int l = 1; l < L; l++) if (z[c][l].size() > 0) a = shortint'(a + z[c][l][z[c][l].size() - 1]);
        fz[c] = a;
      end
      for (int o = 0; o < CB; o++) begin
        shortint a;
        a = pgen(BRS + CB * CH + o);
        for (int i = 0; i < CH; i++) a = shortint'(a + rmul(pgen(BRS + o * CH + i), rprelu(fz[i], pgen(BRS + CB * CH + CB + i))));
        yexp[t][o] = shortint'(a + x[t][o]);
      end
    end
  endtask

  initial begin
    pwr = '0;
    for (int t = 0; t < NF; t++) for (int i = 0; i < CB; i++) x[t][i] = shortint'($urandom_range(0, 16383) - 8192);
    build_ref();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = BASE; i < BASE + uconv_words(CB, CH, L, T); i++) begin
      pwr.valid <= 1; pwr.addr <= 32'(i); pwr.data <= pgen(i); @(posedge clk);
    end
    pwr.valid <= 0;
    clr <= 1; @(posedge clk); clr <= 0; @(posedge clk);
    while (busy) @(posedge clk);
    for (int t = 0; t < NF; t++) begin
      int cyc, got;
      for (int i = 0; i < CB; i++) begin
        in_valid <= 1; in_idx <= ($clog2(CB))'(i); in_data <= x[t][i]; @(posedge clk);
      end
      in_valid <= 0;
      start <= 1; @(posedge clk); start <= 0;
      cyc = 0; got = 0;
      while (1) begin
        @(negedge clk); cyc++;
        if (out_valid) begin
          got++; checks++;
          if (out_data !== yexp[t][out_idx]) begin failures++; $display("FAIL t=%0d o=%0d got %0d exp %0d", t, out_idx, out_data, yexp[t][out_idx]); end
        end
        if (done) break;
      end
      checks++; if (got != CB) begin failures++; $display("FAIL count"); end
      checks++; if (cyc != 2 * CB * CH / LANES + 7) begin failures++; $display("FAIL latency %0d", cyc); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
