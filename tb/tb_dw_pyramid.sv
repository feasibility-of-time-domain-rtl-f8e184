// tb_dw_pyramid -- multi-rate depthwise pyramid, 4 channels, 4 levels,
// 3 taps, 24 frames.  The reference builds each level's output sequence as a
// decimating FIR over the previous level's whole sequence
// (z_l[m] = b + sum_k w[k] z_{l-1}[2m+1-k]) and fuses level 0 with the latest
// available output of every slower level.  A clear is issued in the middle
// of the run to check that the state restarts from zero.  The 2-cycle
// latency of each channel is checked as well.
module tb_dw_pyramid;
  import den16_pkg::*;
  import tb_util_pkg::*;
  localparam int C = 4, L = 4, T = 3, BASE = 50, NF = 24;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pwr_t pwr;
  logic clr = 0, in_valid = 0, busy, out_valid;
  logic [$clog2(C)-1:0] in_idx, out_idx;
  fix_t in_data, out_data;
  dw_pyramid #(.C(C), .LEVELS(L), .TAPS(T), .BASE(BASE)) dut (.*, .pwr_i(pwr));

  shortint xin [NF][C];
  shortint exp_f [NF][C];

  function automatic shortint w(int l, int c, int k); return pgen(BASE + (l * C + c) * T + k); endfunction
  function automatic shortint b(int l, int c); return pgen(BASE + L * C * T + l * C + c); endfunction

  task automatic build_ref();
    for (int c = 0; c < C; c++) begin
      shortint z [L][$];
      for (int t = 0; t < NF; t++) begin
        shortint a;
        a = b(0, c);
        for (int k = 0; k < T; k++) if (t - k >= 0) a = shortint'(a + rmul(w(0, c, k), xin[t - k][c]));
        z[0].push_back(a);
        for (int l = 1; l < L; l++) begin
          if ((t % (1 << l)) == (1 << l) - 1) begin
            int m;
            m = z[l].size();
            a = b(l, c);
            for (int k = 0; k < T; k++) if (2 * m + 1 - k >= 0) a = shortint'(a + rmul(w(l, c, k), z[l-1][2 * m + 1 - k]));
            z[l].push_back(a);
          end
        end
        a = z[0][t];
        for (int l = 1; l < L; l++) if (z[l].size() > 0) a = shortint'(a + z[l][z[l].size() - 1]);
        exp_f[t][c] = a;
      end
    end
  endtask

  task automatic run_frames(int nf, int tag);
    for (int t = 0; t < nf; t++) begin
      for (int c = 0; c < C; c++) begin
        in_valid <= 1; in_idx <= ($clog2(C))'(c); in_data <= xin[t][c]; @(posedge clk);
        in_valid <= 0; @(posedge clk); #1;
        // output of channel c appears two cycles after it was offered
        checks++;
        if (!(out_valid && out_idx == ($clog2(C))'(c))) begin failures++; $display("FAIL latency t=%0d c=%0d", t, c); end
        else if (out_data !== exp_f[t][c]) begin
          failures++; $display("FAIL run%0d t=%0d c=%0d got %0d exp %0d", tag, t, c, out_data, exp_f[t][c]);
        end
      end
    end
  endtask

  initial begin
    pwr = '0;
    for (int t = 0; t < NF; t++) for (int c = 0; c < C; c++) xin[t][c] = shortint'($urandom_range(0, 16383) - 8192);
    build_ref();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = BASE; i < BASE + dw_words(C, L, T); i++) begin
      pwr.valid <= 1; pwr.addr <= 32'(i); pwr.data <= pgen(i); @(posedge clk);
    end
    pwr.valid <= 0;
    clr <= 1; @(posedge clk); clr <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    run_frames(7, 0);
    clr <= 1; @(posedge clk); clr <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    run_frames(NF, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
