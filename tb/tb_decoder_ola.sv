// tb_decoder_ola -- transposed-convolution decoder with overlap-add, small
// sizes (8 channels, 9 taps, stride 4, ring 13).  Twelve frames of random
// latents; the output port is throttled at random.  The reference forms the
// full transposed convolution of the whole latent sequence and checks every
// emitted sample in order, tlast on the final one, and the compute time
// before the first beat (the first beat is offered K*C/LANES + 2 cycles after start).
module tb_decoder_ola;
  import den16_pkg::*;
  import tb_util_pkg::*;
  localparam int C = 8, K = 9, STRIDE = 4, RING = 13, LANES = 4, BASE = 20, NF = 12;
  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pwr_t pwr;
  logic clr = 0, in_valid = 0, start = 0, last_i = 0, busy, m_tvalid, m_tready, m_tlast, done;
  logic [$clog2(C)-1:0] in_idx;
  fix_t in_data, m_tdata;
  decoder_ola #(.C(C), .K(K), .STRIDE(STRIDE), .RING(RING), .LANES(LANES), .BASE(BASE)) dut (.*, .pwr_i(pwr));

  shortint z [NF][C];
  shortint y [STRIDE*NF+K];

  initial begin
    pwr = '0; m_tready = 1;
    for (int f = 0; f < NF; f++) for (int c = 0; c < C; c++) z[f][c] = shortint'($urandom_range(0, 16383) - 8192);
    for (int n = 0; n < STRIDE * NF + K; n++) y[n] = pgen(BASE + C * K);
    for (int f = 0; f < NF; f++)
      for (int k = 0; k < K; k++)
        for (int c = 0; c < C; c++) y[STRIDE * f + k] = shortint'(y[STRIDE * f + k] + rmul(pgen(BASE + c * K + k), z[f][c]));
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = BASE; i < BASE + dec_words(C, K); i++) begin
      pwr.valid <= 1; pwr.addr <= 32'(i); pwr.data <= pgen(i); @(posedge clk);
    end
    pwr.valid <= 0;
    clr <= 1; @(posedge clk); clr <= 0;
    for (int f = 0; f < NF; f++) begin
      int cyc, n, first;
      for (int c = 0; c < C; c++) begin
        in_valid <= 1; in_idx <= ($clog2(C))'(c); in_data <= z[f][c]; @(posedge clk);
      end
      in_valid <= 0;
      start <= 1; last_i <= (f == NF - 1); @(posedge clk); start <= 0;
      cyc = 1; n = 0; first = -1;
      while (n < STRIDE) begin
        #1;
        if (m_tvalid && m_tready) begin
          checks++;
          if (m_tdata !== y[STRIDE * f + n]) begin failures++; $display("FAIL f=%0d n=%0d got %0d exp %0d", f, n, m_tdata, y[STRIDE * f + n]); end
          checks++;
          if (m_tlast !== (f == NF - 1 && n == STRIDE - 1)) begin failures++; $display("FAIL tlast"); end
          n++;
        end else if (m_tvalid) stalls++;
        if (m_tvalid && first < 0) begin
          first = cyc; checks++;
          if (cyc != K * C / LANES + 2) begin failures++; $display("FAIL latency %0d", cyc); end
        end
        @(posedge clk);
        cyc++;
        m_tready <= (f < 2) ? 1'b1 : ($urandom_range(0, 2) != 0);
      end
      m_tready <= 1;
      while (busy) @(posedge clk);
    end
    checks++; if (stalls == 0) begin failures++; $display("FAIL no backpressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
