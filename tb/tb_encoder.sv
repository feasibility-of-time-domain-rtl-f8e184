// tb_encoder -- strided causal encoder at small sizes (8 channels, 9 taps,
// stride 4).  Samples for the next frame are written while a frame is being
// computed, so the circular history is exercised across wrap-around.  Every
// output is compared with a direct convolution over the whole sample
// sequence; the frame time is checked against C/LANES*K + LANES + 2 cycles.
module tb_encoder;
  import den16_pkg::*;
  import tb_util_pkg::*;
  localparam int C = 8, K = 9, STRIDE = 4, HIST = 16, LANES = 4, BASE = 7, NF = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pwr_t pwr;
  logic clr = 0, smp_valid = 0, start = 0, busy, out_valid, done;
  fix_t smp_data, out_data;
  logic [31:0] nsamples;
  logic [$clog2(C)-1:0] out_idx;
  encoder #(.C(C), .K(K), .STRIDE(STRIDE), .HIST(HIST), .LANES(LANES), .BASE(BASE)) dut (.*, .pwr_i(pwr));

  function automatic shortint xs(int n); return (n < 0) ? shortint'(0) : rsmp(n); endfunction
  function automatic shortint eref(int f, int c);
    shortint a;
    a = pgen(BASE + C * K + c);
    for (int k = 0; k < K; k++) a = shortint'(a + rmul(pgen(BASE + c * K + k), xs(STRIDE * f + STRIDE - K + k)));
    return rrelu(a);
  endfunction

  task automatic feed(int n0);
    for (int n = n0; n < n0 + STRIDE; n++) begin
      smp_valid <= 1; smp_data <= rsmp(n); @(posedge clk);
      smp_valid <= 0; @(posedge clk);
    end
  endtask

  initial begin
    pwr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = BASE; i < BASE + enc_words(C, K); i++) begin
      pwr.valid <= 1; pwr.addr <= 32'(i); pwr.data <= pgen(i); @(posedge clk);
    end
    pwr.valid <= 0;
    clr <= 1; @(posedge clk); clr <= 0;
    feed(0);
    for (int f = 0; f < NF; f++) begin
      int cyc, got;
      start <= 1; @(posedge clk); start <= 0;
      fork
        feed(STRIDE * (f + 1));
        begin
          cyc = 1; got = 0;
          while (1) begin
            @(posedge clk);
            if (out_valid) begin
              checks++; got++;
              if (out_data !== eref(f, out_idx)) begin
                failures++; $display("FAIL f=%0d c=%0d got %0d exp %0d", f, out_idx, out_data, eref(f, out_idx));
              end
            end
            if (done) break;
            cyc++;
          end
          checks++; if (got != C) begin failures++; $display("FAIL count %0d", got); end
          checks++; if (cyc != C / LANES * K + LANES + 2) begin failures++; $display("FAIL latency %0d", cyc); end
        end
      join
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
