// tb_mask_head -- mask head with its three-way weight split at small sizes
// (8 inputs, 12 rows: rows 0-2 in the first cache, 3-6 in the second, 7-11
// fetched from "DDR").  The testbench answers the tail-row requests itself,
// after a random delay and with random gaps between words, reading the same
// parameter buffer.  All 12 logits are compared with a direct PReLU +
// matrix-vector model; the number of DDR row fetches and the cycle count of
// a cached row (CIN/LANES + 1 cycles between results) are checked.
module tb_mask_head;
  import den16_pkg::*;
  import tb_util_pkg::*;
  localparam int CIN = 8, COUT = 12, LANES = 4, BR = 3, LR = 7, BASE = 40;
  localparam int PSIZE = COUT + CIN + LR * CIN;
  int checks = 0, failures = 0, fetches = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pwr_t pwr;
  logic in_valid = 0, start = 0, busy, tail_req, tail_ack = 0, tail_valid = 0, out_valid, done;
  logic [31:0] tail_addr, tail_len;
  fix_t tail_data, in_data, out_data;
  logic [$clog2(CIN)-1:0] in_idx;
  logic [$clog2(COUT)-1:0] out_idx;
  mask_head #(.CIN(CIN), .COUT(COUT), .LANES(LANES), .BRAM_ROWS(BR), .LOCAL_ROWS(LR), .BASE(BASE)) dut (.*, .pwr_i(pwr));

  shortint x[CIN], y[COUT];

  // DDR tail server
  initial begin
    forever begin
      @(posedge clk);
      if (tail_req && !tail_ack) begin
        logic [31:0] a, n;
        repeat ($urandom_range(0, 5)) @(posedge clk);
        a = tail_addr; n = tail_len;
        tail_ack <= 1; @(posedge clk); tail_ack <= 0;
        fetches++;
        for (int i = 0; i < int'(n); i++) begin
          while ($urandom_range(0, 3) == 0) begin tail_valid <= 0; @(posedge clk); end
          tail_valid <= 1; tail_data <= pgen(a + 32'(i)); @(posedge clk);
        end
        tail_valid <= 0;
      end
    end
  end

  initial begin
    pwr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the preload covers only the cached rows; tail rows must come from DDR
    for (int i = BASE; i < BASE + PSIZE + 20; i++) begin
      pwr.valid <= 1; pwr.addr <= 32'(i); pwr.data <= (i < BASE + PSIZE) ? pgen(i) : fix_t'(16'h5555); @(posedge clk);
    end
    pwr.valid <= 0;
    for (int t = 0; t < 2; t++) begin
      int cyc, last_cyc;
      for (int i = 0; i < CIN; i++) x[i] = shortint'($urandom_range(0, 16383) - 8192);
      for (int r = 0; r < COUT; r++) begin
        shortint a;
        a = pgen(BASE + r);
        for (int i = 0; i < CIN; i++) a = shortint'(a + rmul(pgen(BASE + COUT + CIN + r * CIN + i), rprelu(x[i], pgen(BASE + COUT + i))));
        y[r] = a;
      end
      for (int i = 0; i < CIN; i++) begin
        in_valid <= 1; in_idx <= ($clog2(CIN))'(i); in_data <= x[i]; @(posedge clk);
      end
      in_valid <= 0;
      start <= 1; @(posedge clk); start <= 0;
      cyc = 0; last_cyc = 0;
      while (1) begin
        @(negedge clk); cyc++;
        if (out_valid) begin
          checks++;
          if (out_data !== y[out_idx]) begin failures++; $display("FAIL r=%0d got %0d exp %0d", out_idx, out_data, y[out_idx]); end
          if (out_idx > 0 && out_idx < LR) begin
            checks++;
            if (cyc - last_cyc != CIN / LANES + 1) begin failures++; $display("FAIL row time %0d", cyc - last_cyc); end
          end
          last_cyc = cyc;
        end
        if (done) break;
      end
      @(posedge clk);
    end
    checks++;
    if (fetches != 2 * (COUT - LR)) begin failures++; $display("FAIL fetches %0d", fetches); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
