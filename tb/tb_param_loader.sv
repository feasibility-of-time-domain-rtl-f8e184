// tb_param_loader -- preload and tail-row service of the parameter loader
// with the behavioural DDR model.  The preload must put every word
// 0 .. PRELOAD_WORDS-1 on the write bus exactly once with its index and then
// pulse preload_done; afterwards three tail-row requests must return the
// right words on the tail port and nothing on the write bus.
module tb_param_loader;
  import den16_pkg::*;
  import tb_util_pkg::*;
  localparam int unsigned BA = 32'h2000_0000;
  localparam int PW = 3000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start_preload = 0, preload_busy, preload_done, tail_req = 0, tail_ack, tail_valid;
  logic [31:0] tail_addr, tail_len;
  fix_t tail_data;
  pwr_t pwr;
  logic [31:0] araddr; logic [7:0] arlen; logic [2:0] arsize; logic [1:0] arburst, rresp;
  logic arvalid, arready, rlast, rvalid, rready;
  logic [15:0] rdata;
  int errors, bursts, maxo, splits;
  param_loader #(.PRELOAD_WORDS(PW)) dut (
    .clk, .rst_n, .base(BA), .start_preload, .preload_busy, .preload_done, .pwr_o(pwr),
    .tail_req, .tail_ack, .tail_addr, .tail_len, .tail_valid, .tail_data,
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_rdata(rdata), .m_axi_rresp(rresp),
    .m_axi_rlast(rlast), .m_axi_rvalid(rvalid), .m_axi_rready(rready));
  axi_mem_model #(.BASE_ADDR(BA), .MAX_LAT(6)) mem (
    .clk, .araddr, .arlen, .arsize, .arburst, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .errors, .bursts, .max_outstanding(maxo), .splits4k(splits));

  int seen [PW];
  int nwr = 0, ntail = 0, tail_expect_base = 0;
  logic in_tail = 0;
  int nack = 0;
  always @(posedge clk) begin
    if (pwr.valid) begin
      nwr++;
      if (pwr.addr >= PW || in_tail) failures++;
      else begin
        seen[pwr.addr]++;
        if (pwr.data !== pgen(pwr.addr)) failures++;
      end
    end
    if (tail_req && tail_ack) nack++;
    if (tail_valid) begin
      checks++;
      if (!in_tail || tail_data !== pgen(32'(tail_expect_base + ntail))) begin failures++; $display("FAIL tail word %0d base %0d got %0d exp %0d in_tail %0d", ntail, tail_expect_base, tail_data, pgen(32'(tail_expect_base + ntail)), in_tail); end
      ntail++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start_preload = 1; @(negedge clk); start_preload = 0;
    while (!preload_done) @(posedge clk);
    checks++; if (nwr != PW) begin failures++; $display("FAIL %0d writes", nwr); end
    for (int i = 0; i < PW; i++) begin checks++; if (seen[i] != 1) failures++; end
    @(negedge clk); in_tail = 1;
    for (int r = 0; r < 3; r++) begin
      ntail = 0; tail_expect_base = 5000 + 300 * r;
      @(negedge clk);
      tail_req = 1; tail_addr = 32'(tail_expect_base); tail_len = 256;
      while (nack != r + 1) @(negedge clk);
      tail_req = 0;
      while (ntail < 256) @(posedge clk);
      repeat (3) @(posedge clk);
      checks++; if (ntail != 256) begin failures++; $display("FAIL tail count %0d", ntail); end
    end
    checks++; if (errors != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
