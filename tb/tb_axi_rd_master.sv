// tb_axi_rd_master -- AXI4 read master against the behavioural DDR model.
// Requests of various lengths and alignments (one crossing two 4 KB
// boundaries) must return exactly the requested words in order with rd_last
// on the final one; the model flags bursts that break AXI rules.  The test
// also requires more than one burst in flight at some point and checks the
// number of bursts the longest request was cut into.
module tb_axi_rd_master;
  import tb_util_pkg::*;
  localparam int unsigned BA = 32'h1000_0000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, req_ready, rd_valid, rd_last;
  logic [31:0] req_addr, req_len;
  logic [15:0] rd_data;
  logic [31:0] araddr; logic [7:0] arlen; logic [2:0] arsize; logic [1:0] arburst, rresp;
  logic arvalid, arready, rlast, rvalid, rready;
  logic [15:0] rdata;
  int errors, bursts, maxo, splits;
  axi_rd_master #(.MAX_BURST(256), .MAX_OUTSTANDING(4)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_len,
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_rdata(rdata), .m_axi_rresp(rresp),
    .m_axi_rlast(rlast), .m_axi_rvalid(rvalid), .m_axi_rready(rready), .rd_valid, .rd_data, .rd_last);
  axi_mem_model #(.BASE_ADDR(BA), .MAX_LAT(12)) mem (
    .clk, .araddr, .arlen, .arsize, .arburst, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .errors, .bursts, .max_outstanding(maxo), .splits4k(splits));

  task automatic do_req(int w0, int n);
    int got;
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_addr = BA + 32'(2 * w0); req_len = 32'(n);
    @(negedge clk); req_valid = 0;
    got = 0;
    while (got < n) begin
      @(posedge clk); #0;
      if (rd_valid) begin
        checks++;
        if (rd_data !== 16'(pgen(32'(w0 + got)))) begin failures++; if (failures < 10) $display("FAIL w=%0d", w0 + got); end
        if (rd_last !== (got == n - 1)) begin failures++; $display("FAIL last at %0d", got); end
        got++;
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_req(0, 10);
    do_req(5, 1);
    begin
      int b0;
      b0 = bursts;
      do_req(2048 - 100, 2 * 2048 + 50);  // starts 200 B below a 4 KB line, spans two more lines
      checks++;
      // pieces: 100 | 256 x 8 (one full page) | 256 x 7 + 206  (2048 words per 4 KB page)
      if (bursts - b0 != 17) begin failures++; $display("FAIL bursts %0d", bursts - b0); end
    end
    do_req(777, 1000);
    repeat (20) @(posedge clk);
    checks++; if (errors != 0) begin failures++; $display("FAIL protocol errors %0d", errors); end
    checks++; if (maxo < 2) begin failures++; $display("FAIL no outstanding overlap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
