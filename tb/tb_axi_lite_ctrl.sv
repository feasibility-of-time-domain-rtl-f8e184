// tb_axi_lite_ctrl -- register writes and read-back over AXI4-Lite, the start
// pulse (only while the core is idle), the done bit (set by done_i, cleared
// by reading) and the idle bit.
module tb_axi_lite_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [5:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 1, arvalid = 0, rready = 1;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 4'hF;
  logic awready, wready, bvalid, arready, rvalid;
  logic [1:0] bresp, rresp;
  logic start_o, mode_o, busy_i = 0, done_i = 0;
  logic [31:0] base_o, nframes_o;
  int starts = 0;
  axi_lite_ctrl dut (.clk, .rst_n, .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_araddr(araddr),
    .s_axil_arvalid(arvalid), .s_axil_arready(arready), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .s_axil_rvalid(rvalid), .s_axil_rready(rready), .start_o, .mode_o, .base_o, .nframes_o, .busy_i, .done_i);
  always @(posedge clk) if (rst_n && start_o) starts++;

  task automatic wr(logic [5:0] a, logic [31:0] d);
    @(negedge clk); awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(negedge clk); while (!bvalid);
    awvalid = 0; wvalid = 0;
    @(negedge clk);
  endtask
  task automatic rd(logic [5:0] a, output logic [31:0] d);
    @(negedge clk); araddr = a; arvalid = 1;
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
  endtask
  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++; if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(6'h10, 1); wr(6'h18, 32'h1234_5600); wr(6'h20, 77);
    chk(32'(mode_o), 1, "mode"); chk(base_o, 32'h1234_5600, "base"); chk(nframes_o, 77, "nframes");
    rd(6'h18, d); chk(d, 32'h1234_5600, "rd base");
    rd(6'h20, d); chk(d, 77, "rd nframes");
    rd(6'h10, d); chk(d, 1, "rd mode");
    rd(6'h00, d); chk(d, 32'h4, "idle");
    busy_i = 1;
    wr(6'h00, 1);
    repeat (5) @(negedge clk);
    chk(32'(starts), 0, "no start while busy");
    rd(6'h00, d); chk(d & 32'h1, 1, "start pending");
    busy_i = 0;
    repeat (3) @(negedge clk);
    chk(32'(starts), 1, "start taken");
    busy_i = 1; @(negedge clk); done_i = 1; @(negedge clk); done_i = 0; busy_i = 0;
    rd(6'h00, d); chk(d, 32'h6, "done+idle");
    rd(6'h00, d); chk(d, 32'h4, "done cleared");
    wstrb = 4'h1; wr(6'h18, 32'hFFFF_FFAB); wstrb = 4'hF;
    chk(base_o, 32'h1234_56AB, "byte strobe");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
