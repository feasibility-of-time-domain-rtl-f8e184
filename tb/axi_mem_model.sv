// axi_mem_model -- behavioural AXI4 read-only memory for the testbenches.
//
// Stands in for DDR holding the parameter buffer: the 16-bit word at byte
// address BASE_ADDR + 2*i is tb_util_pkg::pgen(i).  Read addresses are
// accepted with random back-pressure and queued (any number outstanding);
// each burst is answered after a random delay of up to MAX_LAT cycles, its
// beats with random gaps.  It checks the AXI rules the master must keep:
// INCR bursts, 2-byte beats, no burst across a 4 KB boundary.
module axi_mem_model #(
  parameter int unsigned BASE_ADDR = 32'h1000_0000,
  parameter int MAX_LAT = 8
) (
  input  logic        clk,
  input  logic [31:0] araddr,
  input  logic [7:0]  arlen,
  input  logic [2:0]  arsize,
  input  logic [1:0]  arburst,
  input  logic        arvalid,
  output logic        arready,
  output logic [15:0] rdata,
  output logic [1:0]  rresp,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready,
  output int          errors,
  output int          bursts,
  output int          max_outstanding,
  output int          splits4k
);
  import tb_util_pkg::*;
  logic [31:0] qa[$];
  int          ql[$];
  int          delay, beat;
  logic [31:0] cur_a;
  int          cur_l;
  logic        busy;

  initial begin
    errors = 0; bursts = 0; max_outstanding = 0; splits4k = 0;
    arready = 0; rvalid = 0; rlast = 0; rdata = 0; rresp = 0; busy = 0; delay = 0; beat = 0;
    cur_a = 0; cur_l = 0;
  end

  always @(posedge clk) begin
    if (arvalid && arready) begin
      if (arburst != 2'b01 || arsize != 3'd1) errors++;
      if ((araddr & 32'hFFF) + 2 * (int'(arlen) + 1) > 4096) errors++;
      if (((araddr + 2 * (int'(arlen) + 1)) & 32'hFFF) == 0 && arlen != 8'hFF) splits4k++;
      qa.push_back(araddr); ql.push_back(int'(arlen) + 1); bursts++;
    end
    arready <= ($urandom_range(0, 3) != 0);
    if (qa.size() + (busy ? 1 : 0) > max_outstanding) max_outstanding = qa.size() + (busy ? 1 : 0);
    // data
    if (rvalid && rready) begin
      beat++;
      if (beat == cur_l) begin busy = 0; end
    end
    rvalid <= 0; rlast <= 0;
    if (!busy && qa.size() > 0) begin
      cur_a = qa.pop_front(); cur_l = ql.pop_front(); beat = 0; busy = 1; delay = $urandom_range(0, MAX_LAT);
    end
    if (busy) begin
      if (delay > 0) delay--;
      else if ($urandom_range(0, 4) != 0) begin
        rvalid <= 1;
        rdata  <= pgen((cur_a - BASE_ADDR) / 2 + beat);
        rlast  <= (beat == cur_l - 1);
      end
    end
  end
endmodule
