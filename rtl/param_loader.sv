// param_loader -- moves parameters from the DDR buffer all_w[] on chip.
//
// Mode 0 (preload): on start_preload the loader reads words
// 0 .. PRELOAD_WORDS-1 of all_w[] (byte address base + 2*index) and
// broadcasts each one, with its word index, on the parameter-write bus pwr_o.
// Every on-chip cache watches the bus and keeps the words of its own index
// range.  preload_done pulses after the last word.
// Mode 1 (inference): the mask head's requests for DDR-resident Wmask rows
// (tail_req/tail_addr = word index/tail_len) are forwarded as read requests;
// tail_ack acknowledges one, and the words return on tail_valid/tail_data.
// The two-mode preload/inference flow and the DDR tail of the mask matrix are
// the published design's.  Both share the one AXI4 read master; a preload
// request has priority, which cannot matter as the modes never overlap.
module param_loader
  import den16_pkg::*;
#(
  parameter int PRELOAD_WORDS   = 1024,
  parameter int MAX_BURST       = 256,
  parameter int MAX_OUTSTANDING = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] base,
  input  logic        start_preload,
  output logic        preload_busy,
  output logic        preload_done,
  output pwr_t        pwr_o,
  input  logic        tail_req,
  output logic        tail_ack,
  input  logic [31:0] tail_addr,
  input  logic [31:0] tail_len,
  output logic        tail_valid,
  output fix_t        tail_data,
  // AXI4 read master
  output logic [31:0] m_axi_araddr,
  output logic [7:0]  m_axi_arlen,
  output logic [2:0]  m_axi_arsize,
  output logic [1:0]  m_axi_arburst,
  output logic        m_axi_arvalid,
  input  logic        m_axi_arready,
  input  logic [15:0] m_axi_rdata,
  input  logic [1:0]  m_axi_rresp,
  input  logic        m_axi_rlast,
  input  logic        m_axi_rvalid,
  output logic        m_axi_rready
);
  logic        req_valid, req_ready, rd_valid, rd_last;
  logic [31:0] req_addr, req_len;
  logic [15:0] rd_data;
  logic        pre_pend, tail_mode;
  logic [31:0] widx;

  axi_rd_master #(.MAX_BURST(MAX_BURST), .MAX_OUTSTANDING(MAX_OUTSTANDING)) u_rd (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_len,
    .m_axi_araddr, .m_axi_arlen, .m_axi_arsize, .m_axi_arburst, .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rresp, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready,
    .rd_valid, .rd_data, .rd_last);

  // one request in flight at a time: preload (pending) or a tail row
  logic busy_rd;       // a request is active and we are routing its data
  assign req_valid = !busy_rd && (pre_pend || tail_req);
  assign req_addr  = pre_pend ? base : base + (tail_addr << 1);
  assign req_len   = pre_pend ? 32'(PRELOAD_WORDS) : tail_len;
  assign tail_ack  = !busy_rd && !pre_pend && tail_req && req_ready;

  assign pwr_o.valid = rd_valid && !tail_mode;
  assign pwr_o.addr  = widx;
  assign pwr_o.data  = rd_data;
  assign tail_valid  = rd_valid && tail_mode;
  assign tail_data   = rd_data;
  assign preload_busy = pre_pend || (busy_rd && !tail_mode);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre_pend <= 1'b0; tail_mode <= 1'b0; busy_rd <= 1'b0; widx <= '0; preload_done <= 1'b0;
    end else begin
      preload_done <= 1'b0;
      if (start_preload) pre_pend <= 1'b1;
      if (req_valid && req_ready) begin
        busy_rd   <= 1'b1;
        tail_mode <= !pre_pend;
        widx      <= '0;
        if (pre_pend) pre_pend <= 1'b0;
      end
      if (rd_valid) begin
        widx <= widx + 1;
        if (rd_last) begin
          busy_rd <= 1'b0;
          if (!tail_mode) preload_done <= 1'b1;
        end
      end
    end
  end
endmodule
