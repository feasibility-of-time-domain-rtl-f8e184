// axi_rd_master -- AXI4 read master for the parameter buffer.
//
// Accepts one request at a time (req_addr = byte address, req_len = number
// of 16-bit words) and turns it into INCR bursts of 16-bit beats.  Each burst
// is as long as allowed by MAX_BURST and by the next 4 KB boundary (AXI4
// bursts must not cross one).  Up to MAX_OUTSTANDING bursts are in flight at
// once, so the next address is issued while data of earlier bursts is still
// returning.  Long bursts and several outstanding reads are what the
// published design configures its read master for; the values 256 and 4 and
// the 16-bit data width are this design's.
//
// Data return on rd_valid/rd_data, one word per beat in request order
// (AXI4 returns same-ID bursts in order; all bursts use ID 0).  rd_last marks
// the final word of the request.  The read channel is never stalled
// (rready = 1), so the consumer must take one word per cycle.  req_ready is
// high when no request is active.  RRESP is not checked, so m_axi_rresp is
// an unused input (lint lists it as unused).
module axi_rd_master #(
  parameter int MAX_BURST       = 256,
  parameter int MAX_OUTSTANDING = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [31:0] req_addr,
  input  logic [31:0] req_len,
  // AXI4 read address channel
  output logic [31:0] m_axi_araddr,
  output logic [7:0]  m_axi_arlen,
  output logic [2:0]  m_axi_arsize,
  output logic [1:0]  m_axi_arburst,
  output logic        m_axi_arvalid,
  input  logic        m_axi_arready,
  // AXI4 read data channel
  input  logic [15:0] m_axi_rdata,
  input  logic [1:0]  m_axi_rresp,
  input  logic        m_axi_rlast,
  input  logic        m_axi_rvalid,
  output logic        m_axi_rready,
  // word stream
  output logic        rd_valid,
  output logic [15:0] rd_data,
  output logic        rd_last
);
  logic        active;
  logic [31:0] addr, to_issue, to_recv;
  int          outstanding;
  logic [31:0] to4k, blen;

  assign to4k  = (32'd4096 - {20'd0, addr[11:0]}) >> 1;
  always_comb begin
    blen = to_issue;
    if (blen > 32'(MAX_BURST)) blen = 32'(MAX_BURST);
    if (blen > to4k)           blen = to4k;
  end

  assign req_ready     = !active;
  assign m_axi_araddr  = addr;
  assign m_axi_arlen   = 8'(blen - 1);
  assign m_axi_arsize  = 3'd1;               // 2 bytes per beat
  assign m_axi_arburst = 2'b01;              // INCR
  assign m_axi_arvalid = active && (to_issue != 0) && (outstanding < MAX_OUTSTANDING);
  assign m_axi_rready  = 1'b1;

  assign rd_valid = m_axi_rvalid;
  assign rd_data  = m_axi_rdata;
  assign rd_last  = m_axi_rvalid && (to_recv == 1);

  logic ar_hs, r_done;
  assign ar_hs  = m_axi_arvalid && m_axi_arready;
  assign r_done = m_axi_rvalid && m_axi_rlast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; addr <= '0; to_issue <= '0; to_recv <= '0; outstanding <= 0;
    end else begin
      if (!active) begin
        if (req_valid && req_len != 0) begin
          active <= 1'b1; addr <= req_addr; to_issue <= req_len; to_recv <= req_len;
        end
      end else begin
        if (ar_hs) begin
          addr     <= addr + (blen << 1);
          to_issue <= to_issue - blen;
        end
        if (m_axi_rvalid) begin
          to_recv <= to_recv - 1;
          if (to_recv == 1) active <= 1'b0;
        end
      end
      outstanding <= outstanding + (ar_hs ? 1 : 0) - (r_done ? 1 : 0);
    end
  end

  // AXI rule: a read address, once offered, stays stable until accepted.
  property p_ar_stable;
    @(posedge clk) disable iff (!rst_n)
      (m_axi_arvalid && !m_axi_arready) |=> (m_axi_arvalid && $stable(m_axi_araddr) && $stable(m_axi_arlen));
  endproperty
  a_ar_stable: assert property (p_ar_stable);

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) outstanding <= MAX_OUTSTANDING);
  a_rresp: assert property (@(posedge clk) disable iff (!rst_n) m_axi_rvalid |-> active);
endmodule
