// axi_lite_ctrl -- AXI4-Lite control registers of the accelerator.
//
// The host selects the mode, gives the DDR address of the parameter buffer
// and starts a run through this slave; the mode/start/done registers are
// named in the published design, the map below is this design's:
//   0x00  control: bit0 start (write 1; reads 1 until the run is taken),
//                  bit1 done (set when a run ends, cleared by reading),
//                  bit2 idle
//   0x10  mode: 0 = preload parameters, 1 = stream inference
//   0x18  byte address of all_w[] in DDR
//   0x20  number of frames to process in mode 1 (STRIDE samples each)
// Writes need AW and W together; each access completes with OKAY.
// start_o pulses for one cycle when a start is taken while the core is idle.
module axi_lite_ctrl #(
  parameter int ADDR_W = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // to the core
  output logic              start_o,
  output logic              mode_o,
  output logic [31:0]       base_o,
  output logic [31:0]       nframes_o,
  input  logic              busy_i,
  input  logic              done_i
);
  logic start_req, done_r;
  logic wr_go, rd_go;

  assign wr_go          = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_go;
  assign s_axil_wready  = wr_go;
  assign s_axil_bresp   = 2'b00;
  assign rd_go          = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_go;
  assign s_axil_rresp   = 2'b00;

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] d, logic [3:0] be);
    for (int b = 0; b < 4; b++) if (be[b]) old[8*b +: 8] = d[8*b +: 8];
    return old;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_bvalid <= 1'b0; s_axil_rvalid <= 1'b0; s_axil_rdata <= '0;
      start_req <= 1'b0; done_r <= 1'b0; start_o <= 1'b0;
      mode_o <= 1'b0; base_o <= '0; nframes_o <= '0;
    end else begin
      start_o <= 1'b0;
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (wr_go) begin
        s_axil_bvalid <= 1'b1;
        unique case (s_axil_awaddr)
          ADDR_W'('h00): if (s_axil_wstrb[0] && s_axil_wdata[0]) start_req <= 1'b1;
          ADDR_W'('h10): if (s_axil_wstrb[0]) mode_o <= s_axil_wdata[0];
          ADDR_W'('h18): base_o    <= merge(base_o, s_axil_wdata, s_axil_wstrb);
          ADDR_W'('h20): nframes_o <= merge(nframes_o, s_axil_wdata, s_axil_wstrb);
          default: ;
        endcase
      end
      if (start_req && !busy_i && !start_o) begin
        start_o   <= 1'b1;
        start_req <= 1'b0;
      end
      if (done_i) done_r <= 1'b1;
      if (rd_go) begin
        s_axil_rvalid <= 1'b1;
        unique case (s_axil_araddr)
          ADDR_W'('h00): begin
            s_axil_rdata <= {29'd0, !busy_i && !start_req, done_r, start_req};
            if (!done_i) done_r <= 1'b0;
          end
          ADDR_W'('h10): s_axil_rdata <= {31'd0, mode_o};
          ADDR_W'('h18): s_axil_rdata <= base_o;
          ADDR_W'('h20): s_axil_rdata <= nframes_o;
          default:       s_axil_rdata <= '0;
        endcase
      end
    end
  end

  // AXI-Lite rule: a response, once valid, stays valid until taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_axil_bvalid && !s_axil_bready) |=> s_axil_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_axil_rvalid && !s_axil_rready) |=> (s_axil_rvalid && $stable(s_axil_rdata)));
endmodule
