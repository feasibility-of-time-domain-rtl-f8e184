// den16_top -- DEN16 streaming speech-denoising accelerator.
//
// The accelerator runs a causal SuDoRM-RF++ style denoiser on 16-bit
// fixed-point audio.  Per frame of STRIDE new samples it computes
//   encoder (1 -> C_ENC, K_ENC taps) -> bottleneck 1x1 (C_ENC -> C_B)
//   -> N_UCONV U-ConvBlocks (C_B -> C_H -> C_B, residual)
//   -> mask head (PReLU, 1x1 C_B -> C_ENC) -> final PReLU x encoder output
//   -> transposed-conv decoder with overlap-add (K_DEC taps)
// and emits STRIDE enhanced samples.  Almost all parameters are cached on
// chip; only the Wmask rows LOCAL_ROWS .. C_ENC-1 stay in DDR and are fetched
// row by row while the mask head runs.
//
// Two modes, chosen through AXI4-Lite (see axi_lite_ctrl):
//   mode 0, preload: the words 0 .. PRELOAD_WORDS-1 of the parameter buffer
//     are read over the AXI4 read master and written into the caches;
//   mode 1, inference: the pyramid and overlap-add states are cleared, then
//     NFRAMES frames are processed from the AXI4-Stream input to the
//     AXI4-Stream output, and done is raised.
// The stage list, sizes, the two modes and the cache/DDR split follow the
// published DEN16 design.  Its stages form a fixed streaming chain; here each
// stage's results are streamed straight into the input buffer of the next,
// and the stages of one frame run one after another (frames do not overlap),
// which is this design's choice.  Input samples of the next frame are
// accepted while a frame is computed; once a whole next frame is buffered the
// input stalls (s_axis_tready low).  The output port honours m_axis_tready.
//
// Cycle count of one frame at the default sizes (LANES = 4):
//   encoder 41*128, bottleneck 256*128, each U-ConvBlock 2*512*64,
//   mask head 282*65 + 230*(256 + DDR latency), decoder 41*128 + 20,
// about 3.3e5 cycles plus the DDR latency of the 230 tail rows.
//
// Lint note: rst_n is an asynchronous reset of the flops and is also used in
// the 'disable iff' of the concurrent assertions below; the tool reports
// this mixed use (SYNCASYNCNET), which is intended and has no effect on the
// circuit.
module den16_top
  import den16_pkg::*;
#(
  parameter int C_ENC           = 512,
  parameter int K_ENC           = 41,
  parameter int STRIDE          = 20,
  parameter int HIST            = 64,
  parameter int C_B             = 256,
  parameter int C_H             = 512,
  parameter int N_UCONV         = 4,
  parameter int LEVELS          = 4,
  parameter int TAPS            = 6,
  parameter int K_DEC           = 41,
  parameter int RING            = 65,
  parameter int BRAM_ROWS       = 32,
  parameter int LOCAL_ROWS      = 282,
  parameter int LANES           = 4,
  parameter int MAX_BURST       = 256,
  parameter int MAX_OUTSTANDING = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite control
  input  logic [5:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [5:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI4 read master to DDR (parameter buffer)
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
  output logic        m_axi_rready,
  // AXI4-Stream audio in / out (Q4.12 samples)
  input  logic [15:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  output logic [15:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast,
  // interrupt-style status
  output logic        done_o
);
  // ------------------------------------------------------------ layout
  localparam int B_ENC  = 0;
  localparam int B_BTNK = off_btnk(C_ENC, K_ENC);
  localparam int B_FPR  = off_fprelu(C_ENC, K_ENC, C_B, C_H, LEVELS, TAPS, N_UCONV);
  localparam int B_DEC  = off_dec(C_ENC, K_ENC, C_B, C_H, LEVELS, TAPS, N_UCONV);
  localparam int B_MASK = off_mask(C_ENC, K_ENC, C_B, C_H, LEVELS, TAPS, N_UCONV, K_DEC);
  localparam int PRELOAD_WORDS = B_MASK + C_ENC + C_B + LOCAL_ROWS * C_B;
  localparam int EW = $clog2(C_ENC);
  localparam int BW = $clog2(C_B);

  // ------------------------------------------------------------ control
  logic        start, mode, busy, done;
  logic [31:0] base, nframes;

  axi_lite_ctrl #(.ADDR_W(6)) u_ctrl (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready, .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid,
    .s_axil_wready, .s_axil_bresp, .s_axil_bvalid, .s_axil_bready, .s_axil_araddr, .s_axil_arvalid,
    .s_axil_arready, .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .start_o(start), .mode_o(mode), .base_o(base), .nframes_o(nframes), .busy_i(busy), .done_i(done));

  // ------------------------------------------------------------ loader
  pwr_t        pwr;
  logic        pre_start, pre_busy, pre_done;
  logic        tail_req, tail_ack, tail_valid;
  logic [31:0] tail_addr, tail_len;
  fix_t        tail_data;

  param_loader #(.PRELOAD_WORDS(PRELOAD_WORDS), .MAX_BURST(MAX_BURST), .MAX_OUTSTANDING(MAX_OUTSTANDING)) u_loader (
    .clk, .rst_n, .base, .start_preload(pre_start), .preload_busy(pre_busy), .preload_done(pre_done),
    .pwr_o(pwr), .tail_req, .tail_ack, .tail_addr, .tail_len, .tail_valid, .tail_data,
    .m_axi_araddr, .m_axi_arlen, .m_axi_arsize, .m_axi_arburst, .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rresp, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready);

  // ------------------------------------------------------------ datapath
  typedef enum logic [3:0] {S_IDLE, S_PRELOAD, S_CLR, S_WAIT_IN, S_ENC, S_BTNK, S_UCONV,
                            S_MASK, S_DEC} state_t;
  state_t st;
  logic   clr;
  int     frame, u;
  logic   enc_start, btnk_start, mask_start, dec_start;
  logic [N_UCONV-1:0] u_start;

  logic [31:0] nsamples;
  logic        e_valid, e_done, e_busy;
  logic [EW-1:0] e_idx;
  fix_t        e_data;

  assign s_axis_tready = (st inside {S_WAIT_IN, S_ENC, S_BTNK, S_UCONV, S_MASK, S_DEC}) &&
                         (nsamples < 32'(STRIDE * (frame + 2))) && (nsamples < STRIDE * nframes);

  encoder #(.C(C_ENC), .K(K_ENC), .STRIDE(STRIDE), .HIST(HIST), .LANES(LANES), .BASE(B_ENC)) u_enc (
    .clk, .rst_n, .clr, .pwr_i(pwr), .smp_valid(s_axis_tvalid && s_axis_tready), .smp_data(s_axis_tdata),
    .start(enc_start), .busy(e_busy), .nsamples, .out_valid(e_valid), .out_idx(e_idx), .out_data(e_data),
    .done(e_done));

  // chain of 256-channel vectors: bottleneck output is link 0, block u writes link u+1
  logic          l_valid [N_UCONV+1];
  logic [BW-1:0] l_idx   [N_UCONV+1];
  fix_t          l_data  [N_UCONV+1];
  logic          l_done  [N_UCONV+1];
  logic          b_busy;
  logic [N_UCONV-1:0] ub_busy;

  pw_conv #(.CIN(C_ENC), .COUT(C_B), .LANES(LANES), .PRE_ACT(1'b0), .POST_ACT(1'b0), .BASE(B_BTNK)) u_btnk (
    .clk, .rst_n, .pwr_i(pwr), .in_valid(e_valid), .in_idx(e_idx), .in_data(e_data), .start(btnk_start),
    .busy(b_busy), .out_valid(l_valid[0]), .out_idx(l_idx[0]), .out_data(l_data[0]), .done(l_done[0]));

  for (genvar i = 0; i < N_UCONV; i++) begin : g_uconv
    uconv_block #(.CB(C_B), .CH(C_H), .LEVELS(LEVELS), .TAPS(TAPS), .LANES(LANES),
                  .BASE(off_uconv(C_ENC, K_ENC, C_B, C_H, LEVELS, TAPS, i))) u_blk (
      .clk, .rst_n, .clr, .pwr_i(pwr), .in_valid(l_valid[i]), .in_idx(l_idx[i]), .in_data(l_data[i]),
      .start(u_start[i]), .busy(ub_busy[i]), .out_valid(l_valid[i+1]), .out_idx(l_idx[i+1]),
      .out_data(l_data[i+1]), .done(l_done[i+1]));
  end

  logic          m_valid, m_done, m_busy;
  logic [EW-1:0] m_idx;
  fix_t          m_data;

  mask_head #(.CIN(C_B), .COUT(C_ENC), .LANES(LANES), .BRAM_ROWS(BRAM_ROWS), .LOCAL_ROWS(LOCAL_ROWS),
              .BASE(B_MASK)) u_mask (
    .clk, .rst_n, .pwr_i(pwr), .in_valid(l_valid[N_UCONV]), .in_idx(l_idx[N_UCONV]), .in_data(l_data[N_UCONV]),
    .start(mask_start), .busy(m_busy), .tail_req, .tail_ack, .tail_addr, .tail_len, .tail_valid, .tail_data,
    .out_valid(m_valid), .out_idx(m_idx), .out_data(m_data), .done(m_done));

  logic          z_valid;
  logic [EW-1:0] z_idx;
  fix_t          z_data;

  final_prelu #(.C(C_ENC), .BASE(B_FPR)) u_fprelu (
    .clk, .rst_n, .pwr_i(pwr), .enc_valid(e_valid), .enc_idx(e_idx), .enc_data(e_data),
    .in_valid(m_valid), .in_idx(m_idx), .in_data(m_data), .out_valid(z_valid), .out_idx(z_idx), .out_data(z_data));

  logic d_done, d_busy;
  decoder_ola #(.C(C_ENC), .K(K_DEC), .STRIDE(STRIDE), .RING(RING), .LANES(LANES), .BASE(B_DEC)) u_dec (
    .clk, .rst_n, .clr, .pwr_i(pwr), .in_valid(z_valid), .in_idx(z_idx), .in_data(z_data),
    .start(dec_start), .last_i(frame == int'(nframes) - 1), .busy(d_busy),
    .m_tvalid(m_axis_tvalid), .m_tready(m_axis_tready), .m_tdata(m_axis_tdata), .m_tlast(m_axis_tlast),
    .done(d_done));

  // ------------------------------------------------------------ sequencer
  assign busy   = (st != S_IDLE);
  assign done_o = done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; clr <= 1'b0; frame <= 0; u <= 0; done <= 1'b0; pre_start <= 1'b0;
      enc_start <= 1'b0; btnk_start <= 1'b0; mask_start <= 1'b0; dec_start <= 1'b0; u_start <= '0;
    end else begin
      clr <= 1'b0; done <= 1'b0; pre_start <= 1'b0;
      enc_start <= 1'b0; btnk_start <= 1'b0; mask_start <= 1'b0; dec_start <= 1'b0; u_start <= '0;
      unique case (st)
        S_IDLE: if (start) begin
          if (mode == 1'b0) begin pre_start <= 1'b1; st <= S_PRELOAD; end
          else if (nframes == 0) done <= 1'b1;
          else begin clr <= 1'b1; frame <= 0; st <= S_CLR; end
        end
        S_PRELOAD: if (pre_done) begin done <= 1'b1; st <= S_IDLE; end
        S_CLR: if (!clr && !(|ub_busy)) st <= S_WAIT_IN;
        S_WAIT_IN: if (nsamples >= 32'(STRIDE * (frame + 1))) begin enc_start <= 1'b1; st <= S_ENC; end
        S_ENC:  if (e_done) begin btnk_start <= 1'b1; st <= S_BTNK; end
        S_BTNK: if (l_done[0]) begin u_start[0] <= 1'b1; u <= 0; st <= S_UCONV; end
        S_UCONV: if (l_done[u+1]) begin
          if (u == N_UCONV - 1) begin mask_start <= 1'b1; st <= S_MASK; end
          else begin u_start[u+1] <= 1'b1; u <= u + 1; end
        end
        S_MASK: if (m_done) begin dec_start <= 1'b1; st <= S_DEC; end
        S_DEC: if (d_done) begin
          if (frame == int'(nframes) - 1) begin done <= 1'b1; st <= S_IDLE; end
          else st <= S_WAIT_IN;
          frame <= frame + 1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // the input may run at most one frame ahead of the frame being computed
  a_in_window: assert property (@(posedge clk) disable iff (!rst_n)
    (st != S_IDLE && mode) |-> (nsamples <= 32'(STRIDE * (frame + 2))));
  // stages of one frame run one after another: a stage is only started
  // while every other stage is idle
  a_one_stage: assert property (@(posedge clk) disable iff (!rst_n)
    (enc_start || btnk_start || mask_start || dec_start || (|u_start))
      |-> !(e_busy || b_busy || m_busy || d_busy || pre_busy || (|ub_busy)));
endmodule
