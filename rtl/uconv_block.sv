// uconv_block -- one U-ConvBlock of the separator, the repeated residual unit.
//
// Dataflow for one frame (published structure):
//   x (CB channels) -> 1x1 projection CB->CH, PReLU      (pw_conv, POST_ACT)
//                   -> depthwise temporal pyramid + multi-rate fuse (dw_pyramid)
//                   -> PReLU, 1x1 residual projection CH->CB (pw_conv, PRE_ACT)
//                   -> + x  (residual add-back)            -> x_out
// The input vector is kept in a local residual buffer while it is also
// written into the projection's input buffer.  The pyramid consumes the
// projection's results as they are produced, so its work overlaps the
// projection; the residual projection starts once the last fused channel is
// in its buffer.  x_out is streamed straight into the next stage's input
// buffer rather than stored a second time here.
//
// Parameter layout from BASE: projection (W[CH][CB], b, output slopes),
// pyramid (see dw_pyramid), residual projection (W[CB][CH], b, input slopes).
//
// Timing: start -> done takes CH*CB/LANES + 2 (projection) + 2 (pyramid)
// + CB*CH/LANES + 2 (residual) cycles, plus one cycle of hand-over.  Outputs
// are one per cycle on out_valid/out_idx/out_data; done pulses with the last.
// clr clears the pyramid state (CH cycles).  The projection's done output is
// left unconnected: the residual stage is started by the pyramid's last
// channel instead, which lint reports as an unused signal.
module uconv_block
  import den16_pkg::*;
#(
  parameter int CB     = 256,
  parameter int CH     = 512,
  parameter int LEVELS = 4,
  parameter int TAPS   = 6,
  parameter int LANES  = 4,
  parameter int BASE   = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  pwr_t                  pwr_i,
  input  logic                  in_valid,
  input  logic [$clog2(CB)-1:0] in_idx,
  input  fix_t                  in_data,
  input  logic                  start,
  output logic                  busy,
  output logic                  out_valid,
  output logic [$clog2(CB)-1:0] out_idx,
  output fix_t                  out_data,
  output logic                  done
);
  localparam int B_DW  = BASE + pw_words(CB, CH, 1'b0, 1'b1);
  localparam int B_RES = B_DW + dw_words(CH, LEVELS, TAPS);

  fix_t xres [CB];
  always_ff @(posedge clk) if (in_valid) xres[in_idx] <= in_data;

  logic                  p_valid, p_done, p_busy;
  logic [$clog2(CH)-1:0] p_idx;
  fix_t                  p_data;
  logic                  d_valid, d_busy;
  logic [$clog2(CH)-1:0] d_idx;
  fix_t                  d_data;
  logic                  r_valid, r_done, r_busy, r_start;
  logic [$clog2(CB)-1:0] r_idx;
  fix_t                  r_data;

  pw_conv #(.CIN(CB), .COUT(CH), .LANES(LANES), .PRE_ACT(1'b0), .POST_ACT(1'b1), .BASE(BASE)) u_proj (
    .clk, .rst_n, .pwr_i, .in_valid, .in_idx, .in_data, .start, .busy(p_busy),
    .out_valid(p_valid), .out_idx(p_idx), .out_data(p_data), .done(p_done));

  dw_pyramid #(.C(CH), .LEVELS(LEVELS), .TAPS(TAPS), .BASE(B_DW)) u_dw (
    .clk, .rst_n, .clr, .pwr_i, .in_valid(p_valid), .in_idx(p_idx), .in_data(p_data), .busy(d_busy),
    .out_valid(d_valid), .out_idx(d_idx), .out_data(d_data));

  pw_conv #(.CIN(CH), .COUT(CB), .LANES(LANES), .PRE_ACT(1'b1), .POST_ACT(1'b0), .BASE(B_RES)) u_res (
    .clk, .rst_n, .pwr_i, .in_valid(d_valid), .in_idx(d_idx), .in_data(d_data), .start(r_start),
    .busy(r_busy), .out_valid(r_valid), .out_idx(r_idx), .out_data(r_data), .done(r_done));

  // start the residual projection the cycle after the last fused channel
  assign r_start = d_valid && (int'(d_idx) == CH - 1);
  logic stage_busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stage_busy <= 1'b0;
    else if (start) stage_busy <= 1'b1;
    else if (r_done) stage_busy <= 1'b0;
  end
  assign busy = stage_busy | p_busy | d_busy | r_busy;

  // residual add-back
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_idx <= '0; out_data <= '0; done <= 1'b0;
    end else begin
      out_valid <= r_valid;
      out_idx   <= r_idx;
      out_data  <= r_data + xres[r_idx];
      done      <= r_done;
    end
  end

endmodule
