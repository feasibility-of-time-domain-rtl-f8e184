// pw_conv -- 1x1 convolution unit (matrix-vector product over a cached matrix).
//
// Computes y[o] = act_out( b[o] + sum_i W[o][i] * act_in(x[i]) ) for
// o = 0 .. COUT-1, LANES products per cycle, in Q4.12 truncating/wrapping
// arithmetic.  One instance serves as the bottleneck (512->256, no
// activation), as the UConv 1x1 projection (256->512, PReLU after) and as the
// UConv residual projection (512->256, PReLU before).  The published design
// labels both UConv stages "P + 4-lane MAC"; reading "P" as a per-channel
// PReLU and placing it after the projection / before the residual projection
// follows the original SuDoRM-RF model and is this design's reading.
//
// Storage: the weight matrix is held on chip as COUT*CIN/LANES words of
// LANES parameters (the published design keeps these in URAM), plus bias and
// slope vectors.  All are written during preload from the parameter-write bus
// pwr_i: a word whose index lies in [BASE, BASE+SIZE) belongs to this unit.
// Local layout: W[o][i] at o*CIN+i, then b[o], then the input slopes (PRE_ACT)
// or the output slopes (POST_ACT).
//
// Interface / timing: the input vector is written element by element through
// in_valid/in_idx/in_data (the input PReLU is applied as it is written).  A
// start pulse runs COUT*CIN/LANES accumulate cycles; result o appears on
// out_valid/out_idx/out_data 2 cycles after its last weight word is issued.
// done pulses together with the last result.  Total: COUT*CIN/LANES + 2
// cycles from start to done.  No backpressure: the receiver must accept one
// result per cycle.
module pw_conv
  import den16_pkg::*;
#(
  parameter int CIN      = 256,
  parameter int COUT     = 512,
  parameter int LANES    = 4,
  parameter bit PRE_ACT  = 1'b0,
  parameter bit POST_ACT = 1'b0,
  parameter int BASE     = 0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  pwr_t                    pwr_i,
  input  logic                    in_valid,
  input  logic [$clog2(CIN)-1:0]  in_idx,
  input  fix_t                    in_data,
  input  logic                    start,
  output logic                    busy,
  output logic                    out_valid,
  output logic [$clog2(COUT)-1:0] out_idx,
  output fix_t                    out_data,
  output logic                    done
);
  localparam int NG    = CIN / LANES;
  localparam int NW    = COUT * CIN;
  localparam int SIZE  = pw_words(CIN, COUT, PRE_ACT, POST_ACT);
  localparam int NSI   = PRE_ACT ? CIN : 1;
  localparam int NSO   = POST_ACT ? COUT : 1;

  typedef fix_t [LANES-1:0] vec_t;

  vec_t wmem [COUT*NG];
  fix_t bmem [COUT];
  fix_t s_in [NSI];
  fix_t s_out[NSO];
  vec_t xbuf [NG];

  // ---------------------------------------------------------------- preload
  int unsigned off;
  assign off = pwr_i.addr - BASE;
  always_ff @(posedge clk) begin
    if (pwr_i.valid && off < SIZE) begin
      if (off < NW)                          wmem[off / LANES][off % LANES] <= pwr_i.data;
      else if (off < NW + COUT)              bmem[off - NW] <= pwr_i.data;
      else if (PRE_ACT && off < NW + COUT + NSI) s_in[off - NW - COUT] <= pwr_i.data;
      else if (POST_ACT)                     s_out[off - NW - COUT] <= pwr_i.data;
    end
  end

  // ---------------------------------------------------------------- input
  always_ff @(posedge clk) begin
    if (in_valid)
      xbuf[int'(in_idx) / LANES][int'(in_idx) % LANES] <= PRE_ACT ? prelu(in_data, s_in[PRE_ACT ? in_idx : 0]) : in_data;
  end

  // ---------------------------------------------------------------- compute
  // Stage 0 issues (row o, group g); stage 1 holds the operands read from the
  // caches and accumulates.
  int   o, g;
  logic run;
  logic v1, first1, last1;
  int   o1;
  vec_t wq, xq;
  fix_t acc, acc_nx, bq;

  mac4 #(.LANES(LANES)) u_mac (.acc_i(first1 ? bq : acc), .w_i(wq), .x_i(xq), .acc_o(acc_nx));

  assign busy = run | v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; o <= 0; g <= 0; v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; o1 <= 0;
      acc <= '0; out_valid <= 1'b0; out_idx <= '0; out_data <= '0; done <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      // stage 0
      v1 <= run;
      if (run) begin
        first1 <= (g == 0);
        last1  <= (g == NG - 1);
        o1     <= o;
        if (g == NG - 1) begin
          g <= 0;
          if (o == COUT - 1) run <= 1'b0;
          else o <= o + 1;
        end else g <= g + 1;
      end else if (start) begin
        run <= 1'b1; o <= 0; g <= 0;
      end
      // stage 1
      if (v1) begin
        acc <= acc_nx;
        if (last1) begin
          out_valid <= 1'b1;
          out_idx   <= ($clog2(COUT))'(o1);
          out_data  <= POST_ACT ? prelu(acc_nx, s_out[POST_ACT ? o1 : 0]) : acc_nx;
          done      <= (o1 == COUT - 1);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    wq <= wmem[o * NG + g];
    xq <= xbuf[g];
    bq <= bmem[o];
  end

endmodule
