// encoder -- causal strided convolution front end (1 -> C channels).
//
// Incoming audio samples are written into a circular history of HIST words.
// Frame f (the f-th start pulse after clr) covers the K most recent samples
// ending at sample STRIDE*f + STRIDE - 1, i.e. absolute samples
// STRIDE*f + STRIDE - K .. STRIDE*f + STRIDE - 1 (samples before the start of
// the stream count as zero), and computes for every channel c
//     e[c] = relu( b[c] + sum_k W[c][k] * x[STRIDE*f + STRIDE - K + k] ).
// The K=41 taps, the stride of 20 and the 512 channels are the published
// design's; the ReLU, the bias and the exact window alignment are this
// design's choices (the published description does not give them).
//
// Four channels are computed side by side, one tap per cycle, so a frame takes
// C/LANES*K cycles plus a short drain.  Weights are cached as words of LANES
// channels (word (c/LANES)*K + k, lane c%LANES); local parameter layout
// W[c][k] at c*K+k, then b[c], as written by the preload bus.
//
// The history is a circular buffer rather than a shift register.  HIST must
// hold the window plus the STRIDE samples of the next frame, so samples may
// keep arriving while a frame is being computed.  The caller starts frame f
// only once samples up to STRIDE*f + STRIDE - 1 have been written.
// Outputs leave as (out_idx, out_data) one per cycle; done pulses with the
// last one.  clr restarts the sample and frame counts.
module encoder
  import den16_pkg::*;
#(
  parameter int C      = 512,
  parameter int K      = 41,
  parameter int STRIDE = 20,
  parameter int HIST   = 64,
  parameter int LANES  = 4,
  parameter int BASE   = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  pwr_t                 pwr_i,
  input  logic                 smp_valid,
  input  fix_t                 smp_data,
  input  logic                 start,
  output logic                 busy,
  output logic [31:0]          nsamples,
  output logic                 out_valid,
  output logic [$clog2(C)-1:0] out_idx,
  output fix_t                 out_data,
  output logic                 done
);
  localparam int NG   = C / LANES;
  localparam int SIZE = enc_words(C, K);
  typedef fix_t [LANES-1:0] vec_t;

  vec_t wmem [NG*K];
  fix_t bmem [C];
  fix_t hist [HIST];

  int unsigned off;
  assign off = pwr_i.addr - BASE;
  always_ff @(posedge clk) begin
    if (pwr_i.valid && off < SIZE) begin
      if (off < C * K) wmem[(off / K / LANES) * K + off % K][(off / K) % LANES] <= pwr_i.data;
      else             bmem[off - C * K] <= pwr_i.data;
    end
  end

  // ---------------------------------------------------------------- samples
  always_ff @(posedge clk) if (smp_valid) hist[nsamples % HIST] <= smp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         nsamples <= '0;
    else if (clr)       nsamples <= '0;
    else if (smp_valid) nsamples <= nsamples + 1;
  end

  // ---------------------------------------------------------------- compute
  int   frame;            // frame number since clr
  int   cg, k;            // stage 0 position
  logic run;
  logic v1, first1, last1;
  int   cg1;
  vec_t wq;
  fix_t xq;
  fix_t acc [LANES];
  fix_t oq  [LANES];      // finished group being emitted
  int   ocnt, ocg;        // emit counter / its group
  logic ofinal;

  int   s_abs;            // absolute index of the sample read in stage 0
  assign s_abs = STRIDE * frame + STRIDE - K + k;

  always_ff @(posedge clk) begin
    wq <= wmem[cg * K + k];
    xq <= (s_abs < 0) ? fix_t'(0) : hist[s_abs % HIST];
  end

  assign busy = run | v1 | (ocnt != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame <= 0; run <= 1'b0; cg <= 0; k <= 0; v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0;
      cg1 <= 0; ocnt <= 0; ocg <= 0; ofinal <= 1'b0;
      out_valid <= 1'b0; out_idx <= '0; out_data <= '0; done <= 1'b0;
      for (int l = 0; l < LANES; l++) begin acc[l] <= '0; oq[l] <= '0; end
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (clr) frame <= 0;
      // stage 0: walk groups and taps
      v1 <= run;
      if (run) begin
        first1 <= (k == 0);
        last1  <= (k == K - 1);
        cg1    <= cg;
        if (k == K - 1) begin
          k <= 0;
          if (cg == NG - 1) run <= 1'b0;
          else cg <= cg + 1;
        end else k <= k + 1;
      end else if (start) begin
        run <= 1'b1; cg <= 0; k <= 0;
      end
      // stage 1: accumulate LANES channels
      if (v1) begin
        for (int l = 0; l < LANES; l++) begin
          automatic fix_t a = (first1 ? bmem[cg1 * LANES + l] : acc[l]) + fmul(wq[l], xq);
          acc[l] <= a;
          if (last1) oq[l] <= relu(a);
        end
        if (last1) begin
          ocnt   <= LANES;
          ocg    <= cg1;
          ofinal <= (cg1 == NG - 1);
          if (cg1 == NG - 1) frame <= frame + 1;
        end
      end
      // emit the finished group, one channel per cycle (K >= LANES keeps
      // this ahead of the next group)
      if (ocnt != 0 && !(v1 && last1)) begin
        out_valid <= 1'b1;
        out_idx   <= ($clog2(C))'(ocg * LANES + (LANES - ocnt));
        out_data  <= oq[LANES - ocnt];
        ocnt      <= ocnt - 1;
        done      <= ofinal && (ocnt == 1);
      end
    end
  end

  initial assert (K >= LANES + 1) else $error("encoder: K must exceed LANES");
  initial assert (HIST >= K + STRIDE) else $error("encoder: HIST too small");

endmodule
