// decoder_ola -- transposed-convolution decoder with overlap-add ring.
//
// For frame f with masked latent z[c] the unit computes the K contributions
//     s[k] = sum_c Wdec[c][k] * z[c],   k = 0 .. K-1
// and adds s[k] into output sample STRIDE*f + k, held in a circular ring of
// RING words.  Output sample n is bias + the sum of all contributions to it;
// after frame f, samples STRIDE*f .. STRIDE*f + STRIDE-1 receive no further
// contributions, so they are read out, streamed on the AXI4-Stream master
// port and their ring words are cleared for reuse.  Kernel 41, stride 20 and
// the 65-word ring are the published design's; the single output bias is
// this design's choice.
//
// Weights are cached as words of LANES channels (word k*C/LANES + c/LANES);
// local parameter layout W[c][k] at c*K + k, then the bias.
//
// Timing: start -> K*C/LANES accumulate cycles (+2), then STRIDE output
// beats, each held until m_tready.  done pulses after the last beat.
// last_i, sampled at start, marks the final sample of that frame with m_tlast.
// clr zeroes the ring and restarts the frame position.
module decoder_ola
  import den16_pkg::*;
#(
  parameter int C      = 512,
  parameter int K      = 41,
  parameter int STRIDE = 20,
  parameter int RING   = 65,
  parameter int LANES  = 4,
  parameter int BASE   = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  pwr_t                 pwr_i,
  input  logic                 in_valid,
  input  logic [$clog2(C)-1:0] in_idx,
  input  fix_t                 in_data,
  input  logic                 start,
  input  logic                 last_i,
  output logic                 busy,
  output logic                 m_tvalid,
  input  logic                 m_tready,
  output fix_t                 m_tdata,
  output logic                 m_tlast,
  output logic                 done
);
  localparam int NG   = C / LANES;
  localparam int SIZE = dec_words(C, K);
  typedef fix_t [LANES-1:0] vec_t;

  vec_t wmem [K*NG];
  fix_t bias;
  vec_t xbuf [NG];
  fix_t ring [RING];

  int unsigned off;
  assign off = pwr_i.addr - BASE;
  always_ff @(posedge clk) begin
    if (pwr_i.valid && off < SIZE) begin
      if (off < C * K) wmem[(off % K) * NG + (off / K) / LANES][(off / K) % LANES] <= pwr_i.data;
      else             bias <= pwr_i.data;
    end
    if (in_valid) xbuf[int'(in_idx) / LANES][int'(in_idx) % LANES] <= in_data;
  end

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_EMIT} state_t;
  state_t st;
  int   k, g, k1, pos, j;
  logic run, v1, first1, last1, lastf;
  vec_t wq, xq;
  fix_t acc, acc_nx;

  always_ff @(posedge clk) begin
    wq <= wmem[k * NG + g];
    xq <= xbuf[g];
  end

  mac4 #(.LANES(LANES)) u_mac (.acc_i(first1 ? fix_t'(0) : acc), .w_i(wq), .x_i(xq), .acc_o(acc_nx));

  assign busy     = (st != S_IDLE);
  assign m_tvalid = (st == S_EMIT);
  assign m_tdata  = ring[(pos + j) % RING] + bias;
  assign m_tlast  = lastf && (j == STRIDE - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; k <= 0; g <= 0; k1 <= 0; pos <= 0; j <= 0; run <= 1'b0;
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; lastf <= 1'b0; acc <= '0; done <= 1'b0;
      for (int i = 0; i < RING; i++) ring[i] <= '0;
    end else begin
      done <= 1'b0;
      v1   <= run;
      if (run) begin
        first1 <= (g == 0);
        last1  <= (g == NG - 1);
        k1     <= k;
        if (g == NG - 1) begin
          g <= 0;
          if (k == K - 1) run <= 1'b0;
          else k <= k + 1;
        end else g <= g + 1;
      end
      if (v1) begin
        acc <= acc_nx;
        if (last1) ring[(pos + k1) % RING] <= ring[(pos + k1) % RING] + acc_nx;
      end
      unique case (st)
        S_IDLE: begin
          if (clr) begin
            pos <= 0;
            for (int i = 0; i < RING; i++) ring[i] <= '0;
          end else if (start) begin
            st <= S_ACC; run <= 1'b1; k <= 0; g <= 0; lastf <= last_i;
          end
        end
        S_ACC: if (v1 && last1 && k1 == K - 1) begin st <= S_EMIT; j <= 0; end
        S_EMIT: if (m_tready) begin
          ring[(pos + j) % RING] <= '0;
          if (j == STRIDE - 1) begin
            st   <= S_IDLE;
            pos  <= (pos + STRIDE) % RING;
            done <= 1'b1;
          end else j <= j + 1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  initial assert (RING >= K) else $error("decoder_ola: RING too small");
endmodule
