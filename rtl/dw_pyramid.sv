// dw_pyramid -- multi-rate depthwise temporal pyramid with fusion.
//
// For each of the C channels this unit keeps LEVELS causal depthwise FIR
// filters of TAPS taps that run at successively halved frame rates, in the
// manner of a SuDoRM-RF U-ConvBlock:
//   level 0 filters the projection output x every frame;
//   level l (l >= 1) filters the outputs of level l-1, and produces a new
//   value only at frames t with t mod 2^l == 2^l - 1 (a stride-2 decimation
//   of level l-1);
//   between updates a level's latest output is kept in its hold buffer
//   (nearest-neighbour upsampling);
//   the fused result is y0 + hold1 + hold2 + hold3.
// For filter l with history h (h[0] newest): y = b[l][c] + sum_k W[l][c][k]*h[k].
// Four levels, the per-channel histories, the hold buffers and the
// "lvl0 + hold1 + hold2 + hold3" fusion are the published design's.  Its
// kernel is printed as "k=11 / eff.6"; this design stores and applies the six
// effective causal taps.  The update phase of each level is this design's
// choice.
//
// Interface / timing: channels arrive one per cycle or slower on
// in_valid/in_idx/in_data (any order within a frame, channel C-1 last); the
// fused value of a channel leaves on out_valid/out_idx/out_data exactly two
// cycles later.  The frame counter advances after channel C-1.  clr walks all
// channels once (C cycles, busy high) to zero the histories and holds and
// resets the frame counter.  Local parameter layout: W[l][c][k] at
// (l*C+c)*TAPS+k, then b[l][c] at LEVELS*C*TAPS + l*C + c.
module dw_pyramid
  import den16_pkg::*;
#(
  parameter int C      = 512,
  parameter int LEVELS = 4,
  parameter int TAPS   = 6,
  parameter int BASE   = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  pwr_t                 pwr_i,
  input  logic                 in_valid,
  input  logic [$clog2(C)-1:0] in_idx,
  input  fix_t                 in_data,
  output logic                 busy,
  output logic                 out_valid,
  output logic [$clog2(C)-1:0] out_idx,
  output fix_t                 out_data
);
  localparam int NWT  = LEVELS * C * TAPS;
  localparam int SIZE = dw_words(C, LEVELS, TAPS);
  typedef fix_t [TAPS-1:0] tap_t;

  tap_t wmem [LEVELS][C];      // depthwise kernels
  fix_t bmem [LEVELS][C];      // depthwise biases
  tap_t hist [LEVELS][C];      // per-level, per-channel input histories
  fix_t hold [LEVELS][C];      // latest output of each level

  int unsigned off;
  assign off = pwr_i.addr - BASE;
  always_ff @(posedge clk) begin
    if (pwr_i.valid && off < SIZE) begin
      if (off < NWT) wmem[off / (C * TAPS)][(off / TAPS) % C][off % TAPS] <= pwr_i.data;
      else           bmem[(off - NWT) / C][(off - NWT) % C] <= pwr_i.data;
    end
  end

  // ---------------------------------------------------------------- stage A
  logic                 va;
  logic [$clog2(C)-1:0] ca;
  fix_t                 xa;
  tap_t                 ha [LEVELS];
  tap_t                 wa [LEVELS];
  fix_t                 ba [LEVELS];
  fix_t                 hoa[LEVELS];

  always_ff @(posedge clk) begin
    ca <= in_idx;
    xa <= in_data;
    for (int l = 0; l < LEVELS; l++) begin
      ha[l]  <= hist[l][in_idx];
      wa[l]  <= wmem[l][in_idx];
      ba[l]  <= bmem[l][in_idx];
      hoa[l] <= hold[l][in_idx];
    end
  end

  // ---------------------------------------------------------------- stage B
  int   frame;
  logic clearing;
  int   clr_c;
  tap_t hn  [LEVELS];          // new histories
  fix_t yn  [LEVELS];          // new holds
  logic push[LEVELS];          // history of level l takes a new input
  logic upd [LEVELS];          // level l produces a new output
  fix_t fused;

  function automatic fix_t fir(tap_t w, tap_t h, fix_t b);
    fix_t s = b;
    for (int k = 0; k < TAPS; k++) s = s + fmul(w[k], h[k]);
    return s;
  endfunction

  always_comb begin
    fix_t xin;
    xin   = xa;
    fused = '0;
    for (int l = 0; l < LEVELS; l++) begin
      upd[l]  = ((frame % (1 << l)) == (1 << l) - 1);
      push[l] = (l == 0) ? 1'b1 : upd[l-1];
      hn[l]   = push[l] ? {ha[l][TAPS-2:0], xin} : ha[l];
      yn[l]   = upd[l] ? fir(wa[l], hn[l], ba[l]) : hoa[l];
      xin     = yn[l];
      fused   = fused + yn[l];
    end
  end

  assign busy = clearing | va;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      va <= 1'b0; frame <= 0; clearing <= 1'b0; clr_c <= 0;
      out_valid <= 1'b0; out_idx <= '0; out_data <= '0;
    end else begin
      va        <= in_valid && !clearing;
      out_valid <= 1'b0;
      if (clr) begin
        clearing <= 1'b1; clr_c <= 0; frame <= 0;
      end else if (clearing) begin
        clr_c <= clr_c + 1;
        if (clr_c == C - 1) clearing <= 1'b0;
      end else if (va) begin
        out_valid <= 1'b1;
        out_idx   <= ca;
        out_data  <= fused;
        if (int'(ca) == C - 1) frame <= frame + 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LEVELS; l++) begin
      if (clearing) begin
        hist[l][clr_c] <= '0;
        hold[l][clr_c] <= '0;
      end else if (va) begin
        hist[l][ca] <= hn[l];
        hold[l][ca] <= yn[l];
      end
    end
  end

endmodule
