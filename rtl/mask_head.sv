// mask_head -- mask estimation: PReLU followed by a 1x1 convolution CIN->COUT
// whose weight matrix is split across three storage levels.
//
//   m[r] = b[r] + sum_i Wmask[r][i] * prelu(x[i], a[i]),  r = 0 .. COUT-1
//
// Rows 0 .. BRAM_ROWS-1 of Wmask live in one on-chip array (block RAM in the
// published design), rows BRAM_ROWS .. LOCAL_ROWS-1 in a second one (LUT RAM),
// and rows LOCAL_ROWS .. COUT-1 are never cached: for each of them the unit
// asks the parameter loader for the CIN words of the row in DDR (tail_req,
// tail_addr = word index in all_w[], tail_len) and accumulates the words as
// they arrive.  The 32 / 250 / 230 row split and the on-demand DDR tail are
// the published design's; fetching one row at a time with no prefetch is this
// design's choice.
//
// Parameter layout from BASE: b[COUT], a[CIN], then the rows W[r][i] at
// COUT + CIN + r*CIN + i.  Only rows below LOCAL_ROWS are taken from the
// preload bus.
//
// Timing: a cached row takes CIN/LANES + 1 cycles; a DDR row takes the
// request, the memory latency and CIN cycles of data (one word per cycle,
// the rate of the read channel).  Results leave one per row on
// out_valid/out_idx/out_data; done pulses with the last row.
module mask_head
  import den16_pkg::*;
#(
  parameter int CIN        = 256,
  parameter int COUT       = 512,
  parameter int LANES      = 4,
  parameter int BRAM_ROWS  = 32,
  parameter int LOCAL_ROWS = 282,
  parameter int BASE       = 0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  pwr_t                    pwr_i,
  input  logic                    in_valid,
  input  logic [$clog2(CIN)-1:0]  in_idx,
  input  fix_t                    in_data,
  input  logic                    start,
  output logic                    busy,
  // DDR tail-row fetch
  output logic                    tail_req,
  input  logic                    tail_ack,
  output logic [31:0]             tail_addr,
  output logic [31:0]             tail_len,
  input  logic                    tail_valid,
  input  fix_t                    tail_data,
  // results
  output logic                    out_valid,
  output logic [$clog2(COUT)-1:0] out_idx,
  output fix_t                    out_data,
  output logic                    done
);
  localparam int NG     = CIN / LANES;
  localparam int W0     = COUT + CIN;                 // first weight word
  localparam int NLUT   = LOCAL_ROWS - BRAM_ROWS;
  localparam int PSIZE  = W0 + LOCAL_ROWS * CIN;      // words taken from preload
  typedef fix_t [LANES-1:0] vec_t;

  vec_t wbram [BRAM_ROWS*NG];   // Wmask rows 0 .. BRAM_ROWS-1
  vec_t wlut  [NLUT*NG];        // Wmask rows BRAM_ROWS .. LOCAL_ROWS-1
  fix_t bmem  [COUT];
  fix_t slope [CIN];
  vec_t xbuf  [NG];

  int unsigned off, woff;
  assign off  = pwr_i.addr - BASE;
  assign woff = off - W0;
  always_ff @(posedge clk) begin
    if (pwr_i.valid && off < PSIZE) begin
      if (off < COUT)                         bmem[off] <= pwr_i.data;
      else if (off < W0)                      slope[off - COUT] <= pwr_i.data;
      else if (woff < BRAM_ROWS * CIN)        wbram[woff / LANES][woff % LANES] <= pwr_i.data;
      else                                    wlut[(woff - BRAM_ROWS * CIN) / LANES][woff % LANES] <= pwr_i.data;
    end
  end

  always_ff @(posedge clk)
    if (in_valid) xbuf[int'(in_idx) / LANES][int'(in_idx) % LANES] <= prelu(in_data, slope[in_idx]);

  // ---------------------------------------------------------------- compute
  typedef enum logic [2:0] {S_IDLE, S_ROW, S_LAST, S_REQ, S_TAIL} state_t;
  state_t st;
  int   r, g, ti;
  logic v1;
  vec_t wq, xq;
  fix_t acc, acc_nx;
  logic first1, last1;

  // cached-row operand read (one group per cycle)
  always_ff @(posedge clk) begin
    wq <= (r < BRAM_ROWS) ? wbram[r * NG + g] : wlut[(r - BRAM_ROWS) * NG + g];
    xq <= xbuf[g];
  end

  mac4 #(.LANES(LANES)) u_mac (.acc_i(first1 ? bmem[r] : acc), .w_i(wq), .x_i(xq), .acc_o(acc_nx));

  assign busy      = (st != S_IDLE);
  assign tail_req  = (st == S_REQ);
  assign tail_addr = 32'(BASE + W0 + r * CIN);
  assign tail_len  = 32'(CIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; r <= 0; g <= 0; ti <= 0; v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; acc <= '0;
      out_valid <= 1'b0; out_idx <= '0; out_data <= '0; done <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      v1        <= (st == S_ROW);
      first1    <= (st == S_ROW) && (g == 0);
      last1     <= (st == S_ROW) && (g == NG - 1);
      if (v1) acc <= acc_nx;
      unique case (st)
        S_IDLE: if (start) begin r <= 0; g <= 0; st <= (LOCAL_ROWS > 0) ? S_ROW : S_REQ; end
        S_ROW: begin
          if (g == NG - 1) begin g <= 0; st <= S_LAST; end
          else g <= g + 1;
        end
        S_LAST: if (v1 && last1) begin       // final group accumulates now
          out_valid <= 1'b1;
          out_idx   <= ($clog2(COUT))'(r);
          out_data  <= acc_nx;
          if (r == COUT - 1) begin done <= 1'b1; st <= S_IDLE; end
          else begin
            r  <= r + 1;
            st <= (r + 1 < LOCAL_ROWS) ? S_ROW : S_REQ;
          end
        end
        S_REQ: if (tail_ack) begin ti <= 0; acc <= bmem[r]; st <= S_TAIL; end
        S_TAIL: if (tail_valid) begin
          automatic fix_t xi = xq_flat(ti);
          automatic fix_t a  = acc + fmul(tail_data, xi);
          acc <= a;
          ti  <= ti + 1;
          if (ti == CIN - 1) begin
            out_valid <= 1'b1;
            out_idx   <= ($clog2(COUT))'(r);
            out_data  <= a;
            if (r == COUT - 1) begin done <= 1'b1; st <= S_IDLE; end
            else begin r <= r + 1; st <= S_REQ; end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  function automatic fix_t xq_flat(int i);
    vec_t v = xbuf[i / LANES];
    return v[i % LANES];
  endfunction

endmodule
