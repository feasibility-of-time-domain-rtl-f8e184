// final_prelu -- final mask activation and masking of the encoded mixture.
//
// Keeps a copy of the current frame's encoder output e[c] (written while the
// encoder streams it out), and for every mask logit m[c] that arrives returns
//     z[c] = prelu(m[c], a[c]) * e[c]
// one cycle later.  The final PReLU stage is the published design's; the
// per-channel slope a[c] and doing the mask multiplication here, just before
// the decoder, are this design's choices (the schematic of the model shows the
// mask multiplying the encoded mixture ahead of the decoder).
// Parameter layout from BASE: a[0 .. C-1].
module final_prelu
  import den16_pkg::*;
#(
  parameter int C    = 512,
  parameter int BASE = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  pwr_t                 pwr_i,
  input  logic                 enc_valid,
  input  logic [$clog2(C)-1:0] enc_idx,
  input  fix_t                 enc_data,
  input  logic                 in_valid,
  input  logic [$clog2(C)-1:0] in_idx,
  input  fix_t                 in_data,
  output logic                 out_valid,
  output logic [$clog2(C)-1:0] out_idx,
  output fix_t                 out_data
);
  fix_t slope [C];
  fix_t ebuf  [C];

  int unsigned off;
  assign off = pwr_i.addr - BASE;
  always_ff @(posedge clk) begin
    if (pwr_i.valid && off < C)
      slope[off] <= pwr_i.data;
    if (enc_valid) ebuf[enc_idx] <= enc_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_idx <= '0; out_data <= '0;
    end else begin
      out_valid <= in_valid;
      out_idx   <= in_idx;
      out_data  <= fmul(prelu(in_data, slope[in_idx]), ebuf[in_idx]);
    end
  end
endmodule
