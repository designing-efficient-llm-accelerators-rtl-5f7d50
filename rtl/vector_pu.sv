// vector_pu: the arithmetic of the super-block vector processor. It takes one tile pair per
// cycle (16 3-bit weights, their 6-bit tile scale, 16 int8 inputs) and, after the 16 tiles of
// a super-block, delivers the SB's dot product as a single-precision number:
//
//   result = ssf_w * ssf_x * sum_{t=0..15} (scale_t - 32) * sum_{l=0..15} q_w[t][l] * q_x[t][l]
//
// which is GGML's Q3_K x Q8_K dot product with both super-scaling factors in fp16.
// Pipeline (TILE_N = 16 lanes, so one tile per cycle and an SB every 16 cycles):
//   stage 1: 16 3x8-bit products, adder tree, times (scale - 32); SSF product ssf_w*ssf_x
//            (exact in single precision) registered on the SB's first tile;
//   stage 2: signed integer accumulation over the 16 tiles (24 bits are enough:
//            |sum| <= 16 * 32 * 16 * 512 = 2^22);
//   stage 3: integer to single precision (exact), times the SSF product (truncated).
// out_valid is high for one cycle, three cycles after the in_valid cycle marked in_last.
// There is no back-pressure. The paper gives the formula's ingredients (tile scales, SSFs, SB
// sizes); the lane count, the pipeline and the number formats are this design's choices.
module vector_pu
  import llm_acc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  logic    in_first,
  input  logic    in_last,
  input  w_tile_t w_tile,
  input  x_tile_t x_tile,
  input  fp16_t   w_ssf,
  input  fp16_t   x_ssf,
  output logic    out_valid,
  output fp32_t   out_result
);
  // stage 1
  logic signed [14:0] tile_dot;
  logic signed [20:0] tile_scaled;
  logic signed [6:0]  scale_s;

  always_comb begin
    tile_dot = '0;
    for (int l = 0; l < TILE_N; l++)
      tile_dot += 15'($signed(w_tile.q[l]) * $signed(x_tile[l]));
    scale_s     = $signed({1'b0, w_tile.scale}) - 7'sd32;
    tile_scaled = 21'(tile_dot * scale_s);
  end

  logic               s1_valid, s1_first, s1_last;
  logic signed [20:0] s1_scaled;
  fp32_t              s1_dprod;
  // stage 2
  logic signed [23:0] acc;
  logic               s2_valid;
  logic signed [23:0] s2_sum;
  fp32_t              s2_dprod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid   <= 1'b0;
      s1_first   <= 1'b0;
      s1_last    <= 1'b0;
      s1_scaled  <= '0;
      s1_dprod   <= '0;
      acc        <= '0;
      s2_valid   <= 1'b0;
      s2_sum     <= '0;
      s2_dprod   <= '0;
      out_valid  <= 1'b0;
      out_result <= '0;
    end else begin
      s1_valid  <= in_valid;
      s1_first  <= in_valid && in_first;
      s1_last   <= in_valid && in_last;
      s1_scaled <= tile_scaled;
      if (in_valid && in_first)
        s1_dprod <= fp32_mul(fp16_to_fp32(w_ssf), fp16_to_fp32(x_ssf));

      s2_valid <= s1_valid && s1_last;
      if (s1_valid) begin
        acc <= s1_first ? 24'(s1_scaled) : acc + 24'(s1_scaled);
        if (s1_last) begin
          s2_sum   <= s1_first ? 24'(s1_scaled) : acc + 24'(s1_scaled);
          s2_dprod <= s1_dprod;
        end
      end

      out_valid <= s2_valid;
      if (s2_valid) out_result <= fp32_mul(int_to_fp32(32'(s2_sum)), s2_dprod);
    end
  end
endmodule
