// pw_pe - one pointwise process engine (one output channel).
//
// 32 INT8 multipliers take the 32 channels of an input vector and the 32
// weights of this output channel; an adder tree sums the products and a ReLU
// stage follows, as in the pointwise module of RoadNet-RT.  When batch
// normalisation sits after the ReLU it cannot be folded into the weights, and
// the paper adds one multiplier and one adder for it: bn_post enables that
// stage, y = sat((relu(x) * bn_scale) / 64 + bn_shift) with bn_scale in Q1.6.
// Accumulation over several 32-channel input tiles (in_first .. in_last), the
// rounding shift and the Q1.6 format are this implementation's choices.
//
// Timing: multiply, adder tree, accumulate and output are one register stage
// each; out_valid follows the in_last beat by 4 cycles.  One tile per cycle.
module pw_pe
  import rn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_first,
  input  logic       in_last,
  input  pix_t       vec,
  input  pix_t       wgt,
  input  logic       relu,
  input  logic       bn_post,
  input  logic [4:0] shift,
  input  q8_t        bn_scale,
  input  q8_t        bn_shift,
  output logic       out_valid,
  output q8_t        out
);

  logic signed [15:0]      prod [LANES];
  logic signed [ACC_W-1:0] tsum, acc;
  logic v1, f1, l1, v2, f2, l2, fin;

  always_ff @(posedge clk) begin
    for (int i = 0; i < LANES; i++) prod[i] <= vec[i] * wgt[i];
  end

  // pairwise adder tree, 32 -> 16 -> 8 -> 4 -> 2 -> 1
  logic signed [ACC_W-1:0] lvl [6][LANES];
  always_comb begin
    for (int i = 0; i < LANES; i++) lvl[0][i] = ACC_W'(prod[i]);
    for (int l = 1; l < 6; l++)
      for (int i = 0; i < LANES; i++)
        lvl[l][i] = (i < (LANES >> l)) ? lvl[l-1][2*i] + lvl[l-1][2*i+1] : '0;
  end

  always_ff @(posedge clk) begin
    tsum <= lvl[5][0];
    if (v2) acc <= f2 ? tsum : acc + tsum;
  end

  // output stage: requantise (+ReLU), then optional post-ReLU batch norm
  q8_t                r;
  logic signed [16:0] bn;
  always_comb begin
    r  = requant(acc, shift, relu || bn_post);
    bn = ((17'(r) * 17'(bn_scale) + 17'sd32) >>> 6) + 17'(bn_shift);
  end

  always_ff @(posedge clk) out <= bn_post ? sat8(20'(bn)) : r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, f1, l1, v2, f2, l2, fin, out_valid} <= '0;
    end else begin
      v1 <= in_valid; f1 <= in_first; l1 <= in_last;
      v2 <= v1;       f2 <= f1;       l2 <= l1;
      fin       <= v2 && l2;
      out_valid <= fin;
    end
  end

endmodule
