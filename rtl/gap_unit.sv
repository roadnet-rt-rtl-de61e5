// gap_unit - global average pooling for the GAM and FFM attention paths.
//
// Each of the 32 channels has an accumulator that sums the channel over the
// whole feature map and one multiplier that scales the sum by the reciprocal of
// the pixel count, as the paper describes ("an accumulator plus one multiplier
// for each channel").  The reciprocal is given as a 24-bit fraction,
// recip = round(2^24 / (H*W)); the result is rounded to nearest and saturated
// to INT8 (formats chosen by this implementation).
//
// Interface/timing: pulse clear before a map, present its pixels with
// in_valid (one per cycle), then pulse finish; out_vec is valid with out_valid
// one cycle after finish.
module gap_unit
  import rn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  pix_t        in_pix,
  input  logic        finish,
  input  logic [23:0] recip,
  output logic        out_valid,
  output pix_t        out_vec
);

  logic signed [ACC_W-1:0] acc [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < LANES; c++) acc[c] <= '0;
    end else if (clear) begin
      for (int c = 0; c < LANES; c++) acc[c] <= '0;
    end else if (in_valid) begin
      for (int c = 0; c < LANES; c++) acc[c] <= acc[c] + ACC_W'(in_pix[c]);
    end
  end

  logic signed [ACC_W+24:0] prod [LANES];
  logic signed [ACC_W+1:0]  avg  [LANES];
  always_comb begin
    for (int c = 0; c < LANES; c++) begin
      prod[c] = (ACC_W+25)'(acc[c]) * $signed({1'b0, recip});
      avg[c]  = (ACC_W+2)'((prod[c] + (ACC_W+25)'(1 << 23)) >>> 24);
    end
  end

  always_ff @(posedge clk) begin
    if (finish)
      for (int c = 0; c < LANES; c++)
        out_vec[c] <= (avg[c] > 127) ? q8_t'(127) : (avg[c] < -128) ? q8_t'(-128) : q8_t'(avg[c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= finish;
  end

endmodule
