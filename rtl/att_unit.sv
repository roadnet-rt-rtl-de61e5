// att_unit - element-wise unit for attention and residual connections.
//
// Applies a per-channel attention vector to a feature map or adds two maps,
// 32 channels per cycle:
//   ATT_MUL    : y = a * att / 256          (GAM: features times attention)
//   ATT_MULADD : y = a + a * att / 256      (FFM: features plus attended features)
//   ATT_ADD    : y = a + b                  (residual add of a ResNet layer)
// att is unsigned, 1/256 units (the sigmoid_lut output).  Products are
// rounded to nearest, results saturated to INT8.  The paper shows these
// multiplications and additions in its GAM and FFM diagrams but not their
// hardware; one registered stage of 32 multipliers and adders is this
// implementation's choice.  Timing: one pixel per cycle, latency one cycle.
module att_unit
  import rn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  att_mode_e  mode,
  input  logic       in_valid,
  input  pix_t       a,
  input  pix_t       b,
  input  logic [LANES-1:0][7:0] att,
  output logic       out_valid,
  output pix_t       out_pix
);

  logic signed [19:0] r [LANES];
  always_comb begin
    for (int c = 0; c < LANES; c++) begin
      logic signed [19:0] m;
      m = (20'(a[c]) * $signed({12'd0, att[c]}) + 20'sd128) >>> 8;
      unique case (mode)
        ATT_MUL:    r[c] = m;
        ATT_MULADD: r[c] = 20'(a[c]) + m;
        default:    r[c] = 20'(a[c]) + 20'(b[c]);
      endcase
    end
  end

  always_ff @(posedge clk) begin
    for (int c = 0; c < LANES; c++) out_pix[c] <= sat8(r[c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
