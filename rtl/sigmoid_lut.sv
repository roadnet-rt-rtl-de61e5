// sigmoid_lut - look-up-table sigmoid of the attention paths, 32 lanes.
//
// The sigmoid is approximated by a piecewise-linear function stored in a
// 256-entry table, as the paper does; the pieces are not given there, so this
// implementation uses the PLAN segments:
//   |x| < 1       : 0.25 |x| + 0.5
//   1 <= |x| < 2.375  : 0.125 |x| + 0.625
//   2.375 <= |x| < 5  : 0.03125 |x| + 0.84375
//   |x| >= 5      : 1
// and 1 - f(|x|) for negative x.  Input: signed INT8 in Q3.4 (x = code/16).
// Output: unsigned 8 bits, sigmoid * 256 truncated, clipped to 255.  The
// table is computed at elaboration from these formulas.
// Timing: one vector per cycle, registered, latency one cycle.
module sigmoid_lut
  import rn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  pix_t       in_vec,
  output logic       out_valid,
  output logic [LANES-1:0][7:0] out_vec
);

  typedef logic [255:0][7:0] lut_t;

  function automatic logic [7:0] plan(input logic [7:0] code);
    int x, xa, y;
    x  = int'($signed(code));
    xa = (x < 0) ? -x : x;              // |x| * 16
    if (xa >= 80)      y = 256;         // 1.0
    else if (xa >= 38) y = xa / 2 + 216;
    else if (xa >= 16) y = 2 * xa + 160;
    else               y = 4 * xa + 128;
    if (x < 0) y = 256 - y;
    if (y > 255) y = 255;
    return 8'(y);
  endfunction

  function automatic lut_t build_lut();
    lut_t t;
    for (int i = 0; i < 256; i++) t[i] = plan(8'(i));
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  always_ff @(posedge clk) begin
    for (int j = 0; j < LANES; j++) out_vec[j] <= LUT[8'(in_vec[j])];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
