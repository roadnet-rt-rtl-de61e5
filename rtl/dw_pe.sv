// dw_pe - one depthwise process engine (one channel of the depthwise array).
//
// Nine INT8 multipliers work on the 3x3 patch of one channel and an adder tree
// sums the nine products, as in the depthwise module of RoadNet-RT: a
// multiplier array of length 9 followed by an adder tree.  The tree shape
// (four pair sums, two, one, then the ninth product) and the two pipeline
// registers are this implementation's choice.
//
// Interface: win/wgt are the patch and kernel, index k = 3*ky + kx.
// Timing: sum is valid (out_valid) two cycles after in_valid; one patch per cycle.
module dw_pe
  import rn_pkg::*;
#(
  parameter int ACC_BITS = ACC_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  q8_t [KTAPS-1:0]            win,
  input  q8_t [KTAPS-1:0]            wgt,
  output logic                       out_valid,
  output logic signed [ACC_BITS-1:0] sum
);

  logic signed [15:0] prod [KTAPS];
  logic               v1;

  always_ff @(posedge clk) begin
    for (int k = 0; k < KTAPS; k++) prod[k] <= win[k] * wgt[k];
  end

  // adder tree: 9 -> 5 -> 3 -> 2 -> 1
  logic signed [16:0] s0, s1, s2, s3;
  logic signed [17:0] t0, t1;
  logic signed [18:0] u0;
  logic signed [19:0] total;
  always_comb begin
    s0 = 17'(prod[0]) + 17'(prod[1]);
    s1 = 17'(prod[2]) + 17'(prod[3]);
    s2 = 17'(prod[4]) + 17'(prod[5]);
    s3 = 17'(prod[6]) + 17'(prod[7]);
    t0 = 18'(s0) + 18'(s1);
    t1 = 18'(s2) + 18'(s3);
    u0 = 19'(t0) + 19'(t1);
    total = 20'(u0) + 20'(prod[8]);
  end

  always_ff @(posedge clk) sum <= ACC_BITS'(total);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

endmodule
