// pwconv_module - pointwise (1x1) convolution module of the RoadNet-RT accelerator.
//
// 32 pointwise engines share one 32-channel input vector; engine j holds the
// weight row of output channel j, so each cycle the module computes a 32x1
// vector times 32x32 matrix product, the operation the paper sizes this
// module for.  It also executes the 1x1 convolutions on pooled vectors of the
// GAM and FFM attention paths, which the paper allows to be routed into this
// module.
//
// Weight registers: rows tile*32 + j (j = output channel) for up to MAX_TILES
// input tiles, then row MAX_TILES*32 = batch-norm scales, row MAX_TILES*32+1 =
// batch-norm shifts (lane j = output channel j).  Load them with wld_* before
// streaming.  Stream: for each output pixel send its input tiles 0..n-1 on
// consecutive beats with in_tile, in_first on tile 0, in_last on tile n-1.
// Timing: out_valid/out_vec follow the in_last beat by 4 cycles.  Holding
// several tiles' weights at once (MAX_TILES) is this implementation's choice.
module pwconv_module
  import rn_pkg::*;
#(
  parameter int NT = MAX_TILES
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wld_valid,
  input  logic [7:0] wld_idx,
  input  pix_t       wld_data,
  input  logic       relu,
  input  logic       bn_post,
  input  logic [4:0] shift,
  input  logic       in_valid,
  input  logic       in_first,
  input  logic       in_last,
  input  logic [1:0] in_tile,
  input  pix_t       in_vec,
  output logic       out_valid,
  output pix_t       out_vec
);

  localparam int NROWS  = NT * LANES + 2;
  localparam int BN_ROW = NT * LANES;

  pix_t wrow [NROWS];
  always_ff @(posedge clk) begin
    if (wld_valid && int'(wld_idx) < NROWS) wrow[wld_idx] <= wld_data;
  end

  logic pe_valid [LANES];
  for (genvar j = 0; j < LANES; j++) begin : g_pe
    pix_t w;
    assign w = wrow[int'(in_tile) * LANES + j];
    pw_pe u_pe (
      .clk, .rst_n, .in_valid, .in_first, .in_last,
      .vec(in_vec), .wgt(w), .relu, .bn_post, .shift,
      .bn_scale(wrow[BN_ROW][j]), .bn_shift(wrow[BN_ROW+1][j]),
      .out_valid(pe_valid[j]), .out(out_vec[j])
    );
  end

  assign out_valid = pe_valid[0];

endmodule
