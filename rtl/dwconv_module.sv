// dwconv_module - depthwise convolution module of the RoadNet-RT accelerator.
//
// A line buffer builds 3x3 patches of all 32 channels of a pixel, 32 depthwise
// process engines (nine multipliers and an adder tree each) compute the 32
// channel results in parallel, and an output stage re-quantises them to INT8.
// This is the structure of the paper's depthwise module (line buffer,
// multiplier arrays of 9, adder trees, 32 in parallel).  The output stage
// (round-to-nearest shift, optional ReLU, saturation), the optional stride-2
// decimation and the weight registers are this implementation's choices.
// There is no bias: batch normalisation is folded into the weights offline.
//
// Interface: load the nine kernel taps first (wld_valid, wld_idx = tap
// 3*ky+kx, wld_data = that tap for the 32 channels), then stream the padded
// grid (see dw_line_buffer).  out_valid/out_pix deliver the output pixels in
// raster order; with stride2 only even rows and even columns are kept.
// Timing: one grid beat per cycle; an output follows its last needed input
// beat by 4 cycles.
module dwconv_module
  import rn_pkg::*;
#(
  parameter int MAX_W = FM_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // weight load
  input  logic             wld_valid,
  input  logic [3:0]       wld_idx,
  input  pix_t             wld_data,
  // layer controls, constant during a layer
  input  logic [4:0]       shift,
  input  logic             relu,
  input  logic             stride2,
  // input stream
  input  logic             in_valid,
  input  logic [ROW_W-1:0] in_row,
  input  logic [COL_W-1:0] in_col,
  input  pix_t             in_pix,
  // output stream
  output logic             out_valid,
  output pix_t             out_pix
);

  pix_t wgt [KTAPS];
  always_ff @(posedge clk) begin
    if (wld_valid && wld_idx < 4'(KTAPS)) wgt[wld_idx] <= wld_data;
  end

  logic                        win_valid;
  logic [ROW_W-1:0]            win_row;
  logic [COL_W-1:0]            win_col;
  q8_t  [LANES-1:0][KTAPS-1:0] win;

  dw_line_buffer #(.MAX_W(MAX_W)) u_lb (
    .clk, .rst_n, .in_valid, .in_row, .in_col, .in_pix,
    .win_valid, .win_row, .win_col, .win
  );

  logic                    pe_valid [LANES];
  logic signed [ACC_W-1:0] pe_sum   [LANES];

  for (genvar ch = 0; ch < LANES; ch++) begin : g_pe
    q8_t [KTAPS-1:0] kw;
    always_comb for (int k = 0; k < KTAPS; k++) kw[k] = wgt[k][ch];
    dw_pe u_pe (
      .clk, .rst_n, .in_valid(win_valid), .win(win[ch]), .wgt(kw),
      .out_valid(pe_valid[ch]), .sum(pe_sum[ch])
    );
  end

  // centre position travels with the PE pipeline (2 stages)
  logic [ROW_W-1:0] row_d [2];
  logic [COL_W-1:0] col_d [2];
  always_ff @(posedge clk) begin
    row_d[0] <= win_row; col_d[0] <= win_col;
    row_d[1] <= row_d[0]; col_d[1] <= col_d[0];
  end

  logic keep;
  assign keep = !stride2 || (!row_d[1][0] && !col_d[1][0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= pe_valid[0] && keep;
  end

  always_ff @(posedge clk) begin
    for (int ch = 0; ch < LANES; ch++) out_pix[ch] <= requant(pe_sum[ch], shift, relu);
  end

endmodule
