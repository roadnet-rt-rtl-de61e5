// dw_line_buffer - line buffer and 3x3 window generator of the depthwise module.
//
// Pixels (32 channels each) arrive in raster order over a padded grid of
// (H+1) rows x (W+1) columns: the last row and the last column are padding
// beats that carry zeros.  Two line memories hold the two previous rows and a
// three-column window register holds the current 3x3 patch, matching the two
// line boxes and three small boxes drawn for the line buffer of the depthwise
// module.  The padding scheme ("same" convolution, zero border) is this
// implementation's choice.
//
// Interface: in_row/in_col give the grid position of each beat.  After the beat
// at (r, c) with r >= 1 and c >= 1, the patch centred on (r-1, c-1) is
// presented one cycle later with win_valid, win_row/win_col = its centre.  The
// top row (when the centre row is 0) and the left column (centre column 0)
// are masked to zero; the bottom row and right column come from the padding
// beats.  Timing: one beat per cycle, no back-pressure, latency one cycle.
module dw_line_buffer
  import rn_pkg::*;
#(
  parameter int MAX_W = FM_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [ROW_W-1:0]      in_row,
  input  logic [COL_W-1:0]      in_col,
  input  pix_t                  in_pix,
  output logic                  win_valid,
  output logic [ROW_W-1:0]      win_row,
  output logic [COL_W-1:0]      win_col,
  output q8_t [LANES-1:0][KTAPS-1:0] win
);

  pix_t lb0 [MAX_W+1];       // row r-1
  pix_t lb1 [MAX_W+1];       // row r-2
  pix_t wr  [3][3];          // [ky][kx] window registers, kx = 2 is newest column

  pix_t top, mid;
  assign top = lb1[in_col];
  assign mid = lb0[in_col];

  always_ff @(posedge clk) begin
    if (in_valid) begin
      lb1[in_col] <= mid;
      lb0[in_col] <= in_pix;
      for (int ky = 0; ky < 3; ky++) begin
        wr[ky][0] <= wr[ky][1];
        wr[ky][1] <= wr[ky][2];
      end
      wr[0][2] <= top;
      wr[1][2] <= mid;
      wr[2][2] <= in_pix;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_valid <= 1'b0;
      win_row   <= '0;
      win_col   <= '0;
    end else begin
      win_valid <= in_valid && (in_row != '0) && (in_col != '0);
      win_row   <= in_row - ROW_W'(1);
      win_col   <= in_col - COL_W'(1);
    end
  end

  // border masking of the registered window
  always_comb begin
    for (int ch = 0; ch < LANES; ch++)
      for (int ky = 0; ky < 3; ky++)
        for (int kx = 0; kx < 3; kx++)
          win[ch][3*ky+kx] = ((ky == 0 && win_row == '0) || (kx == 0 && win_col == '0))
                             ? q8_t'(0) : wr[ky][kx][ch];
  end

endmodule
