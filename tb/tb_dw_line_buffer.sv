// tb_dw_line_buffer - self-checking test of the depthwise line buffer.
// Streams a random H x W map (with its padding row and column) and compares
// every 3x3 patch, with zero border, against the map held in the testbench.
module tb_dw_line_buffer;
  import rn_pkg::*;
  localparam int H = 5, W = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, win_valid;
  logic [ROW_W-1:0] in_row = 0, win_row;
  logic [COL_W-1:0] in_col = 0, win_col;
  pix_t in_pix;
  q8_t [LANES-1:0][KTAPS-1:0] win;
  dw_line_buffer dut (.*);

  pix_t img [H][W];
  int n_win = 0;

  function automatic q8_t px(int r, int c, int ch);
    if (r < 0 || c < 0 || r >= H || c >= W) return q8_t'(0);
    return img[r][c][ch];
  endfunction

  initial begin
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++)
      for (int ch = 0; ch < LANES; ch++) img[r][c][ch] = q8_t'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++)
      for (int r = 0; r <= H; r++) for (int c = 0; c <= W; c++) begin
        @(negedge clk);
        in_valid = 1; in_row = ROW_W'(r); in_col = COL_W'(c);
        in_pix = (r < H && c < W) ? img[r][c] : '0;
        // first pass: junk on the padding row, so that the second pass finds
        // stale non-zero data above its row 0 and needs the top-border mask
        if (pass == 0 && r == H) for (int ch = 0; ch < LANES; ch++) in_pix[ch] = q8_t'($urandom_range(1, 255));
      end
    @(negedge clk) in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (n_win != 2 * H * W) begin failures++; $display("window count %0d", n_win); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && win_valid) begin
    int bad = 0;
    n_win++;
    for (int ch = 0; ch < LANES; ch++)
      for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++)
        if (win[ch][3*ky+kx] !== px(int'(win_row) + ky - 1, int'(win_col) + kx - 1, ch)) bad++;
    // first-pass windows that reach into the junk padding row are not checked
    if (n_win <= H * W && int'(win_row) == H - 1) bad = 0;
    checks++;
    if (bad != 0) begin failures++; $display("patch (%0d,%0d) %0d wrong", win_row, win_col, bad); end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
