// tb_dwconv_module - self-checking test of the depthwise convolution module.
// Loads random 3x3 kernels for 32 channels, streams random maps with
// stride 1 and stride 2, with and without ReLU, and compares every output
// with a reference convolution (zero padding, rounding shift, saturation).
// Rate: one grid beat per cycle; the last output must follow the last beat
// by 4 cycles.
module tb_dwconv_module;
  import rn_pkg::*;
  localparam int H = 6, W = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic wld_valid = 0; logic [3:0] wld_idx = 0; pix_t wld_data;
  logic [4:0] shift = 0; logic relu = 0, stride2 = 0;
  logic in_valid = 0; logic [ROW_W-1:0] in_row = 0; logic [COL_W-1:0] in_col = 0; pix_t in_pix;
  logic out_valid; pix_t out_pix;
  dwconv_module dut (.*);

  pix_t img [H][W];
  pix_t kw [KTAPS];
  pix_t exp_q[$];
  int last_in, last_out;

  function automatic int px(int r, int c, int ch);
    if (r < 0 || c < 0 || r >= H || c >= W) return 0;
    return int'(img[r][c][ch]);
  endfunction

  function automatic q8_t ref_q(int acc, int sh, bit rl);
    int v;
    v = (sh == 0) ? acc : ((acc + (1 << (sh - 1))) >>> sh);
    if (rl && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return q8_t'(v);
  endfunction

  task automatic run(int sh, bit rl, bit s2);
    shift = 5'(sh); relu = rl; stride2 = s2;
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++)
      for (int ch = 0; ch < LANES; ch++) img[r][c][ch] = q8_t'($urandom);
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
      pix_t e;
      if (s2 && (r % 2 != 0 || c % 2 != 0)) continue;
      for (int ch = 0; ch < LANES; ch++) begin
        int acc = 0;
        for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++)
          acc += px(r + ky - 1, c + kx - 1, ch) * int'(kw[3*ky+kx][ch]);
        e[ch] = ref_q(acc, sh, rl);
      end
      exp_q.push_back(e);
    end
    for (int r = 0; r <= H; r++) for (int c = 0; c <= W; c++) begin
      @(negedge clk);
      in_valid = 1; in_row = ROW_W'(r); in_col = COL_W'(c);
      in_pix = (r < H && c < W) ? img[r][c] : '0;
    end
    last_in = cyc;
    @(negedge clk) in_valid = 0;
    repeat (8) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing %0d outputs", exp_q.size()); exp_q.delete(); end
    if (!s2) checks++;
    if (!s2 && last_out - last_in != 4) begin failures++; $display("latency %0d", last_out - last_in); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < KTAPS; k++) begin
      for (int ch = 0; ch < LANES; ch++) kw[k][ch] = q8_t'($urandom);
      @(negedge clk); wld_valid = 1; wld_idx = 4'(k); wld_data = kw[k];
    end
    @(negedge clk) wld_valid = 0;
    run(7, 0, 0);
    run(8, 1, 0);
    run(6, 0, 1);
    run(0, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    pix_t e;
    checks++;
    last_out = cyc;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_q.pop_front();
      if (out_pix !== e) begin failures++; $display("mismatch %h vs %h", out_pix, e); end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
