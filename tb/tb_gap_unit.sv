// tb_gap_unit - self-checking test of global average pooling.
// Random maps of several sizes; each channel's output must equal the true
// mean of the channel rounded to nearest (within 1 LSB for the reciprocal
// approximation), must match the rounded reciprocal product bit-exactly,
// and arrive one cycle after finish.
module tb_gap_unit;
  import rn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, in_valid = 0, finish = 0, out_valid;
  pix_t in_pix, out_vec;
  logic [23:0] recip = 0;
  gap_unit dut (.*);

  task automatic run(int n, int bias);
    int sum [LANES];
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int c = 0; c < LANES; c++) sum[c] = 0;
    for (int i = 0; i < n; i++) begin
      in_valid = 1;
      for (int c = 0; c < LANES; c++) begin
        int v = $urandom_range(0, 255) - 128 + bias;
        if (v > 127) v = 127;
        if (v < -128) v = -128;
        in_pix[c] = q8_t'(v); sum[c] += v;
      end
      @(negedge clk);
    end
    in_valid = 0;
    recip = 24'($rtoi((2.0 ** 24) / n + 0.5));
    finish = 1;
    @(negedge clk) finish = 0;
    checks++;
    if (!out_valid) begin failures++; $display("no out_valid"); end
    for (int c = 0; c < LANES; c++) begin
      real m; int e; longint q;
      m = real'(sum[c]) / n;
      e = $rtoi(m >= 0 ? m + 0.5 : m - 0.5);
      // exact result of the reciprocal multiply, rounded to nearest
      q = (longint'(sum[c]) * longint'(recip) + (64'sd1 <<< 23)) >>> 24;
      checks++;
      if (int'(out_vec[c]) - e > 1 || e - int'(out_vec[c]) > 1 || longint'(out_vec[c]) != q) begin
        failures++; $display("n=%0d ch %0d got %0d exp %0d (mean %0d)", n, c, out_vec[c], q, e);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(7, 0);
    run(60, 40);
    run(120, -50);
    run(420, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
