// tb_sigmoid_lut - self-checking test of the sigmoid look-up table.
// All 256 input codes are applied (32 per cycle).  Each output must match the
// piecewise-linear (PLAN) sigmoid evaluated in real arithmetic within 1 LSB,
// and the true sigmoid within 6 LSB (2.3 %).  Latency one cycle.
module tb_sigmoid_lut;
  import rn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  pix_t in_vec;
  logic [LANES-1:0][7:0] out_vec;
  sigmoid_lut dut (.*);

  function automatic real plan_r(real x);
    real a, y;
    a = (x < 0) ? -x : x;
    if (a >= 5.0)        y = 1.0;
    else if (a >= 2.375) y = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   y = 0.125 * a + 0.625;
    else                 y = 0.25 * a + 0.5;
    return (x < 0) ? 1.0 - y : y;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 256 / LANES; blk++) begin
      @(negedge clk);
      in_valid = 1;
      for (int j = 0; j < LANES; j++) in_vec[j] = q8_t'(blk * LANES + j);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      for (int j = 0; j < LANES; j++) begin
        real x, p, s; int got;
        x = real'(int'(q8_t'(blk * LANES + j))) / 16.0;
        p = plan_r(x) * 256.0; if (p > 255.0) p = 255.0;
        s = 256.0 / (1.0 + $exp(-x));
        got = int'(out_vec[j]);
        checks++;
        if (real'(got) - p > 1.0 || p - real'(got) > 1.0 || real'(got) - s > 6.0 || s - real'(got) > 6.0) begin
          failures++; $display("x=%f got %0d plan %f sig %f", x, got, p, s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
