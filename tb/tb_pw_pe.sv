// tb_pw_pe - self-checking test of one pointwise process engine.
// Random pixels of 1 to 4 input tiles with random weights; checks the
// accumulated, re-quantised result with and without ReLU and with batch norm
// after ReLU, and the 4-cycle latency from the last tile.
module tb_pw_pe;
  import rn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic in_valid = 0, in_first = 0, in_last = 0, relu = 0, bn_post = 0, out_valid;
  pix_t vec, wgt;
  logic [4:0] shift = 0;
  q8_t bn_scale = 0, bn_shift = 0, out;
  pw_pe dut (.*);

  int exp_q[$], tim_q[$];

  function automatic int ref_q(int acc, int sh, bit rl);
    int v;
    v = (sh == 0) ? acc : ((acc + (1 << (sh - 1))) >>> sh);
    if (rl && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 3; mode++) begin
      @(negedge clk);
      relu = (mode == 1); bn_post = (mode == 2);
      shift = 5'(6 + mode); bn_scale = q8_t'($urandom_range(0, 127) - 64); bn_shift = q8_t'($urandom);
      for (int n = 0; n < 40; n++) begin
        int nt, acc, e;
        nt = $urandom_range(1, 4);
        acc = 0;
        for (int t = 0; t < nt; t++) begin
          @(negedge clk);
          in_valid = 1; in_first = (t == 0); in_last = (t == nt - 1);
          for (int i = 0; i < LANES; i++) begin
            vec[i] = q8_t'($urandom); wgt[i] = q8_t'($urandom);
            acc += int'(vec[i]) * int'(wgt[i]);
          end
        end
        e = ref_q(acc, 6 + mode, mode != 0);
        if (mode == 2) begin
          e = ((e * int'(bn_scale) + 32) >>> 6) + int'(bn_shift);
          if (e > 127) e = 127;
          if (e < -128) e = -128;
        end
        exp_q.push_back(e); tim_q.push_back(cyc);
      end
      @(negedge clk) in_valid = 0;
      repeat (6) @(posedge clk);
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int e, t0;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_q.pop_front(); t0 = tim_q.pop_front();
      if (int'(out) != e || cyc - t0 != 4) begin
        failures++; $display("got %0d exp %0d latency %0d", out, e, cyc - t0);
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
