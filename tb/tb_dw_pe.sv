// tb_dw_pe - self-checking test of one depthwise process engine.
// Random 3x3 patches and kernels, one per cycle; each sum is compared with a
// dot product computed in the testbench, and the latency must be 2 cycles.
module tb_dw_pe;
  import rn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic in_valid = 0, out_valid;
  q8_t [KTAPS-1:0] win, wgt;
  logic signed [ACC_W-1:0] sum;
  dw_pe dut (.*);

  int exp_q[$], tim_q[$];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int e;
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      e = 0;
      for (int k = 0; k < KTAPS; k++) begin
        win[k] = (n < 4) ? q8_t'(-128) : q8_t'($urandom);
        wgt[k] = (n < 4) ? q8_t'(-128) : q8_t'($urandom);
        e += int'(win[k]) * int'(wgt[k]);
      end
      if (in_valid) begin exp_q.push_back(e); tim_q.push_back(cyc); end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs %0d", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int e, t0;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_q.pop_front(); t0 = tim_q.pop_front();
      if (sum !== e || cyc - t0 != 2) begin
        failures++;
        $display("mismatch got %0d exp %0d latency %0d", sum, e, cyc - t0);
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
