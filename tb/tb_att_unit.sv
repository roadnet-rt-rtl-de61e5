// tb_att_unit - self-checking test of the element-wise attention/residual unit.
// Random pixels and attention vectors in all three modes, compared with the
// formulas y = a*s/256, y = a + a*s/256 and y = a + b (rounded, saturated).
module tb_att_unit;
  import rn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  att_mode_e mode = ATT_MUL;
  logic in_valid = 0, out_valid;
  pix_t a, b, out_pix;
  logic [LANES-1:0][7:0] att;
  att_unit dut (.*);

  function automatic int sat(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      int e [LANES];
      @(negedge clk);
      mode = att_mode_e'(n % 3); in_valid = 1;
      for (int c = 0; c < LANES; c++) begin
        int m;
        a[c] = q8_t'($urandom); b[c] = q8_t'($urandom); att[c] = 8'($urandom);
        m = (int'(a[c]) * int'(att[c]) + 128) >>> 8;
        e[c] = (n % 3 == 0) ? sat(m) : (n % 3 == 1) ? sat(int'(a[c]) + m) : sat(int'(a[c]) + int'(b[c]));
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      for (int c = 0; c < LANES; c++) begin
        checks++;
        if (int'(out_pix[c]) != e[c]) begin failures++; $display("mode %0d got %0d exp %0d", n % 3, out_pix[c], e[c]); end
      end
    end
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
