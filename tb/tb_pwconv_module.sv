// tb_pwconv_module - self-checking test of the pointwise convolution module.
// Loads a random weight matrix for 2 input tiles (64 -> 32 channels) and
// batch-norm rows, streams random pixels and compares each 32-channel output
// with a vector-matrix product in the testbench.  Also a 1-tile run with
// ReLU, which must deliver one output per cycle back to back.
module tb_pwconv_module;
  import rn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic wld_valid = 0; logic [7:0] wld_idx = 0; pix_t wld_data;
  logic relu = 0, bn_post = 0; logic [4:0] shift = 0;
  logic in_valid = 0, in_first = 0, in_last = 0; logic [1:0] in_tile = 0; pix_t in_vec;
  logic out_valid; pix_t out_vec;
  pwconv_module dut (.*);

  pix_t wr [MAX_TILES*LANES+2];
  pix_t exp_q[$];
  int n_out = 0, first_out = -1, last_out = 0;

  function automatic int ref_q(int acc, int sh, bit rl);
    int v;
    v = (sh == 0) ? acc : ((acc + (1 << (sh - 1))) >>> sh);
    if (rl && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  task automatic run(int nt, int npix, int sh, bit rl, bit bn);
    @(negedge clk);
    relu = rl; bn_post = bn; shift = 5'(sh);
    for (int n = 0; n < npix; n++) begin
      pix_t x [MAX_TILES];
      pix_t e;
      for (int t = 0; t < nt; t++) for (int i = 0; i < LANES; i++) x[t][i] = q8_t'($urandom);
      for (int j = 0; j < LANES; j++) begin
        int acc = 0, v;
        for (int t = 0; t < nt; t++) for (int i = 0; i < LANES; i++)
          acc += int'(x[t][i]) * int'(wr[t*LANES+j][i]);
        v = ref_q(acc, sh, rl || bn);
        if (bn) begin
          v = ((v * int'(wr[MAX_TILES*LANES][j]) + 32) >>> 6) + int'(wr[MAX_TILES*LANES+1][j]);
          if (v > 127) v = 127;
          if (v < -128) v = -128;
        end
        e[j] = q8_t'(v);
      end
      exp_q.push_back(e);
      for (int t = 0; t < nt; t++) begin
        in_valid = 1; in_first = (t == 0); in_last = (t == nt - 1); in_tile = 2'(t); in_vec = x[t];
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (8) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); exp_q.delete(); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < MAX_TILES*LANES+2; r++) begin
      for (int i = 0; i < LANES; i++)
        wr[r][i] = (r == MAX_TILES*LANES) ? q8_t'($urandom_range(0, 127) - 64) : q8_t'($urandom);
      @(negedge clk); wld_valid = 1; wld_idx = 8'(r); wld_data = wr[r];
    end
    @(negedge clk) wld_valid = 0;
    run(2, 20, 9, 0, 1);
    run(4, 10, 10, 1, 0);
    n_out = 0; first_out = -1;
    run(1, 30, 8, 1, 0);
    checks++;
    if (n_out != 30 || last_out - first_out != 29) begin
      failures++; $display("rate: %0d outputs in %0d cycles", n_out, last_out - first_out + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    pix_t e;
    checks++; n_out++; last_out = cyc;
    if (first_out < 0) first_out = cyc;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_q.pop_front();
      if (out_vec !== e) begin failures++; $display("mismatch %h vs %h", out_vec, e); end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
