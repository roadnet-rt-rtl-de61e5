// tb_weight_buffer - self-checking test of the weight_buffer memory at its full depth.
// Writes a pattern computed from the address to every word, reads all of it
// back (checking the one-cycle read latency), then overwrites random words
// while reading others and checks both.
module tb_weight_buffer;
  import rn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 0;
  logic [12:0] waddr = 0, raddr = 0;
  pix_t wdata, rdata;
  weight_buffer dut (.*);

  pix_t shadow [WB_WORDS];

  function automatic pix_t pat(int a, int salt);
    pix_t p;
    for (int i = 0; i < LANES; i++) p[i] = q8_t'(a * 7 + i * 13 + salt + (a >> 8));
    return p;
  endfunction

  initial begin
    for (int a = 0; a < WB_WORDS; a++) begin
      @(negedge clk); we = 1; waddr = 13'(a); wdata = pat(a, 0); shadow[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int a = 0; a < WB_WORDS; a++) begin
      @(negedge clk) raddr = 13'(a);
      @(negedge clk);
      checks++;
      if (rdata !== shadow[a]) begin failures++; $display("addr %0d wrong", a); end
    end
    for (int n = 0; n < 500; n++) begin
      int wa, ra;
      wa = $urandom_range(0, WB_WORDS - 1); ra = $urandom_range(0, WB_WORDS - 1);
      @(negedge clk);
      we = 1; waddr = 13'(wa); wdata = pat(wa, n + 1); raddr = 13'(ra);
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata !== shadow[ra]) begin failures++; $display("read %0d wrong", ra); end
      shadow[wa] = pat(wa, n + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
