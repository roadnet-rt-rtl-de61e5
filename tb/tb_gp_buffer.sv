// tb_gp_buffer - self-checking test of the pooled-vector buffer.
// Checks reset to zero, then random writes against a shadow copy through
// both read ports.
module tb_gp_buffer;
  import rn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 0;
  logic [2:0] waddr = 0, raddr_a = 0, raddr_b = 0;
  pix_t wdata, rdata_a, rdata_b;
  gp_buffer dut (.*);
  pix_t shadow [GP_WORDS];

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < GP_WORDS; i++) begin
      shadow[i] = '0;
      #1 raddr_a = 3'(i);
      #1 checks++;
      if (rdata_a !== '0) begin failures++; $display("word %0d not reset", i); end
    end
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = 3'($urandom); wdata = pix_t'({8{$urandom}});
      raddr_a = 3'($urandom); raddr_b = 3'($urandom);
      #1 checks++;
      if (rdata_a !== shadow[raddr_a] || rdata_b !== shadow[raddr_b]) begin failures++; $display("read mismatch"); end
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
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
