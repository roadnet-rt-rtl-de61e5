// gp_buffer - buffer for global pooling results and attention vectors.
//
// Eight 32-channel words: pooled vectors of GAP, outputs of the 1x1
// convolutions on them and sigmoid attention vectors.  The paper names a
// separate on-chip buffer for global pooling results; its size and ports are
// this implementation's choice.  Registers reset to zero, one write port, two
// combinational read ports.
module gp_buffer
  import rn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       we,
  input  logic [2:0] waddr,
  input  pix_t       wdata,
  input  logic [2:0] raddr_a,
  input  logic [2:0] raddr_b,
  output pix_t       rdata_a,
  output pix_t       rdata_b
);

  pix_t regs [GP_WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < GP_WORDS; i++) regs[i] <= '0;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata_a = regs[raddr_a];
  assign rdata_b = regs[raddr_b];

endmodule
