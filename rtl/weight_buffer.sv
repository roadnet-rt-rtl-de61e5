// weight_buffer - on-chip memory holding all INT8 weights of the network.
//
// 4200 words of 32 weights each, enough for the 133,870 weights of the
// depthwise-separable RoadNet-RT.  The original design hard-codes the trained
// weights into on-chip memory; here the memory has a write port through which
// the processor loads them, since the trained values are not part of the RTL.
// Word layout per layer: depthwise = 9 words (one per tap, lane = channel);
// pointwise = 32 words per input tile (word j = weights of output channel j),
// then scale and shift words when batch norm follows the ReLU.
// Timing: synchronous read, rdata valid the cycle after raddr.
module weight_buffer
  import rn_pkg::*;
#(
  parameter int WORDS = WB_WORDS,
  parameter int AW    = WB_AW
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  pix_t          wdata,
  input  logic [AW-1:0] raddr,
  output pix_t          rdata
);

  pix_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < WORDS) mem[waddr] <= wdata;
    rdata <= mem[(int'(raddr) < WORDS) ? raddr : '0];
  end

endmodule
