// fm_buffer - one on-chip feature map buffer: 35 x 120 pixels x 32 INT8 channels.
//
// The accelerator keeps intermediate feature maps on chip in eight such
// buffers used as ping-pong buffers, so that few maps travel to DDR.  One
// 256-bit word holds the 32 channels of one pixel at address row*W + col (a
// layout chosen by this implementation).  Simple dual-port RAM: one write
// port, one synchronous read port (rdata valid the cycle after raddr).
// Contents are not reset.
module fm_buffer
  import rn_pkg::*;
#(
  parameter int DEPTH = FM_DEPTH,
  parameter int AW    = FM_AW
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  pix_t          wdata,
  input  logic [AW-1:0] raddr,
  output pix_t          rdata
);

  pix_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < DEPTH) mem[waddr] <= wdata;
    rdata <= mem[(int'(raddr) < DEPTH) ? raddr : '0];
  end

endmodule
