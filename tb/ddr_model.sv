// ddr_model - behavioural model of the external DDR memory behind the HP port.
// Not synthesizable logic: a testbench memory of 256-bit words with a
// request/response port.  Requests are accepted with a random ready (about one
// cycle in four stalled, to exercise back-pressure); read data returns in
// order LAT cycles after acceptance.  Writes need no response.
module ddr_model
  import rn_pkg::*;
#(
  parameter int WORDS = 16384,
  parameter int LAT   = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  logic [31:0] req_addr,
  input  pix_t        req_wdata,
  output logic        rsp_valid,
  output pix_t        rsp_data
);
  pix_t mem [WORDS];
  logic [LAT-1:0] vpipe;
  pix_t dpipe [LAT];
  int stalls = 0;

  always @(posedge clk) req_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else begin
      vpipe[0] <= req_valid && req_ready && !req_we;
      for (int i = 1; i < LAT; i++) vpipe[i] <= vpipe[i-1];
    end
  end

  always @(posedge clk) begin
    if (req_valid && req_ready && req_we) mem[req_addr % WORDS] <= req_wdata;
    dpipe[0] <= mem[req_addr % WORDS];
    for (int i = 1; i < LAT; i++) dpipe[i] <= dpipe[i-1];
    if (req_valid && !req_ready) stalls++;
  end

  assign rsp_valid = vpipe[LAT-1];
  assign rsp_data  = dpipe[LAT-1];
endmodule
