// roadnet_rt_top - RoadNet-RT CNN accelerator (programmable-logic part of the SoC).
//
// The accelerator runs every layer of the RoadNet-RT road segmentation network
// on INT8 data, 32 channels at a time.  It contains:
//   - a depthwise convolution module (line buffer, 32 x 9 multipliers, adder
//     trees) for the 3x3 depthwise layers,
//   - a pointwise convolution module (32 x 32 multipliers, adder trees, ReLU)
//     for 1x1 layers, also used for the 1x1 convolutions of the attention paths,
//   - global average pooling, a sigmoid look-up table and an element-wise unit
//     for the GAM / FFM attention blocks and residual adds,
//   - N_FMBUF feature map buffers of 35 x 120 x 32, a weight buffer and a
//     buffer for pooled vectors,
//   - a controller FSM that runs a layer program written by the processor.
// The processor (GP port) writes the program and the weights; feature maps
// move to and from DDR (HP port) through the ddr_* request/response ports.
// The AXI protocols of those ports, the processor and DDR are outside.
//
// Wiring (this implementation's choice): all feature map buffers share one
// read address and one write address; the controller picks the source
// buffer(s) of each beat (sel_a, sel_b) and the destination buffer.  On DW
// padding beats the engine input is forced to zero.
//
// Timing: one pixel (or one input tile of a pixel) per clock in every layer;
// see ctrl_fsm for the per-layer sequence.
//
// Lint notes: only some fields of the current descriptor are used here (the
// rest drive the controller itself), so the unused bits of `cur` are expected.
// rst_n is an asynchronous reset of the datapath registers and is also the
// disable condition of the controller's DDR handshake assertion; that
// simulation-only use is why rst_n is also seen as a synchronous signal.
module roadnet_rt_top
  import rn_pkg::*;
#(
  parameter int NBUF = N_FMBUF
) (
  input  logic             clk,
  input  logic             rst_n,
  // processor: layer program, weights, control
  input  logic             desc_we,
  input  logic [5:0]       desc_addr,
  input  desc_t            desc_wdata,
  input  logic             wb_we,
  input  logic [WB_AW-1:0] wb_waddr,
  input  pix_t             wb_wdata,
  input  logic             start,
  output logic             busy,
  output logic             done,
  // DDR: one 256-bit pixel word per request
  output logic             ddr_req_valid,
  input  logic             ddr_req_ready,
  output logic             ddr_req_we,
  output logic [31:0]      ddr_req_addr,
  output pix_t             ddr_req_wdata,
  input  logic             ddr_rsp_valid,
  input  pix_t             ddr_rsp_data
);

  desc_t            cur;
  logic [WB_AW-1:0] wb_raddr;
  pix_t             wb_rdata;
  logic             dw_wld_valid, pw_wld_valid;
  logic [3:0]       dw_wld_idx;
  logic [7:0]       pw_wld_idx;
  logic [FM_AW-1:0] fm_raddr, fm_waddr;
  logic [2:0]       fm_sel_a, fm_sel_b, fm_wsel;
  logic             fm_we;
  logic             eng_valid, eng_pad, eng_first, eng_last;
  logic [1:0]       eng_tile;
  logic [ROW_W-1:0] eng_row;
  logic [COL_W-1:0] eng_col;
  logic [2:0]       gp_raddr_a, gp_raddr_b, gp_waddr;
  logic             gp_we, gap_clear, gap_finish;
  logic             dw_out_valid, pw_out_valid, att_out_valid, gap_out_valid, sig_out_valid;
  pix_t             dw_out, pw_out, att_out, gap_out, gp_a, gp_b;
  logic [LANES-1:0][7:0] sig_out;

  ctrl_fsm u_ctrl (
    .clk, .rst_n, .desc_we, .desc_addr, .desc_wdata, .start, .busy, .done, .cur,
    .wb_raddr, .dw_wld_valid, .dw_wld_idx, .pw_wld_valid, .pw_wld_idx,
    .fm_raddr, .fm_sel_a, .fm_sel_b,
    .eng_valid, .eng_pad, .eng_first, .eng_last, .eng_tile, .eng_row, .eng_col,
    .gp_raddr_a, .gp_raddr_b,
    .dw_out_valid, .pw_out_valid, .att_out_valid, .gap_out_valid, .sig_out_valid,
    .fm_we, .fm_wsel, .fm_waddr, .gp_we, .gp_waddr, .gap_clear, .gap_finish,
    .ddr_req_valid, .ddr_req_ready, .ddr_req_we, .ddr_req_addr, .ddr_rsp_valid
  );

  // ------------------------------------------------------------ buffers
  pix_t fm_rdata [NBUF];
  pix_t fm_wdata;

  for (genvar i = 0; i < NBUF; i++) begin : g_fm
    fm_buffer u_fm (
      .clk, .we(fm_we && fm_wsel == 3'(i)), .waddr(fm_waddr), .wdata(fm_wdata),
      .raddr(fm_raddr), .rdata(fm_rdata[i])
    );
  end

  pix_t rd_a, rd_b;
  assign rd_a = fm_rdata[fm_sel_a];
  assign rd_b = fm_rdata[fm_sel_b];

  weight_buffer u_wb (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata), .raddr(wb_raddr), .rdata(wb_rdata)
  );

  pix_t gp_wdata;
  gp_buffer u_gp (
    .clk, .rst_n, .we(gp_we), .waddr(gp_waddr), .wdata(gp_wdata),
    .raddr_a(gp_raddr_a), .raddr_b(gp_raddr_b), .rdata_a(gp_a), .rdata_b(gp_b)
  );

  // ------------------------------------------------------------ engines
  dwconv_module u_dw (
    .clk, .rst_n, .wld_valid(dw_wld_valid), .wld_idx(dw_wld_idx), .wld_data(wb_rdata),
    .shift(cur.shift), .relu(cur.relu), .stride2(cur.stride2),
    .in_valid(eng_valid && cur.op == OP_DW), .in_row(eng_row), .in_col(eng_col),
    .in_pix(eng_pad ? '0 : rd_a),
    .out_valid(dw_out_valid), .out_pix(dw_out)
  );

  pwconv_module u_pw (
    .clk, .rst_n, .wld_valid(pw_wld_valid), .wld_idx(pw_wld_idx), .wld_data(wb_rdata),
    .relu(cur.relu), .bn_post(cur.bn_post), .shift(cur.shift),
    .in_valid(eng_valid && (cur.op == OP_PW || cur.op == OP_FC)),
    .in_first(eng_first), .in_last(eng_last), .in_tile(eng_tile),
    .in_vec(cur.op == OP_FC ? gp_a : rd_a),
    .out_valid(pw_out_valid), .out_vec(pw_out)
  );

  gap_unit u_gap (
    .clk, .rst_n, .clear(gap_clear), .in_valid(eng_valid && cur.op == OP_GAP), .in_pix(rd_a),
    .finish(gap_finish), .recip(cur.recip), .out_valid(gap_out_valid), .out_vec(gap_out)
  );

  sigmoid_lut u_sig (
    .clk, .rst_n, .in_valid(eng_valid && cur.op == OP_SIG), .in_vec(gp_a),
    .out_valid(sig_out_valid), .out_vec(sig_out)
  );

  att_mode_e att_mode;
  always_comb begin
    unique case (cur.op)
      OP_MUL:    att_mode = ATT_MUL;
      OP_MULADD: att_mode = ATT_MULADD;
      default:   att_mode = ATT_ADD;
    endcase
  end

  att_unit u_att (
    .clk, .rst_n, .mode(att_mode),
    .in_valid(eng_valid && cur.op inside {OP_MUL, OP_MULADD, OP_ADD}),
    .a(rd_a), .b(rd_b), .att(gp_b),
    .out_valid(att_out_valid), .out_pix(att_out)
  );

  // ------------------------------------------------------------ write-back
  always_comb begin
    unique case (cur.op)
      OP_LOAD: fm_wdata = ddr_rsp_data;
      OP_DW:   fm_wdata = dw_out;
      OP_PW:   fm_wdata = pw_out;
      default: fm_wdata = att_out;
    endcase
    unique case (cur.op)
      OP_GAP:  gp_wdata = gap_out;
      OP_SIG:  gp_wdata = sig_out;
      default: gp_wdata = pw_out;
    endcase
  end

  assign ddr_req_wdata = rd_a;

endmodule
