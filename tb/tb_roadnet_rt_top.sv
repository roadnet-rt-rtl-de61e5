// tb_roadnet_rt_top - end-to-end test of the accelerator at its default size.
//
// A behavioural DDR (random back-pressure) holds the input maps.  The test
// loads random weights through the weight port, writes a layer program and
// runs it.  The program is a small slice of RoadNet-RT: a depthwise layer, a
// two-tile (64 -> 32) pointwise layer, a pointwise layer with batch norm after
// ReLU, a stride-2 depthwise layer, a GAM/FFM attention path (global pooling,
// two 1x1 convolutions, sigmoid, multiply, multiply-add), a residual add, and
// finally a full 35 x 120 depthwise layer on a whole feature map buffer.
// Results stored back to DDR are compared with a reference model written
// directly from the layer formulas.  Every mechanism (padding beats, stride 2,
// tile accumulation, post-ReLU batch norm, each attention operation, DDR
// stalls) is counted and must occur.  The full-size depthwise layer must
// take one cycle per padded-grid beat plus a fixed overhead.
module tb_roadnet_rt_top;
  import rn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic desc_we = 0; logic [5:0] desc_addr = 0; desc_t desc_wdata = '0;
  logic wb_we = 0; logic [WB_AW-1:0] wb_waddr = 0; pix_t wb_wdata = '0;
  logic start = 0, busy, done;
  logic ddr_req_valid, ddr_req_ready, ddr_req_we, ddr_rsp_valid;
  logic [31:0] ddr_req_addr;
  pix_t ddr_req_wdata, ddr_rsp_data;

  roadnet_rt_top dut (.*);

  ddr_model #(.WORDS(16384), .LAT(3)) ddr (
    .clk, .rst_n, .req_valid(ddr_req_valid), .req_ready(ddr_req_ready), .req_we(ddr_req_we),
    .req_addr(ddr_req_addr), .req_wdata(ddr_req_wdata), .rsp_valid(ddr_rsp_valid), .rsp_data(ddr_rsp_data)
  );

  localparam int H = 6, W = 10;
  typedef pix_t map_t [FM_DEPTH];
  pix_t wbm [WB_WORDS];         // weight image
  int   n_prog = 0;

  // ------------------------------------------------------------ reference
  function automatic q8_t rq(longint acc, int sh, bit rl);
    longint v;
    v = (sh == 0) ? acc : ((acc + (longint'(1) << (sh - 1))) >>> sh);
    if (rl && v < 0) v = 0;
    return q8_t'((v > 127) ? 127 : (v < -128) ? -128 : v);
  endfunction
  function automatic q8_t st(int v);
    return q8_t'((v > 127) ? 127 : (v < -128) ? -128 : v);
  endfunction

  function automatic void ref_dw(ref map_t src, ref map_t dst, input int h, w, wb, sh, bit rl, s2);
    int o = 0;
    for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) begin
      if (s2 && (r % 2 || c % 2)) continue;
      for (int ch = 0; ch < LANES; ch++) begin
        longint acc = 0;
        for (int ky = -1; ky <= 1; ky++) for (int kx = -1; kx <= 1; kx++)
          if (r + ky >= 0 && r + ky < h && c + kx >= 0 && c + kx < w)
            acc += int'(src[(r + ky) * w + c + kx][ch]) * int'(wbm[wb + 3 * (ky + 1) + kx + 1][ch]);
        dst[o][ch] = rq(acc, sh, rl);
      end
      o++;
    end
  endfunction

  // y[j] = post( sum_t sum_i x_t[i] * W[wb + 32t + j][i] )
  function automatic pix_t ref_pw_pix(pix_t x [MAX_TILES], int nt, int wb, int sh, bit rl, bn);
    pix_t y;
    for (int j = 0; j < LANES; j++) begin
      longint acc = 0; int v;
      for (int t = 0; t < nt; t++) for (int i = 0; i < LANES; i++)
        acc += int'(x[t][i]) * int'(wbm[wb + 32 * t + j][i]);
      y[j] = rq(acc, sh, rl || bn);
      if (bn) begin
        v = ((int'(y[j]) * int'(wbm[wb + 32 * nt][j]) + 32) >>> 6) + int'(wbm[wb + 32 * nt + 1][j]);
        y[j] = st(v);
      end
    end
    return y;
  endfunction

  function automatic int sig_code(q8_t x);
    int xi, xa, y;
    xi = int'(x); xa = (xi < 0) ? -xi : xi;
    if (xa >= 80) y = 256; else if (xa >= 38) y = xa / 2 + 216;
    else if (xa >= 16) y = 2 * xa + 160; else y = 4 * xa + 128;
    if (xi < 0) y = 256 - y;
    return (y > 255) ? 255 : y;
  endfunction

  // ------------------------------------------------------------ program helpers
  task automatic put(op_e op, int src, src2, dst, nt, h, w, bit s2, rl, bn, int sh, wb, int unsigned recip, ddr);
    desc_t d;
    d = '0;
    d.op = op; d.src = 3'(src); d.src2 = 3'(src2); d.dst = 3'(dst); d.ntile_m1 = 2'(nt - 1);
    d.h = ROW_W'(h); d.w = COL_W'(w); d.stride2 = s2; d.relu = rl; d.bn_post = bn; d.shift = 5'(sh);
    d.wbase = WB_AW'(wb); d.recip = 24'(recip); d.ddr_addr = 32'(ddr);
    @(negedge clk);
    desc_we = 1; desc_addr = 6'(n_prog); desc_wdata = d;
    @(negedge clk) desc_we = 0;
    n_prog++;
  endtask

  // ------------------------------------------------------------ mechanism counters
  int beats [16] = '{default: 0};
  int pad_beats = 0, ddr_stall = 0, multi_tile = 0, s2_out = 0, bn_layers = 0, gp_writes = 0;
  int cyc = 0, full_dw_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (dut.u_ctrl.eng_valid) beats[dut.cur.op]++;
    if (dut.u_ctrl.eng_valid && dut.u_ctrl.eng_pad) pad_beats++;
    if (dut.u_ctrl.eng_valid && !dut.u_ctrl.eng_first) multi_tile++;
    if (ddr_req_valid && ddr_req_we) beats[OP_STORE] += int'(ddr_req_ready);
    if (ddr_rsp_valid) beats[OP_LOAD]++;
    if (ddr_req_valid && !ddr_req_ready) ddr_stall++;
    if (dut.u_dw.out_valid && dut.cur.stride2) s2_out++;
    if (dut.u_ctrl.gp_we) gp_writes++;
    if (dut.cur.op == OP_DW && dut.cur.h == 6'(FM_H) && busy) full_dw_cycles++;
  end
  always @(posedge clk) if (dut.u_ctrl.state.name() == "S_FETCH" && dut.u_ctrl.nd.bn_post) bn_layers++;

  // ------------------------------------------------------------ test
  map_t m0, m1, m2, m3, m4, m5, m6, m7, m8, big_in, big_out;
  pix_t g0, g1, g2, g3;

  initial begin
    // input maps in DDR
    for (int a = 0; a < H * W; a++) for (int ch = 0; ch < LANES; ch++) begin
      ddr.mem[a][ch] = q8_t'($urandom); ddr.mem[100 + a][ch] = q8_t'($urandom);
    end
    for (int a = 0; a < FM_DEPTH; a++) for (int ch = 0; ch < LANES; ch++) ddr.mem[4000 + a][ch] = q8_t'($urandom);
    // weights: small values keep results out of saturation most of the time
    for (int a = 0; a < 260; a++) for (int i = 0; i < LANES; i++) wbm[a][i] = q8_t'($urandom_range(0, 40) - 20);
    for (int j = 0; j < LANES; j++) begin
      wbm[96 + 32][j] = q8_t'($urandom_range(32, 96));   // BN scale, Q1.6
      wbm[96 + 33][j] = q8_t'($urandom_range(0, 20) - 10); // BN shift
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 260; a++) begin
      @(negedge clk); wb_we = 1; wb_waddr = WB_AW'(a); wb_wdata = wbm[a];
    end
    @(negedge clk) wb_we = 0;

    //   op         src src2 dst nt  h   w   s2 rl bn sh  wb   recip                         ddr
    put(OP_LOAD,     0,  0,  0,  1,  H,  W,  0, 0, 0, 0,  0,   0,                            0);
    put(OP_LOAD,     0,  0,  1,  1,  H,  W,  0, 0, 0, 0,  0,   0,                            100);
    put(OP_DW,       0,  0,  2,  1,  H,  W,  0, 1, 0, 7,  0,   0,                            0);
    put(OP_PW,       1,  0,  3,  2,  H,  W,  0, 1, 0, 8,  16,  0,                            0);
    put(OP_PW,       3,  0,  4,  1,  H,  W,  0, 0, 1, 8,  96,  0,                            0);
    put(OP_DW,       4,  0,  5,  1,  H,  W,  1, 0, 0, 6,  0,   0,                            0);
    put(OP_GAP,      3,  0,  0,  1,  H,  W,  0, 0, 0, 0,  0,   (1 << 24) / (H * W),          0);
    put(OP_FC,       0,  0,  1,  1,  1,  1,  0, 1, 0, 7,  140, 0,                            0);
    put(OP_FC,       1,  0,  2,  1,  1,  1,  0, 0, 0, 7,  180, 0,                            0);
    put(OP_SIG,      2,  0,  3,  1,  1,  1,  0, 0, 0, 0,  0,   0,                            0);
    put(OP_MUL,      3,  3,  6,  1,  H,  W,  0, 0, 0, 0,  0,   0,                            0);
    put(OP_MULADD,   4,  3,  7,  1,  H,  W,  0, 0, 0, 0,  0,   0,                            0);
    put(OP_ADD,      6,  7,  0,  1,  H,  W,  0, 0, 0, 0,  0,   0,                            0);
    put(OP_STORE,    0,  0,  0,  1,  H,  W,  0, 0, 0, 0,  0,   0,                            1000);
    put(OP_STORE,    5,  0,  0,  1,  H/2, W/2, 0, 0, 0, 0, 0,  0,                            2000);
    put(OP_LOAD,     0,  0,  1,  1,  FM_H, FM_W, 0, 0, 0, 0, 0, 0,                          4000);
    put(OP_DW,       1,  0,  2,  1,  FM_H, FM_W, 0, 1, 0, 7, 0, 0,                          0);
    put(OP_STORE,    2,  0,  0,  1,  FM_H, FM_W, 0, 0, 0, 0, 0, 0,                          9000);
    put(OP_END,      0,  0,  0,  1,  0,  0,  0, 0, 0, 0,  0,   0,                            0);

    // reference model
    for (int a = 0; a < H * W; a++) begin m0[a] = ddr.mem[a]; m1[a] = ddr.mem[100 + a]; end
    for (int a = 0; a < FM_DEPTH; a++) big_in[a] = ddr.mem[4000 + a];
    ref_dw(m0, m2, H, W, 0, 7, 1, 0);
    for (int a = 0; a < H * W; a++) begin
      pix_t x [MAX_TILES];
      x[0] = m1[a]; x[1] = m2[a];
      m3[a] = ref_pw_pix(x, 2, 16, 8, 1, 0);
      x[0] = m3[a];
      m4[a] = ref_pw_pix(x, 1, 96, 8, 0, 1);
    end
    ref_dw(m4, m5, H, W, 0, 6, 0, 1);
    for (int ch = 0; ch < LANES; ch++) begin
      longint s, p;
      s = 0;
      for (int a = 0; a < H * W; a++) s += int'(m3[a][ch]);
      p = s * ((1 << 24) / (H * W));
      g0[ch] = st(int'((p + (1 << 23)) >>> 24));
    end
    begin
      pix_t x [MAX_TILES];
      x[0] = g0; g1 = ref_pw_pix(x, 1, 140, 7, 1, 0);
      x[0] = g1; g2 = ref_pw_pix(x, 1, 180, 7, 0, 0);
    end
    for (int j = 0; j < LANES; j++) g3[j] = q8_t'(sig_code(g2[j]));
    for (int a = 0; a < H * W; a++) for (int ch = 0; ch < LANES; ch++) begin
      int s, m6v, m7v;
      s = sig_code(g2[ch]);
      m6v = int'(st((int'(m3[a][ch]) * s + 128) >>> 8));
      m7v = int'(st(int'(m4[a][ch]) + ((int'(m4[a][ch]) * s + 128) >>> 8)));
      m8[a][ch] = st(m6v + m7v);
    end
    ref_dw(big_in, big_out, FM_H, FM_W, 0, 7, 1, 0);

    // run
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    repeat (2) @(posedge clk);

    begin
      int bad;
      bad = 0;
      for (int a = 0; a < H * W; a++) if (ddr.mem[1000 + a] !== m8[a]) bad++;
      checks++; if (bad) begin failures++; $display("attention/residual output: %0d words wrong", bad); end
      bad = 0;
      for (int a = 0; a < (H / 2) * (W / 2); a++) if (ddr.mem[2000 + a] !== m5[a]) bad++;
      checks++; if (bad) begin failures++; $display("stride-2 output: %0d words wrong", bad); end
      bad = 0;
      for (int a = 0; a < FM_DEPTH; a++) if (ddr.mem[9000 + a] !== big_out[a]) bad++;
      checks++; if (bad) begin failures++; $display("full-size DW output: %0d words wrong", bad); end
      bad = 0;
      if (dut.u_gp.regs[3] !== g3) bad++;
      checks++; if (bad) begin failures++; $display("attention vector wrong"); end
    end

    // mechanisms
    begin
      string nm [10] = '{"DW beats", "PW beats", "GAP beats", "FC beats", "SIG beats",
                         "MUL beats", "MULADD beats", "ADD beats", "LOAD words", "STORE words"};
      int    cnt [10];
      cnt = '{beats[OP_DW], beats[OP_PW], beats[OP_GAP], beats[OP_FC], beats[OP_SIG],
              beats[OP_MUL], beats[OP_MULADD], beats[OP_ADD], beats[OP_LOAD], beats[OP_STORE]};
      for (int i = 0; i < 10; i++) begin
        $display("  %-14s %0d", nm[i], cnt[i]);
        checks++; if (cnt[i] == 0) begin failures++; $display("  never happened: %s", nm[i]); end
      end
      $display("  padding beats %0d, extra-tile beats %0d, stride-2 outputs %0d, BN-after-ReLU layers %0d, gp writes %0d, DDR stalls %0d",
               pad_beats, multi_tile, s2_out, bn_layers, gp_writes, ddr_stall);
      checks++; if (pad_beats == 0)  begin failures++; $display("  no padding beats"); end
      checks++; if (multi_tile == 0) begin failures++; $display("  no tile accumulation"); end
      checks++; if (s2_out != (H / 2) * (W / 2)) begin failures++; $display("  stride-2 outputs %0d", s2_out); end
      checks++; if (bn_layers == 0)  begin failures++; $display("  no BN-after-ReLU layer"); end
      checks++; if (gp_writes != 4)  begin failures++; $display("  gp writes %0d", gp_writes); end
      checks++; if (ddr_stall == 0)  begin failures++; $display("  no DDR stall"); end
      // full-size DW: 9 weight words, (35+1)*(120+1) beats, pipeline drain
      $display("  full-size DW layer: %0d cycles for %0d grid beats", full_dw_cycles, (FM_H + 1) * (FM_W + 1));
      checks++;
      if (full_dw_cycles < (FM_H + 1) * (FM_W + 1) || full_dw_cycles > (FM_H + 1) * (FM_W + 1) + 20) begin
        failures++; $display("  full-size DW layer rate wrong");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
