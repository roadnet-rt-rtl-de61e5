// tb_ctrl_fsm - self-checking test of the layer sequencer on its own.
//
// The engines are replaced by simple latency models driven from the
// controller's beat outputs (depthwise: 4 cycles, keeping interior centres and
// the stride-2 subset; pointwise and FC: 4 cycles after the last tile; element
// wise and sigmoid: 1 cycle; pooling: 1 cycle after finish).  A DDR model with
// random back-pressure answers LOAD and STORE.  A program with every
// operation runs twice; the testbench checks per operation the number of
// engine beats, weight words and their order, the tile selects, the
// destination addresses (consecutive from 0), the DDR addresses, and that
// done is raised at the end.
module tb_ctrl_fsm;
  import rn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic desc_we = 0; logic [5:0] desc_addr = 0; desc_t desc_wdata = '0;
  logic start = 0, busy, done;
  desc_t cur;
  logic [WB_AW-1:0] wb_raddr;
  logic dw_wld_valid, pw_wld_valid; logic [3:0] dw_wld_idx; logic [7:0] pw_wld_idx;
  logic [FM_AW-1:0] fm_raddr, fm_waddr; logic [2:0] fm_sel_a, fm_sel_b, fm_wsel;
  logic eng_valid, eng_pad, eng_first, eng_last; logic [1:0] eng_tile;
  logic [ROW_W-1:0] eng_row; logic [COL_W-1:0] eng_col;
  logic [2:0] gp_raddr_a, gp_raddr_b, gp_waddr;
  logic dw_out_valid, pw_out_valid, att_out_valid, gap_out_valid, sig_out_valid;
  logic fm_we, gp_we, gap_clear, gap_finish;
  logic ddr_req_valid, ddr_req_ready, ddr_req_we, ddr_rsp_valid;
  logic [31:0] ddr_req_addr;

  ctrl_fsm dut (.*);

  // engine latency models
  logic [3:0] dw_d = '0, pw_d = '0;
  logic att_d = 0, sig_d = 0, gap_d = 0;
  always @(posedge clk) begin
    dw_d <= {dw_d[2:0], eng_valid && cur.op == OP_DW && eng_row != 0 && eng_col != 0 &&
             (!cur.stride2 || (eng_row[0] && eng_col[0]))};
    pw_d <= {pw_d[2:0], eng_valid && (cur.op == OP_PW || cur.op == OP_FC) && eng_last};
    att_d <= eng_valid && cur.op inside {OP_MUL, OP_MULADD, OP_ADD};
    sig_d <= eng_valid && cur.op == OP_SIG;
    gap_d <= gap_finish;
  end
  assign dw_out_valid = dw_d[3];
  assign pw_out_valid = pw_d[3];
  assign att_out_valid = att_d;
  assign sig_out_valid = sig_d;
  assign gap_out_valid = gap_d;

  // DDR
  logic [2:0] rsp_pipe = '0;
  always @(posedge clk) begin
    ddr_req_ready <= ($urandom_range(0, 2) != 0);
    rsp_pipe <= {rsp_pipe[1:0], ddr_req_valid && ddr_req_ready && !ddr_req_we};
  end
  assign ddr_rsp_valid = rsp_pipe[2];

  // monitors
  int beats [16] = '{default: 0}, wlds [16] = '{default: 0}, fmw [16] = '{default: 0};
  int gpw [16] = '{default: 0}, ddrq [16] = '{default: 0}, stalls = 0;
  int exp_waddr = 0, exp_wb = 0, exp_ddr = 0, exp_tile = 0, exp_pwidx = 0;
  op_e last_op = OP_END;
  desc_t held; logic held_v = 0;
  always @(posedge clk) if (rst_n) begin
    if (cur.op != last_op || dut.state.name() == "S_FETCH") begin
      exp_waddr = 0; exp_wb = int'(cur.wbase); exp_ddr = int'(cur.ddr_addr); exp_tile = 0; exp_pwidx = 0;
      last_op = cur.op;
    end
    if (eng_valid) begin
      beats[cur.op]++;
      if (cur.op == OP_PW) begin
        checks++;
        if (fm_sel_a != cur.src + 3'(exp_tile)) begin failures++; $display("PW tile select %0d", fm_sel_a); end
        exp_tile = eng_last ? 0 : exp_tile + 1;
      end
    end
    if (dw_wld_valid || pw_wld_valid) begin
      wlds[cur.op]++;
      if (pw_wld_valid) begin
        int nrows, e;
        nrows = (int'(cur.ntile_m1) + 1) * 32;
        e = (exp_pwidx < nrows) ? exp_pwidx : MAX_TILES * 32 + exp_pwidx - nrows;
        checks++;
        if (int'(pw_wld_idx) != e) begin failures++; $display("pw weight index %0d exp %0d", pw_wld_idx, e); end
        exp_pwidx++;
      end
    end
    if (dut.state.name() == "S_WLOAD") begin
      checks++;
      if (int'(wb_raddr) != exp_wb) begin failures++; $display("weight address %0d exp %0d", wb_raddr, exp_wb); end
      exp_wb++;
    end
    if (fm_we) begin
      fmw[cur.op]++;
      checks++;
      if (int'(fm_waddr) != exp_waddr || fm_wsel != cur.dst) begin
        failures++; $display("write addr %0d exp %0d sel %0d", fm_waddr, exp_waddr, fm_wsel);
      end
      exp_waddr++;
    end
    if (gp_we) begin
      gpw[cur.op]++;
      checks++; if (gp_waddr != cur.dst) begin failures++; $display("gp dst"); end
    end
    if (ddr_req_valid && ddr_req_ready) begin
      ddrq[cur.op]++;
      checks++;
      if (int'(ddr_req_addr) != exp_ddr) begin failures++; $display("ddr addr %0d exp %0d", ddr_req_addr, exp_ddr); end
      exp_ddr++;
    end
    if (held_v) begin
      checks++;
      if (!ddr_req_valid || ddr_req_addr != held.ddr_addr) begin failures++; $display("stalled request dropped"); end
    end
    held_v = ddr_req_valid && !ddr_req_ready;
    held.ddr_addr = ddr_req_addr;
    if (ddr_req_valid && !ddr_req_ready) stalls++;
  end

  task automatic put(int i, op_e op, int src, src2, dst, nt, h, w, bit s2, bn, int wb, ddr);
    desc_t d;
    d = '0;
    d.op = op; d.src = 3'(src); d.src2 = 3'(src2); d.dst = 3'(dst); d.ntile_m1 = 2'(nt - 1);
    d.h = ROW_W'(h); d.w = COL_W'(w); d.stride2 = s2; d.bn_post = bn; d.wbase = WB_AW'(wb);
    d.ddr_addr = 32'(ddr); d.shift = 5'd7;
    @(negedge clk);
    desc_we = 1; desc_addr = 6'(i); desc_wdata = d;
    @(negedge clk) desc_we = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    //      i  op         src src2 dst nt h  w  s2 bn wb   ddr
    put(0,  OP_LOAD,     0,  0,  1,  1, 4, 5, 0, 0, 0,   300);
    put(1,  OP_DW,       1,  0,  2,  1, 4, 5, 0, 0, 40,  0);
    put(2,  OP_PW,       1,  0,  3,  3, 4, 5, 0, 1, 100, 0);
    put(3,  OP_GAP,      3,  0,  0,  1, 4, 5, 0, 0, 0,   0);
    put(4,  OP_FC,       0,  0,  1,  2, 1, 1, 0, 0, 200, 0);
    put(5,  OP_SIG,      1,  0,  2,  1, 1, 1, 0, 0, 0,   0);
    put(6,  OP_MUL,      3,  2,  4,  1, 4, 5, 0, 0, 0,   0);
    put(7,  OP_MULADD,   3,  2,  5,  1, 4, 5, 0, 0, 0,   0);
    put(8,  OP_ADD,      4,  5,  6,  1, 4, 5, 0, 0, 0,   0);
    put(9,  OP_DW,       6,  0,  7,  1, 5, 7, 1, 0, 50,  0);
    put(10, OP_STORE,    7,  0,  0,  1, 3, 4, 0, 0, 0,   900);
    put(11, OP_END,      0,  0,  0,  1, 0, 0, 0, 0, 0,   0);
    for (int run = 0; run < 2; run++) begin
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      checks++; if (!busy) begin failures++; $display("not busy after start"); end
      wait (done);
      @(negedge clk);
    end
    begin
      // expected totals over the two runs
      int e_beats [16], e_wld [16], e_fmw [16], e_gpw [16], e_ddr [16];
      e_beats = '{default: 0}; e_wld = '{default: 0}; e_fmw = '{default: 0}; e_gpw = '{default: 0}; e_ddr = '{default: 0};
      e_beats[OP_DW] = 2 * (5 * 6 + 6 * 8);     e_wld[OP_DW] = 2 * 18;  e_fmw[OP_DW] = 2 * (20 + 3 * 4);
      e_beats[OP_PW] = 2 * 60;                 e_wld[OP_PW] = 2 * 98;  e_fmw[OP_PW] = 2 * 20;
      e_beats[OP_GAP] = 2 * 20;                e_gpw[OP_GAP] = 2;
      e_beats[OP_FC] = 2 * 2;                  e_wld[OP_FC] = 2 * 64;  e_gpw[OP_FC] = 2;
      e_beats[OP_SIG] = 2;                     e_gpw[OP_SIG] = 2;
      e_beats[OP_MUL] = 2 * 20;                e_fmw[OP_MUL] = 2 * 20;
      e_beats[OP_MULADD] = 2 * 20;             e_fmw[OP_MULADD] = 2 * 20;
      e_beats[OP_ADD] = 2 * 20;                e_fmw[OP_ADD] = 2 * 20;
      e_ddr[OP_LOAD] = 2 * 20;                 e_fmw[OP_LOAD] = 2 * 20;
      e_ddr[OP_STORE] = 2 * 12;
      for (int o = 1; o < 11; o++) begin
        checks++;
        if (beats[o] != e_beats[o] || wlds[o] != e_wld[o] || fmw[o] != e_fmw[o] || gpw[o] != e_gpw[o] || ddrq[o] != e_ddr[o]) begin
          failures++;
          $display("op %0d: beats %0d/%0d wld %0d/%0d fmw %0d/%0d gpw %0d/%0d ddr %0d/%0d", o,
                   beats[o], e_beats[o], wlds[o], e_wld[o], fmw[o], e_fmw[o], gpw[o], e_gpw[o], ddrq[o], e_ddr[o]);
        end
      end
      checks++; if (!done || busy) begin failures++; $display("done/busy wrong at end"); end
      checks++; if (stalls == 0) begin failures++; $display("no DDR stall exercised"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
