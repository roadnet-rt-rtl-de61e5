// ctrl_fsm - layer sequencer of the RoadNet-RT accelerator.
//
// A finite state machine runs the CNN layer by layer.  The processor writes a
// program of layer descriptors (rn_pkg::desc_t) into a table and pulses start;
// the FSM then, for each descriptor in order:
//   FETCH  latch the descriptor, work out pixel and output counts;
//   WLOAD  (DW, PW, FC) copy the layer's weight words from the weight buffer
//          into the engine's weight registers, one word per cycle;
//   RUN    issue one beat per cycle: a feature map buffer read (or a DDR
//          request for LOAD/STORE) whose data reaches the engine one cycle
//          later, together with the beat's grid position and tile flags;
//   DRAIN  wait until every result is written back (fm buffer or gp word);
// until an OP_END descriptor, which raises done.
//
// Beat order: DW walks the padded (h+1) x (w+1) grid row by row (the extra
// row and column are zero padding beats); PW walks pixels and, inside each
// pixel, its input tiles src..src+ntile_m1; FC does the same on gp words;
// GAP, MUL, MULADD, ADD and STORE walk pixels; SIG is a single beat.
// Results come back in issue order and are written to consecutive addresses
// of the destination.  DDR requests use a valid/ready handshake (the
// request must be held while ready is low); read responses return in order.
//
// The paper gives only "a finite state machine controls the running order of
// CNN operations"; the descriptor format, the states and the DDR request
// protocol are this implementation's choices.
module ctrl_fsm
  import rn_pkg::*;
#(
  parameter int DEPTH = DESC_DEPTH
) (
  input  logic             clk,
  input  logic             rst_n,
  // program port (processor)
  input  logic             desc_we,
  input  logic [5:0]       desc_addr,
  input  desc_t            desc_wdata,
  input  logic             start,
  output logic             busy,
  output logic             done,
  output desc_t            cur,
  // weight buffer read and engine weight loads (aligned with weight data)
  output logic [WB_AW-1:0] wb_raddr,
  output logic             dw_wld_valid,
  output logic [3:0]       dw_wld_idx,
  output logic             pw_wld_valid,
  output logic [7:0]       pw_wld_idx,
  // feature map buffer read; selects are aligned with read data
  output logic [FM_AW-1:0] fm_raddr,
  output logic [2:0]       fm_sel_a,
  output logic [2:0]       fm_sel_b,
  // engine beat, aligned with read data
  output logic             eng_valid,
  output logic             eng_pad,
  output logic             eng_first,
  output logic             eng_last,
  output logic [1:0]       eng_tile,
  output logic [ROW_W-1:0] eng_row,
  output logic [COL_W-1:0] eng_col,
  output logic [2:0]       gp_raddr_a,
  output logic [2:0]       gp_raddr_b,
  // results
  input  logic             dw_out_valid,
  input  logic             pw_out_valid,
  input  logic             att_out_valid,
  input  logic             gap_out_valid,
  input  logic             sig_out_valid,
  output logic             fm_we,
  output logic [2:0]       fm_wsel,
  output logic [FM_AW-1:0] fm_waddr,
  output logic             gp_we,
  output logic [2:0]       gp_waddr,
  output logic             gap_clear,
  output logic             gap_finish,
  // DDR (HP port)
  output logic             ddr_req_valid,
  input  logic             ddr_req_ready,
  output logic             ddr_req_we,
  output logic [31:0]      ddr_req_addr,
  input  logic             ddr_rsp_valid
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_WLOAD, S_RUN, S_DRAIN, S_DONE} state_e;
  state_e state;

  desc_t table_q [DEPTH];
  always_ff @(posedge clk) if (desc_we) table_q[desc_addr] <= desc_wdata;

  logic [5:0]       pc;
  logic [FM_AW-1:0] n_pix, n_out, p, wr_cnt;
  logic [ROW_W-1:0] r;
  logic [COL_W-1:0] c;
  logic [1:0]       t;
  logic [7:0]       k, n_w;
  logic             primed, fin_sent;

  wire is_dw  = cur.op == OP_DW;
  wire is_pw  = cur.op == OP_PW;
  wire is_fc  = cur.op == OP_FC;
  wire is_att = cur.op inside {OP_MUL, OP_MULADD, OP_ADD};
  wire writes_fm = cur.op inside {OP_LOAD, OP_DW, OP_PW, OP_MUL, OP_MULADD, OP_ADD};
  wire in_run = state == S_RUN;

  // ---------------------------------------------------------------- beats
  logic iss, iss_pad, iss_first, iss_last, iss_end;
  logic [2:0] iss_sel_a;
  always_comb begin
    iss       = 1'b0;
    iss_pad   = 1'b0;
    iss_first = 1'b1;
    iss_last  = 1'b1;
    iss_end   = 1'b0;
    iss_sel_a = cur.src;
    if (in_run) begin
      unique case (cur.op)
        OP_DW: begin
          iss     = 1'b1;
          iss_pad = (r == cur.h) || (c == cur.w);
          iss_end = (r == cur.h) && (c == cur.w);
        end
        OP_PW, OP_FC: begin
          iss       = 1'b1;
          iss_first = t == 2'd0;
          iss_last  = t == cur.ntile_m1;
          iss_sel_a = cur.src + 3'(t);
          iss_end   = iss_last && (p == n_pix - 1'b1);
        end
        OP_GAP, OP_MUL, OP_MULADD, OP_ADD, OP_SIG: begin
          iss     = 1'b1;
          iss_end = p == n_pix - 1'b1;
        end
        default: ;
      endcase
    end
  end

  // DDR requests
  logic ddr_fire;
  always_comb begin
    ddr_req_valid = 1'b0;
    ddr_req_we    = cur.op == OP_STORE;
    ddr_req_addr  = cur.ddr_addr + 32'(p);
    if (in_run && cur.op == OP_LOAD)  ddr_req_valid = p < n_pix;
    if (in_run && cur.op == OP_STORE) ddr_req_valid = primed && (p < n_pix);
  end
  assign ddr_fire = ddr_req_valid && ddr_req_ready;

  // buffer read address: STORE advances only on an accepted request
  always_comb begin
    if (cur.op == OP_STORE) fm_raddr = ddr_fire ? p + 1'b1 : p;
    else                    fm_raddr = p;
  end

  assign wb_raddr = cur.wbase + WB_AW'(k);

  // ---------------------------------------------------------------- results
  logic res_valid;
  always_comb begin
    unique case (cur.op)
      OP_LOAD:                   res_valid = ddr_rsp_valid;
      OP_DW:                     res_valid = dw_out_valid;
      OP_PW:                     res_valid = pw_out_valid;
      OP_MUL, OP_MULADD, OP_ADD: res_valid = att_out_valid;
      default:                   res_valid = 1'b0;
    endcase
  end
  assign fm_we    = (state inside {S_RUN, S_DRAIN}) && writes_fm && res_valid;
  assign fm_wsel  = cur.dst;
  assign fm_waddr = wr_cnt;

  always_comb begin
    gp_we = 1'b0;
    if (state == S_DRAIN)
      unique case (cur.op)
        OP_GAP:  gp_we = gap_out_valid;
        OP_FC:   gp_we = pw_out_valid;
        OP_SIG:  gp_we = sig_out_valid;
        default: gp_we = 1'b0;
      endcase
  end
  assign gp_waddr   = cur.dst;
  assign gap_clear  = state == S_FETCH;
  assign gap_finish = (state == S_DRAIN) && (cur.op == OP_GAP) && !eng_valid && !fin_sent;

  assign gp_raddr_a = is_fc ? cur.src + 3'(eng_tile) : cur.src;
  assign gp_raddr_b = cur.src2;

  assign busy = !(state inside {S_IDLE, S_DONE});
  assign done = state == S_DONE;

  // ---------------------------------------------------------------- sequencing
  desc_t nd;
  assign nd = table_q[pc];

  // weight rows of a pointwise layer: 32 per input tile
  logic [7:0] cur_rows, nd_rows;
  assign cur_rows = (8'(cur.ntile_m1) + 8'd1) << 5;
  assign nd_rows  = (8'(nd.ntile_m1) + 8'd1) << 5;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc <= '0; cur <= '0; n_pix <= '0; n_out <= '0; n_w <= '0;
      p <= '0; r <= '0; c <= '0; t <= '0; k <= '0; wr_cnt <= '0;
      primed <= 1'b0; fin_sent <= 1'b0;
      eng_valid <= 1'b0; eng_pad <= 1'b0; eng_first <= 1'b0; eng_last <= 1'b0;
      eng_tile <= '0; eng_row <= '0; eng_col <= '0; fm_sel_a <= '0; fm_sel_b <= '0;
      dw_wld_valid <= 1'b0; dw_wld_idx <= '0; pw_wld_valid <= 1'b0; pw_wld_idx <= '0;
    end else begin
      // beat pipeline register (aligned with buffer read data)
      eng_valid <= iss;
      eng_pad   <= iss_pad;
      eng_first <= iss_first;
      eng_last  <= iss_last;
      eng_tile  <= t;
      eng_row   <= r;
      eng_col   <= c;
      fm_sel_a  <= iss_sel_a;
      fm_sel_b  <= cur.src2;
      dw_wld_valid <= (state == S_WLOAD) && is_dw;
      pw_wld_valid <= (state == S_WLOAD) && (is_pw || is_fc);
      dw_wld_idx   <= 4'(k);
      pw_wld_idx   <= (k < cur_rows) ? k : 8'(MAX_TILES * LANES) + (k - cur_rows);
      if (fm_we) wr_cnt <= wr_cnt + 1'b1;

      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          pc    <= '0;
          state <= S_FETCH;
        end
        S_FETCH: begin
          cur    <= nd;
          n_pix  <= FM_AW'(nd.h) * FM_AW'(nd.w);
          n_out  <= (nd.op == OP_DW && nd.stride2)
                    ? ((FM_AW'(nd.h) + 1'b1) >> 1) * ((FM_AW'(nd.w) + 1'b1) >> 1)
                    : FM_AW'(nd.h) * FM_AW'(nd.w);
          n_w    <= (nd.op == OP_DW) ? 8'(KTAPS)
                    : nd_rows + (nd.bn_post ? 8'd2 : 8'd0);
          p <= '0; r <= '0; c <= '0; t <= '0; k <= '0; wr_cnt <= '0;
          primed <= 1'b0; fin_sent <= 1'b0;
          pc     <= pc + 1'b1;
          if (nd.op == OP_END)                        state <= S_DONE;
          else if (nd.op inside {OP_DW, OP_PW, OP_FC}) state <= S_WLOAD;
          else                                        state <= S_RUN;
        end
        S_WLOAD: begin
          k <= k + 1'b1;
          if (k == n_w - 1'b1) state <= S_RUN;
        end
        S_RUN: begin
          unique case (cur.op)
            OP_LOAD: begin
              if (ddr_fire) p <= p + 1'b1;
              if (ddr_fire && p == n_pix - 1'b1) state <= S_DRAIN;
            end
            OP_STORE: begin
              primed <= 1'b1;
              if (ddr_fire) p <= p + 1'b1;
              if (ddr_fire && p == n_pix - 1'b1) state <= S_FETCH;
            end
            OP_DW: begin
              if (!iss_pad) p <= p + 1'b1;
              if (c == cur.w) begin c <= '0; r <= r + 1'b1; end
              else            c <= c + 1'b1;
            end
            OP_PW, OP_FC: begin
              if (iss_last) begin t <= '0; p <= p + 1'b1; end
              else          t <= t + 1'b1;
            end
            default: p <= p + 1'b1;
          endcase
          if (iss_end) state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (gap_finish) fin_sent <= 1'b1;
          if (writes_fm ? (wr_cnt == n_out) : gp_we) state <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // DDR handshake rule: a request is held until it is accepted
  a_ddr_hold: assert property (@(posedge clk) disable iff (!rst_n)
    ddr_req_valid && !ddr_req_ready |=> ddr_req_valid && $stable(ddr_req_addr));

  logic unused;
  assign unused = ^{is_att, is_dw};

endmodule
