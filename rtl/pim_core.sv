// pim_core: one core of the PIM Transformer accelerator, with its top
// controller.
//
// A token vector x (D = 768 int8 values) passes through one Transformer layer:
//   LN1 -> Q/K/V DCIM macros -> (K, V) pruning unit -> quantisation unit
//   (HQE) -> data reorder -> global buffer (compressed KV cache)
//   scores: CE array A with q and, per cached token, the key restored by the
//           dequantisation unit (the decoded token's own key comes straight
//           from the K macro through the key selector)
//   softmax per head -> CE array B sums probability-weighted restored values
//   -> Out macro -> LN2 -> FC1 macro -> ReLU -> FC2 macro -> y.
// The KV cache is kept only in compressed form (index, label, int2 data, plus
// per-channel scale/zero levels in the SZ buffer); port B of the global buffer
// is brought out for moving those records to and from external HBM.
//
// Commands (cmd, accepted when cmd_ready; x_in sampled with cmd_valid):
//   CMD_CALIB    prefill token: K/V ranges are recorded, nothing stored
//   CMD_FINALIZE level-0 scale/zero of every K and V channel are fixed
//   CMD_APPEND   prefill token: K/V compressed and stored as token n_tokens
//   CMD_DECODE   decode token: K/V compressed with HQE range extension and
//                stored, attention over all stored tokens, FFN; y_valid
//                pulses with y_out.
// Every command ends back in the idle state (cmd_ready high); `done` pulses.
// Weights are loaded one row per cycle (wl_sel 0..5 = Q, K, V, Out, FC1,
// FC2; row r of the matrix in wl_data, column c at bits [8c +: 8]).
//
// Timing (decode, n cached tokens including the new one): about
// 2D (LN1) + D (Q/K/V) + 2D (K/V compression) + n(D+5) (scores) + 2n (softmax)
// + n(D+5) (values) + D (Out) + 2D (LN2) + D (FC1) + FFN (FC2) cycles.
//
// From the paper: the block set and their links (core diagram), the CPQ
// flow (prune, quantise only what is kept, reorder into data/label/index,
// restore through the DQU), HQE and the 768/64 sizes. This design's own
// choices: the command set, the serial schedule, the requantisation shifts
// between stages, the absence of residual additions (none is drawn), the
// choice of fresh versus restored key and the record layout.
module pim_core
  import pim_pkg::*;
#(
  parameter int D          = D_MODEL,
  parameter int NH         = N_HEADS,
  parameter int HD         = HEAD_DIM,
  parameter int FFN        = FFN_DIM,
  parameter int QB         = QBITS,
  parameter int LEVELS     = MAX_LEVELS,
  parameter int MAXT       = MAX_TOKENS,
  parameter int PROJ_SHIFT = 8,
  parameter int FFN_SHIFT  = 8,
  parameter int REC_W      = D * (QB + 2),
  parameter int GB_DEPTH   = 2 * MAXT
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight loading
  input  logic                        wl_we,
  input  logic [2:0]                  wl_sel,
  input  logic [$clog2(FFN)-1:0]      wl_row,
  input  logic [FFN*8-1:0]            wl_data,
  // configuration
  input  logic [7:0]                  prune_thr,
  // command and token
  input  logic                        cmd_valid,
  input  logic [1:0]                  cmd,
  output logic                        cmd_ready,
  input  logic signed [7:0]           x_in  [D],
  output logic                        done,
  output logic                        y_valid,
  output logic signed [7:0]           y_out [D],
  // global buffer port toward external HBM
  input  logic                        hbm_we,
  input  logic                        hbm_re,
  input  logic [$clog2(GB_DEPTH)-1:0] hbm_addr,
  input  logic [REC_W-1:0]            hbm_wdata,
  output logic [REC_W-1:0]            hbm_rdata,
  // status
  output logic [TOK_W-1:0]            n_tokens,
  output logic [31:0]                 kept_cnt,
  output logic [31:0]                 pruned_cnt,
  output logic [31:0]                 levels_opened,
  output logic [31:0]                 sat_events,
  output logic [31:0]                 kv_nz_bits,
  output logic [31:0]                 fresh_key_uses,
  output logic [31:0]                 ce_active_lanes
);
  typedef enum logic [3:0] {
    S_IDLE, S_FIN, S_LN1, S_QKV, S_KV, S_SCORE, S_SMAX, S_AV,
    S_OUT, S_LN2, S_FC1, S_RELU, S_FC2
  } state_e;

  state_e                 state;
  cmd_e                   cur_cmd;
  logic [$clog2(FFN+1)-1:0] i;        // element counter of a stream
  logic [2:0]             ph;         // sub-phase
  logic [TOK_W-1:0]       t;          // token counter in attention

  logic signed [7:0] xin   [D];
  logic signed [7:0] xn    [D];
  logic signed [7:0] q_vec [D];
  logic signed [7:0] k_vec [D];
  logic signed [7:0] v_vec [D];
  logic signed [7:0] attn  [D];
  logic signed [7:0] o_vec [D];
  logic signed [7:0] on2   [D];
  logic signed [7:0] f1    [FFN];
  logic [8:0]        prob  [NH][MAXT];

  // ---------------------------------------------------------------- LN1/LN2
  logic                    ln1_in_v, ln1_out_v, ln1_done, ln1_busy;
  logic                    ln2_in_v, ln2_out_v, ln2_done, ln2_busy;
  logic [$clog2(D)-1:0]    ln1_idx, ln2_idx;
  logic signed [7:0]       ln1_in, ln1_out, ln2_in, ln2_out;

  layernorm #(.N(D)) u_ln1 (.clk, .rst_n, .in_valid(ln1_in_v), .in_data(ln1_in),
    .out_valid(ln1_out_v), .out_idx(ln1_idx), .out_data(ln1_out), .done(ln1_done), .busy(ln1_busy));
  layernorm #(.N(D)) u_ln2 (.clk, .rst_n, .in_valid(ln2_in_v), .in_data(ln2_in),
    .out_valid(ln2_out_v), .out_idx(ln2_idx), .out_data(ln2_out), .done(ln2_done), .busy(ln2_busy));

  // ---------------------------------------------------------------- DCIM macros
  logic                    qkv_start, qkv_xv, out_start, out_xv, fc1_start, fc1_xv, fc2_start, fc2_xv;
  logic signed [7:0]       qkv_x, out_x, fc1_x, fc2_x;
  logic                    q_done, k_done, v_done, out_done, fc1_done, fc2_done;
  logic signed [ACC_W-1:0] q_y [D];
  logic signed [ACC_W-1:0] k_y [D];
  logic signed [ACC_W-1:0] v_y [D];
  logic signed [ACC_W-1:0] o_y [D];
  logic signed [ACC_W-1:0] f1_y [FFN];
  logic signed [ACC_W-1:0] f2_y [D];

  dcim_macro #(.ROWS(D), .COLS(D)) u_q_cim (.clk, .rst_n,
    .wr_en(wl_we && wl_sel == 3'd0), .wr_row(wl_row[$clog2(D)-1:0]), .wr_data(wl_data[D*8-1:0]),
    .start(qkv_start), .x_valid(qkv_xv), .x_in(qkv_x), .done(q_done), .y(q_y));
  dcim_macro #(.ROWS(D), .COLS(D)) u_k_cim (.clk, .rst_n,
    .wr_en(wl_we && wl_sel == 3'd1), .wr_row(wl_row[$clog2(D)-1:0]), .wr_data(wl_data[D*8-1:0]),
    .start(qkv_start), .x_valid(qkv_xv), .x_in(qkv_x), .done(k_done), .y(k_y));
  dcim_macro #(.ROWS(D), .COLS(D)) u_v_cim (.clk, .rst_n,
    .wr_en(wl_we && wl_sel == 3'd2), .wr_row(wl_row[$clog2(D)-1:0]), .wr_data(wl_data[D*8-1:0]),
    .start(qkv_start), .x_valid(qkv_xv), .x_in(qkv_x), .done(v_done), .y(v_y));
  dcim_macro #(.ROWS(D), .COLS(D)) u_out_cim (.clk, .rst_n,
    .wr_en(wl_we && wl_sel == 3'd3), .wr_row(wl_row[$clog2(D)-1:0]), .wr_data(wl_data[D*8-1:0]),
    .start(out_start), .x_valid(out_xv), .x_in(out_x), .done(out_done), .y(o_y));
  dcim_macro #(.ROWS(D), .COLS(FFN)) u_fc1_cim (.clk, .rst_n,
    .wr_en(wl_we && wl_sel == 3'd4), .wr_row(wl_row[$clog2(D)-1:0]), .wr_data(wl_data),
    .start(fc1_start), .x_valid(fc1_xv), .x_in(fc1_x), .done(fc1_done), .y(f1_y));
  dcim_macro #(.ROWS(FFN), .COLS(D)) u_fc2_cim (.clk, .rst_n,
    .wr_en(wl_we && wl_sel == 3'd5), .wr_row(wl_row), .wr_data(wl_data[D*8-1:0]),
    .start(fc2_start), .x_valid(fc2_xv), .x_in(fc2_x), .done(fc2_done), .y(f2_y));

  // ---------------------------------------------------------------- ReLU
  logic              relu_in_v, relu_out_v;
  logic signed [7:0] r_vec [FFN];
  relu_unit #(.N(FFN)) u_relu (.clk, .rst_n, .in_valid(relu_in_v), .in_vec(f1),
    .out_valid(relu_out_v), .out_vec(r_vec));

  // ---------------------------------------------------------------- CPQ path
  logic                       pu_in_v, pu_out_v, pu_keep;
  logic signed [7:0]          pu_in, pu_out;
  logic [$clog2(2*D)-1:0]     pu_ch, qu_ch;
  logic                       qu_fin, qu_busy, qu_out_v, qu_keep, qu_new, qu_sat;
  logic signed [QB-1:0]       qu_q;
  logic                       szw_we;
  logic [$clog2(2*D)-1:0]     szw_ch;
  logic [$clog2(LEVELS)-1:0]  szw_lvl, szr_lvl;
  sz_entry_t                  szw_data, szr_data;
  logic                       szr_re;
  logic [$clog2(2*D)-1:0]     szr_ch;
  logic [TOK_W-1:0]           szr_tok;

  pruning_unit u_pu (.clk, .rst_n, .thr(prune_thr), .in_valid(pu_in_v), .in_data(pu_in),
    .out_valid(pu_out_v), .out_keep(pu_keep), .out_data(pu_out),
    .kept_cnt(kept_cnt), .pruned_cnt(pruned_cnt));

  // pu_ch is the channel of the element leaving the pruning unit.
  assign qu_ch = pu_ch;

  quant_unit #(.CH(2*D), .QB(QB), .LEVELS(LEVELS)) u_qu (.clk, .rst_n,
    .calib(cur_cmd == CMD_CALIB), .extend_en(cur_cmd == CMD_DECODE),
    .finalize(qu_fin), .busy(qu_busy),
    .in_valid(pu_out_v), .in_ch(qu_ch), .in_keep(pu_keep), .in_data(pu_out), .in_tok(n_tokens),
    .out_valid(qu_out_v), .out_keep(qu_keep), .out_q(qu_q),
    .sz_we(szw_we), .sz_ch(szw_ch), .sz_level(szw_lvl), .sz_wdata(szw_data),
    .new_level(qu_new), .sat_event(qu_sat));

  sz_buffer #(.CH(2*D), .LEVELS(LEVELS)) u_sz (.clk, .rst_n,
    .we(szw_we), .wch(szw_ch), .wlevel(szw_lvl), .wdata(szw_data),
    .re(szr_re), .rch(szr_ch), .rtok(szr_tok), .rdata(szr_data), .rlevel(szr_lvl));

  logic                          rec_v;
  logic [D-1:0]                  rec_index, rec_label;
  logic [D*QB-1:0]               rec_data;
  logic [$clog2(D+1)-1:0]        rec_nk, rec_nz;
  logic [$clog2(D*(QB+2)+1)-1:0] rec_bits;

  kv_packer #(.CH(D), .QB(QB)) u_pack (.clk, .rst_n, .in_valid(qu_out_v), .in_keep(qu_keep),
    .in_q(qu_q), .rec_valid(rec_v), .rec_index(rec_index), .rec_label(rec_label),
    .rec_data(rec_data), .rec_nkept(rec_nk), .rec_nnz(rec_nz), .rec_bits(rec_bits));

  // ---------------------------------------------------------------- global buffer
  logic                        gb_we, gb_re, rec_is_v;
  logic [$clog2(GB_DEPTH)-1:0] gb_addr, gb_raddr, gb_waddr;
  logic [REC_W-1:0]            gb_rdata;

  assign gb_we    = rec_v;
  assign gb_waddr = $clog2(GB_DEPTH)'(2 * n_tokens) + $clog2(GB_DEPTH)'(rec_is_v);
  assign gb_addr  = gb_we ? gb_waddr : gb_raddr;

  global_buffer #(.DEPTH(GB_DEPTH), .W(REC_W)) u_gb (.clk, .rst_n,
    .a_we(gb_we), .a_re(gb_re && !gb_we), .a_addr(gb_addr),
    .a_wdata({rec_data, rec_label, rec_index}), .a_wbits(32'(rec_bits)), .a_rdata(gb_rdata),
    .b_we(hbm_we), .b_re(hbm_re), .b_addr(hbm_addr), .b_wdata(hbm_wdata), .b_rdata(hbm_rdata),
    .nz_bits(kv_nz_bits));

  // ---------------------------------------------------------------- DQU
  logic              dq_start, dq_busy, dq_done;
  logic [$clog2(2*D)-1:0] dq_base;
  logic signed [7:0] dq_vec [D];

  dequant_unit #(.CH(D), .QB(QB), .SZ_CH(2*D)) u_dqu (.clk, .rst_n, .start(dq_start),
    .rec_index(gb_rdata[D-1:0]), .rec_label(gb_rdata[2*D-1:D]), .rec_data(gb_rdata[REC_W-1:2*D]),
    .tok(t), .ch_base(dq_base), .sz_re(szr_re), .sz_rch(szr_ch), .sz_rtok(szr_tok),
    .sz_rdata(szr_data), .busy(dq_busy), .done(dq_done), .out_vec(dq_vec));

  // ---------------------------------------------------------------- CE arrays
  logic                    sc_v, sc_out_v, key_sel, av_clr, av_v;
  logic signed [ACC_W-1:0] scores [NH];
  logic signed [ACC_W-1:0] sc_acc_unused [D];
  logic signed [ACC_W-1:0] av_acc [D];
  logic signed [ACC_W-1:0] av_scores_unused [NH];
  logic                    av_sv_unused;
  logic [8:0]              p_zero [NH];
  logic [8:0]              p_cur  [NH];
  logic signed [7:0]       zero_vec [D];
  logic [31:0]             lanes_a, lanes_b;

  always_comb begin
    for (int h = 0; h < NH; h++) begin
      p_zero[h] = '0;
      p_cur[h]  = prob[h][t[$clog2(MAXT)-1:0]];
    end
    for (int j = 0; j < D; j++) zero_vec[j] = '0;
  end

  ce_array #(.N_HEADS(NH), .HEAD_DIM(HD)) u_ce_score (.clk, .rst_n,
    .sc_valid(sc_v), .key_sel(key_sel), .q_vec(q_vec), .fresh_k(k_vec), .cache_k(dq_vec),
    .score_valid(sc_out_v), .scores(scores),
    .av_clear(1'b0), .av_valid(1'b0), .p(p_zero), .v_vec(zero_vec), .acc(sc_acc_unused),
    .cnt_clear(1'b0), .active_total(lanes_a));

  ce_array #(.N_HEADS(NH), .HEAD_DIM(HD)) u_ce_value (.clk, .rst_n,
    .sc_valid(1'b0), .key_sel(1'b0), .q_vec(zero_vec), .fresh_k(zero_vec), .cache_k(zero_vec),
    .score_valid(av_sv_unused), .scores(av_scores_unused),
    .av_clear(av_clr), .av_valid(av_v), .p(p_cur), .v_vec(dq_vec), .acc(av_acc),
    .cnt_clear(1'b0), .active_total(lanes_b));

  assign ce_active_lanes = lanes_a + lanes_b;

  // ---------------------------------------------------------------- softmax per head
  logic              sm_last;
  logic              sm_out_v [NH];
  logic              sm_done  [NH];
  logic              sm_busy  [NH];
  logic [$clog2(MAXT)-1:0] sm_idx [NH];
  logic [8:0]        sm_p     [NH];

  for (genvar h = 0; h < NH; h++) begin : g_sm
    softmax_unit #(.L_MAX(MAXT)) u_sm (.clk, .rst_n, .in_valid(sc_out_v), .in_last(sm_last),
      .in_score(scores[h]), .out_valid(sm_out_v[h]), .out_idx(sm_idx[h]), .out_p(sm_p[h]),
      .done(sm_done[h]), .busy(sm_busy[h]));
  end

  // ---------------------------------------------------------------- controller
  assign cmd_ready = (state == S_IDLE);

  always_comb begin
    ln1_in_v  = (state == S_LN1) && (i < D);
    ln1_in    = xin[i[$clog2(D)-1:0]];
    ln2_in_v  = (state == S_LN2) && (i < D);
    ln2_in    = o_vec[i[$clog2(D)-1:0]];
    qkv_start = (state == S_QKV) && (ph == 3'd0);
    qkv_xv    = (state == S_QKV) && (ph == 3'd1) && (i < D);
    qkv_x     = xn[i[$clog2(D)-1:0]];
    out_start = (state == S_OUT) && (ph == 3'd0);
    out_xv    = (state == S_OUT) && (ph == 3'd1) && (i < D);
    out_x     = attn[i[$clog2(D)-1:0]];
    fc1_start = (state == S_FC1) && (ph == 3'd0);
    fc1_xv    = (state == S_FC1) && (ph == 3'd1) && (i < D);
    fc1_x     = on2[i[$clog2(D)-1:0]];
    fc2_start = (state == S_FC2) && (ph == 3'd0);
    fc2_xv    = (state == S_FC2) && (ph == 3'd1) && (i < FFN);
    fc2_x     = r_vec[i[$clog2(FFN)-1:0]];
    pu_in_v   = (state == S_KV) && (i < 2 * D);
    pu_in     = (i < D) ? k_vec[i[$clog2(D)-1:0]] : v_vec[$clog2(D)'(i - D)];
    qu_fin    = (state == S_FIN) && (ph == 3'd0);
    // attention
    gb_re     = ((state == S_SCORE) || (state == S_AV)) && (ph == 3'd0) && !gb_we;
    gb_raddr  = $clog2(GB_DEPTH)'(2 * t) + $clog2(GB_DEPTH)'(state == S_AV);
    dq_start  = ((state == S_SCORE) || (state == S_AV)) && (ph == 3'd1);
    dq_base   = (state == S_AV) ? $clog2(2*D)'(D) : '0;
    key_sel   = (t == n_tokens - 1'b1);
    sc_v      = (state == S_SCORE) && (ph == 3'd3);
    sm_last   = (t == n_tokens - 1'b1) || (ph == 3'd5);
    av_clr    = (state == S_SMAX);
    av_v      = (state == S_AV) && (ph == 3'd3);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pu_ch <= '0;
    else        pu_ch <= $clog2(2*D)'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      cur_cmd        <= CMD_CALIB;
      i              <= '0;
      ph             <= '0;
      t              <= '0;
      n_tokens       <= '0;
      rec_is_v       <= 1'b0;
      done           <= 1'b0;
      y_valid        <= 1'b0;
      relu_in_v      <= 1'b0;
      levels_opened  <= '0;
      sat_events     <= '0;
      fresh_key_uses <= '0;
      for (int j = 0; j < D; j++) begin
        xin[j] <= '0; xn[j] <= '0; q_vec[j] <= '0; k_vec[j] <= '0; v_vec[j] <= '0;
        attn[j] <= '0; o_vec[j] <= '0; on2[j] <= '0; y_out[j] <= '0;
      end
      for (int j = 0; j < FFN; j++) f1[j] <= '0;
      for (int h = 0; h < NH; h++)
        for (int j = 0; j < MAXT; j++) prob[h][j] <= '0;
    end else begin
      done      <= 1'b0;
      y_valid   <= 1'b0;
      relu_in_v <= 1'b0;
      if (qu_new) levels_opened <= levels_opened + 1'b1;
      if (qu_sat) sat_events    <= sat_events + 1'b1;
      if (rec_v)  rec_is_v      <= !rec_is_v;
      if (ln1_out_v) xn[ln1_idx]  <= ln1_out;
      if (ln2_out_v) on2[ln2_idx] <= ln2_out;
      for (int h = 0; h < NH; h++)
        if (sm_out_v[h]) prob[h][sm_idx[h]] <= sm_p[h];

      case (state)
        S_IDLE: if (cmd_valid) begin
          cur_cmd <= cmd_e'(cmd);
          i       <= '0;
          ph      <= '0;
          for (int j = 0; j < D; j++) xin[j] <= x_in[j];
          if (cmd_e'(cmd) == CMD_FINALIZE) state <= S_FIN;
          else                             state <= S_LN1;
        end
        S_FIN: begin
          ph <= 3'd1;
          if (ph == 3'd1 && !qu_busy) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_LN1: begin
          if (i < D) i <= i + 1'b1;
          if (ln1_done) begin
            state <= S_QKV;
            i     <= '0;
            ph    <= '0;
          end
        end
        S_QKV: begin
          if (ph == 3'd0) ph <= 3'd1;
          else if (i < D) i <= i + 1'b1;
          if (k_done) begin
            for (int j = 0; j < D; j++) begin
              q_vec[j] <= sat8(48'(q_y[j] >>> PROJ_SHIFT));
              k_vec[j] <= sat8(48'(k_y[j] >>> PROJ_SHIFT));
              v_vec[j] <= sat8(48'(v_y[j] >>> PROJ_SHIFT));
            end
            state    <= S_KV;
            i        <= '0;
            ph       <= '0;
            rec_is_v <= 1'b0;
          end
        end
        S_KV: begin
          // 2D elements into the pruning unit, then drain PU -> QU -> packer.
          i <= i + 1'b1;
          if (i == $clog2(FFN+1)'(2 * D + 4)) begin
            i <= '0;
            if (cur_cmd == CMD_CALIB) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              n_tokens <= n_tokens + 1'b1;
              if (cur_cmd == CMD_APPEND) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                state <= S_SCORE;
                t     <= '0;
                ph    <= '0;
              end
            end
          end
        end
        S_SCORE: begin
          case (ph)
            3'd0: ph <= key_sel ? 3'd3 : 3'd1;  // read record (cached key)
            3'd1: ph <= 3'd2;                   // start DQU
            3'd2: if (dq_done) ph <= 3'd3;
            3'd3: begin                         // score issue
              if (key_sel) fresh_key_uses <= fresh_key_uses + 1'b1;
              ph <= 3'd4;
            end
            default: begin                      // score into softmax
              ph <= '0;
              if (t == n_tokens - 1'b1) begin
                state <= S_SMAX;
                t     <= '0;
              end else begin
                t <= t + 1'b1;
              end
            end
          endcase
        end
        S_SMAX: if (sm_done[0]) begin
          state <= S_AV;
          t     <= '0;
          ph    <= '0;
        end
        S_AV: begin
          case (ph)
            3'd0: ph <= 3'd1;
            3'd1: ph <= 3'd2;
            3'd2: if (dq_done) ph <= 3'd3;
            default: begin
              ph <= '0;
              if (t == n_tokens - 1'b1) begin
                ph    <= 3'd4;
                state <= S_OUT;
                i     <= '0;
              end else begin
                t <= t + 1'b1;
              end
            end
          endcase
        end
        S_OUT: begin
          // one cycle for the last value sum to land, then attention output
          if (ph == 3'd4) begin
            for (int j = 0; j < D; j++) attn[j] <= sat8(48'(av_acc[j] >>> 8));
            ph <= '0;
          end else if (ph == 3'd0) ph <= 3'd1;
          else if (i < D) i <= i + 1'b1;
          if (out_done) begin
            for (int j = 0; j < D; j++) o_vec[j] <= sat8(48'(o_y[j] >>> PROJ_SHIFT));
            state <= S_LN2;
            i     <= '0;
          end
        end
        S_LN2: begin
          if (i < D) i <= i + 1'b1;
          if (ln2_done) begin
            state <= S_FC1;
            i     <= '0;
            ph    <= '0;
          end
        end
        S_FC1: begin
          if (ph == 3'd0) ph <= 3'd1;
          else if (i < D) i <= i + 1'b1;
          if (fc1_done) begin
            for (int j = 0; j < FFN; j++) f1[j] <= sat8(48'(f1_y[j] >>> FFN_SHIFT));
            relu_in_v <= 1'b1;
            state     <= S_RELU;
          end
        end
        S_RELU: if (relu_out_v) begin
          state <= S_FC2;
          i     <= '0;
          ph    <= '0;
        end
        default: begin  // S_FC2
          if (ph == 3'd0) ph <= 3'd1;
          else if (i < FFN) i <= i + 1'b1;
          if (fc2_done) begin
            for (int j = 0; j < D; j++) y_out[j] <= sat8(48'(f2_y[j] >>> FFN_SHIFT));
            y_valid <= 1'b1;
            done    <= 1'b1;
            state   <= S_IDLE;
          end
        end
      endcase
    end
  end

  // The KV cache never outgrows the global buffer.
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && cmd_valid && (cmd_e'(cmd) == CMD_APPEND || cmd_e'(cmd) == CMD_DECODE))
      |-> n_tokens < MAXT);
endmodule
