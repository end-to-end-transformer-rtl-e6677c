// pim_accel: top level of the accelerator. It places two independent
// engines side by side under one clock and reset:
//   * pim_core - the digital compute-in-memory Transformer core: layernorm,
//     Q/K/V projections, the compressed (pruned + low-bit) KV cache with
//     hierarchical quantisation, per-head attention, output projection and
//     FFN, for one token per decode command;
//   * sda_submatrix_pipeline - a ReRAM-crossbar attention head that uses the
//     matrix decomposition (no K or V is ever written into a crossbar during
//     inference) and streams token rows through a sub-matrix pipeline.
// The two engines share nothing but clk and rst_n; their ports are brought
// out unchanged, the attention-head ports with the prefix sda_. Interface
// timing is that of the two sub-modules (see their headers).
//
// From the paper: both engines. This design's choice: putting them in one
// top with separate ports. The paper describes them as two different
// architectures and does not say how (or whether) they would be combined,
// so no data path connects them.
module pim_accel
  import pim_pkg::*;
#(
  parameter int D        = D_MODEL,
  parameter int NH       = N_HEADS,
  parameter int HD       = HEAD_DIM,
  parameter int FFN      = FFN_DIM,
  parameter int QB       = QBITS,
  parameter int LEVELS   = MAX_LEVELS,
  parameter int MAXT     = MAX_TOKENS,
  parameter int REC_W    = D * (QB + 2),
  parameter int GB_DEPTH = 2 * MAXT,
  parameter int SDA_N    = MAXT,
  parameter int SDA_D    = D,
  parameter int SDA_DK   = HD,
  parameter int SDA_PW   = (SDA_D > SDA_N) ? SDA_D : SDA_N
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // ---- digital PIM core
  input  logic                        wl_we,
  input  logic [2:0]                  wl_sel,
  input  logic [$clog2(FFN)-1:0]      wl_row,
  input  logic [FFN*8-1:0]            wl_data,
  input  logic [7:0]                  prune_thr,
  input  logic                        cmd_valid,
  input  logic [1:0]                  cmd,
  output logic                        cmd_ready,
  input  logic signed [7:0]           x_in  [D],
  output logic                        done,
  output logic                        y_valid,
  output logic signed [7:0]           y_out [D],
  input  logic                        hbm_we,
  input  logic                        hbm_re,
  input  logic [$clog2(GB_DEPTH)-1:0] hbm_addr,
  input  logic [REC_W-1:0]            hbm_wdata,
  output logic [REC_W-1:0]            hbm_rdata,
  output logic [TOK_W-1:0]            n_tokens,
  output logic [31:0]                 kept_cnt,
  output logic [31:0]                 pruned_cnt,
  output logic [31:0]                 levels_opened,
  output logic [31:0]                 sat_events,
  output logic [31:0]                 kv_nz_bits,
  output logic [31:0]                 fresh_key_uses,
  output logic [31:0]                 ce_active_lanes,
  // ---- ReRAM attention head
  input  logic                        sda_prog_valid,
  input  logic [1:0]                  sda_prog_sel,
  input  logic [$clog2(SDA_D)-1:0]    sda_prog_col,
  input  logic signed [7:0]           sda_prog_data [SDA_PW],
  output logic                        sda_prog_ready,
  input  logic                        sda_x_valid,
  input  logic signed [7:0]           sda_x_row [SDA_D],
  output logic                        sda_x_ready,
  output logic                        sda_res_valid,
  output logic [$clog2(SDA_N)-1:0]    sda_res_idx,
  output logic signed [7:0]           sda_res_row [SDA_DK],
  output logic [31:0]                 sda_overlap_cycles,
  output logic [31:0]                 sda_x_stalls,
  output logic [31:0]                 sda_prog_columns
);
  pim_core #(.D(D), .NH(NH), .HD(HD), .FFN(FFN), .QB(QB), .LEVELS(LEVELS), .MAXT(MAXT),
             .REC_W(REC_W), .GB_DEPTH(GB_DEPTH)) u_core (
    .clk, .rst_n, .wl_we, .wl_sel, .wl_row, .wl_data, .prune_thr,
    .cmd_valid, .cmd, .cmd_ready, .x_in, .done, .y_valid, .y_out,
    .hbm_we, .hbm_re, .hbm_addr, .hbm_wdata, .hbm_rdata,
    .n_tokens, .kept_cnt, .pruned_cnt, .levels_opened, .sat_events, .kv_nz_bits,
    .fresh_key_uses, .ce_active_lanes);

  sda_submatrix_pipeline #(.N(SDA_N), .D(SDA_D), .DK(SDA_DK), .PW(SDA_PW)) u_sda (
    .clk, .rst_n,
    .prog_valid(sda_prog_valid), .prog_sel(sda_prog_sel), .prog_col(sda_prog_col),
    .prog_data(sda_prog_data), .prog_ready(sda_prog_ready),
    .x_valid(sda_x_valid), .x_row(sda_x_row), .x_ready(sda_x_ready),
    .res_valid(sda_res_valid), .res_idx(sda_res_idx), .res_row(sda_res_row),
    .overlap_cycles(sda_overlap_cycles), .x_stalls(sda_x_stalls), .prog_columns(sda_prog_columns));
endmodule
