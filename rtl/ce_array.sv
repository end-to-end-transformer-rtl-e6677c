// ce_array: the row of computing engines (one per head) and the key selector.
//
// D = N_HEADS * HEAD_DIM. Head h uses elements h*HEAD_DIM .. h*HEAD_DIM+63 of
// the query, key and value vectors. The key selector in front of the engines
// picks, per score operation, the fresh key straight from the K macro
// (key_sel = 1, the token being decoded) or a key restored by the
// dequantisation unit from the cache (key_sel = 0). The core instantiates two
// arrays: one produces the score matrix, the other the probability-weighted
// value sums (attention output). active_total accumulates the lanes that
// were switched on, since the last clear, over all engines.
//
// Follows the core diagram: CE rows fed by 64-element slices, a key selector
// with two key sources. Which key source is used when is this design's choice.
module ce_array #(
  parameter int N_HEADS  = 12,
  parameter int HEAD_DIM = 64,
  parameter int DW       = 8,
  parameter int ACC_W    = 32
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              sc_valid,
  input  logic                              key_sel,
  input  logic signed [DW-1:0]              q_vec     [N_HEADS*HEAD_DIM],
  input  logic signed [DW-1:0]              fresh_k   [N_HEADS*HEAD_DIM],
  input  logic signed [DW-1:0]              cache_k   [N_HEADS*HEAD_DIM],
  output logic                              score_valid,
  output logic signed [ACC_W-1:0]           scores    [N_HEADS],
  input  logic                              av_clear,
  input  logic                              av_valid,
  input  logic [8:0]                        p         [N_HEADS],
  input  logic signed [DW-1:0]              v_vec     [N_HEADS*HEAD_DIM],
  output logic signed [ACC_W-1:0]           acc       [N_HEADS*HEAD_DIM],
  input  logic                              cnt_clear,
  output logic [31:0]                       active_total
);
  logic signed [DW-1:0] k_sel [N_HEADS*HEAD_DIM];
  logic                 sv    [N_HEADS];
  logic [$clog2(HEAD_DIM+1)-1:0] lanes [N_HEADS];
  logic                 op_d;

  always_comb
    for (int i = 0; i < N_HEADS*HEAD_DIM; i++)
      k_sel[i] = key_sel ? fresh_k[i] : cache_k[i];

  for (genvar h = 0; h < N_HEADS; h++) begin : g_ce
    logic signed [DW-1:0]    qh [HEAD_DIM];
    logic signed [DW-1:0]    kh [HEAD_DIM];
    logic signed [DW-1:0]    vh [HEAD_DIM];
    logic signed [ACC_W-1:0] ah [HEAD_DIM];
    always_comb
      for (int i = 0; i < HEAD_DIM; i++) begin
        qh[i] = q_vec[h*HEAD_DIM + i];
        kh[i] = k_sel[h*HEAD_DIM + i];
        vh[i] = v_vec[h*HEAD_DIM + i];
      end
    ce #(.HEAD_DIM(HEAD_DIM), .DW(DW), .ACC_W(ACC_W)) u_ce (
      .clk, .rst_n,
      .sc_valid, .q(qh), .k(kh),
      .score_valid(sv[h]), .score(scores[h]),
      .av_clear, .av_valid, .p(p[h]), .v(vh), .acc(ah),
      .active_lanes(lanes[h])
    );
    always_comb
      for (int i = 0; i < HEAD_DIM; i++) acc[h*HEAD_DIM + i] = ah[i];
  end

  assign score_valid = sv[0];

  // Sum the active lanes of all engines one cycle after each operation.
  logic [31:0] lane_sum;
  always_comb begin
    lane_sum = '0;
    for (int h = 0; h < N_HEADS; h++) lane_sum = lane_sum + 32'(lanes[h]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_d         <= 1'b0;
      active_total <= '0;
    end else begin
      op_d <= (sc_valid || av_valid) && !av_clear;
      if (cnt_clear)  active_total <= '0;
      else if (op_d)  active_total <= active_total + lane_sum;
    end
  end
endmodule
