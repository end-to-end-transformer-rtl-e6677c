// ce: one computing engine, serving one attention head.
//
// Two operations, both one per cycle with registered results:
//  * score (sc_valid): score = sum_i q[i] * k[i] over the HEAD_DIM elements
//    of the head's query and key slices;
//  * weighted value sum (av_valid): acc[i] += p * v[i] for the head's value
//    slice and the token's probability p (0..256 standing for 0..1);
//    av_clear zeroes acc.
// A lane (one multiplier) is only activated when both of its operands are
// non-zero; pruned KV elements are 0, so the sparsity left by pruning turns
// lanes off. active_lanes reports how many lanes worked in the last operation.
//
// The paper: CEs exploit CPQ sparsity, work in parallel over the attention
// heads and switch on processing units according to the data. The operand
// gating as the means of doing so is this design's choice.
module ce #(
  parameter int HEAD_DIM = 64,
  parameter int DW       = 8,
  parameter int ACC_W    = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          sc_valid,
  input  logic signed [DW-1:0]          q [HEAD_DIM],
  input  logic signed [DW-1:0]          k [HEAD_DIM],
  output logic                          score_valid,
  output logic signed [ACC_W-1:0]       score,
  input  logic                          av_clear,
  input  logic                          av_valid,
  input  logic [8:0]                    p,
  input  logic signed [DW-1:0]          v [HEAD_DIM],
  output logic signed [ACC_W-1:0]       acc [HEAD_DIM],
  output logic [$clog2(HEAD_DIM+1)-1:0] active_lanes
);
  logic signed [ACC_W-1:0]          dot;
  logic [$clog2(HEAD_DIM+1)-1:0]    n_sc, n_av;

  always_comb begin
    dot  = '0;
    n_sc = '0;
    n_av = '0;
    for (int i = 0; i < HEAD_DIM; i++) begin
      if (q[i] != '0 && k[i] != '0) begin
        dot  = dot + ACC_W'(q[i] * k[i]);
        n_sc = n_sc + 1'b1;
      end
      if (p != '0 && v[i] != '0) n_av = n_av + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      score_valid  <= 1'b0;
      score        <= '0;
      active_lanes <= '0;
      for (int i = 0; i < HEAD_DIM; i++) acc[i] <= '0;
    end else begin
      score_valid <= sc_valid;
      if (sc_valid) begin
        score        <= dot;
        active_lanes <= n_sc;
      end
      if (av_clear) begin
        for (int i = 0; i < HEAD_DIM; i++) acc[i] <= '0;
      end else if (av_valid) begin
        active_lanes <= n_av;
        for (int i = 0; i < HEAD_DIM; i++)
          if (p != '0 && v[i] != '0)
            acc[i] <= acc[i] + ACC_W'($signed({1'b0, p}) * v[i]);
      end
    end
  end
endmodule
